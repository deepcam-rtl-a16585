// batchnorm: inference-time batch normalisation, y = gamma*x + beta.
//
// The per-channel mean and variance are folded offline into gamma (signed
// Q8.8) and beta (act_t). Products are truncated toward minus infinity and
// the result saturates to act_t. With `en` low the input passes unchanged.
// Combinational.
//
// Follows the paper: batchnorm is one of the digital peripheral operations
// of the post-processing module (Sec. III-B). Own choices: the folded
// affine form and all formats; the paper gives no detail.
module batchnorm
  import deepcam_pkg::*;
(
  input  logic                       en,
  input  act_t                       x,
  input  logic signed [GAMMA_W-1:0]  gamma,
  input  act_t                       beta,
  output act_t                       y
);
  logic signed [63:0] t;
  always_comb begin
    t = ((64'(x) * 64'(gamma)) >>> GAMMA_FRAC) + 64'(beta);
    y = en ? sat_act(t) : x;
  end
endmodule
