// approx_dot: approximate (geometric) dot product of a stored context and a
// search context from their Hamming distance.
//
//     x . y  ~  ||x|| * ||y|| * cos(pi * hd / k)
//
// The two norms are 8-bit minifloats (4-bit exponent, bias 7, 4-bit
// mantissa). Their 5-bit significands are multiplied with the Q2.14 cosine
// from approx_cos, and the product is shifted by the sum of the two
// exponents into act_t (signed, ACT_FRAC fraction bits) with saturation:
//     out = sig_a*sig_b*cos * 2^(ea + eb - 2*7 - 4 - 4 - 14 + ACT_FRAC)
// Right shifts round toward minus infinity.
//
// Purely combinational. Follows the paper: approximate cosine followed by a
// multiplier with both L2 norms (Eq. 4, Fig. 7). Own choices: the minifloat
// layout and the fixed-point output format.
module approx_dot
  import deepcam_pkg::*;
(
  input  hd_t      hd,
  input  nchunk_t  nchunks,
  input  norm_t    norm_a,
  input  norm_t    norm_b,
  output act_t     dot,
  output logic [1:0] region
);
  cos_t cosv;
  logic signed [31:0] prod;
  int   sh;              // left shift, negative means right shift
  logic signed [63:0] wide;

  approx_cos u_cos (.hd, .nchunks, .cos_out(cosv), .region);

  always_comb begin
    prod = 32'(signed'({1'b0, norm_sig(norm_a)})) * 32'(signed'({1'b0, norm_sig(norm_b)}))
           * 32'(cosv);
    sh   = int'(norm_exp(norm_a[NORM_W-1 -: NORM_EW])) + int'(norm_exp(norm_b[NORM_W-1 -: NORM_EW]))
           - 2*NORM_BIAS - 2*NORM_MW - COS_FRAC + ACT_FRAC;
    if (sh >= 0) wide = 64'(prod) <<< sh;
    else         wide = 64'(prod) >>> (-sh);
    dot = sat_act(wide);
  end
endmodule
