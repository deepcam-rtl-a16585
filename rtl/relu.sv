// relu: rectified linear unit, y = max(0, x), with a bypass (en low).
// Combinational. Follows the paper: ReLU is part of post-processing
// (Fig. 6, Fig. 7). The bypass is this design's choice, for layers without
// an activation function.
module relu
  import deepcam_pkg::*;
(
  input  logic en,
  input  act_t x,
  output act_t y
);
  assign y = (en && x < 0) ? '0 : x;
endmodule
