// approx_cos: piecewise-linear cosine of the angle estimated from a Hamming
// distance.
//
// The angle between two hashed vectors is theta = pi * hd / k, with k the
// hash length (256 * nchunks). The cosine is approximated by the three
// segments the paper gives:
//     1 - theta/pi              for 0      < theta <= pi/3
//     -0.96*theta + 1.51        for pi/3   < theta <= pi/2
//     -cos(pi - theta)          for theta  > pi/2
// Working with r = theta/pi = hd/k avoids pi entirely: the segment is chosen
// by exact integer compares (3*hd <= k, 2*hd <= k), r is formed in Q0.16 by
// one division, and the middle segment uses 0.96*pi = 3.01593 in Q2.14
// (49413) and 1.51 in Q2.14 (24740). Output is signed Q2.14 (16384 = 1.0).
//
// Purely combinational. Follows the paper: the three segments and their
// constants (Eq. 5). Own choices: fixed-point formats and truncation. As in
// the paper, the first two segments do not meet at pi/3 (0.667 against
// 0.505).
module approx_cos
  import deepcam_pkg::*;
(
  input  hd_t      hd,       // 0 .. k
  input  nchunk_t  nchunks,  // 1..4, k = 256*nchunks
  output cos_t     cos_out,
  output logic [1:0] region  // 0: first segment, 1: middle, 2: mirrored (theta > pi/2)
);
  localparam int unsigned C_SLOPE = 49413; // 0.96*pi  in Q2.14
  localparam int unsigned C_OFF   = 24740; // 1.51     in Q2.14
  localparam int unsigned ONE     = 16384;

  logic [12:0] k;
  logic [12:0] h;          // distance folded into [0, k/2]
  logic        mirror;
  logic [16:0] r;          // h / k in Q0.16
  logic signed [17:0] mag;

  always_comb begin
    k      = 13'(nchunks) * 13'(CHUNK_W);
    mirror = (13'(hd) * 2) > k;
    h      = mirror ? (k - 13'(hd)) : 13'(hd);
    r      = (k == '0) ? '0 : 17'((29'(h) << 16) / 29'(k));
    if ((h * 3) <= k) begin
      mag = 18'(ONE) - 18'(r >> 2);                               // 1 - r
      region = mirror ? 2'd2 : 2'd0;
    end else begin
      mag = 18'(C_OFF) - 18'((34'(C_SLOPE) * 34'(r)) >> 16);      // 1.51 - 0.96*pi*r
      region = mirror ? 2'd2 : 2'd1;
    end
    cos_out = mirror ? cos_t'(-mag) : cos_t'(mag);
  end
endmodule
