// l2norm_unit: L2 norm of an activation vector as an 8-bit minifloat.
//
// On `start` all N elements are squared in parallel and summed by an adder
// tree; the sum (2*ACT_FRAC fraction bits) is registered and handed to the
// sequential square-root module, whose root has ACT_FRAC fraction bits. The
// root is then rounded down to the minifloat: with p the position of its
// leading one, exponent field p-1 (bias 7, so value 2^(p-ACT_FRAC)) and the
// next four bits as mantissa; values below 2^-6 are subnormal (m/16*2^-6),
// and values above the largest minifloat (15, 15: 496.0) saturate.
// `done` pulses with `norm` valid 3 + SUM_W/2 cycles after the start cycle
// (SUM_W = even width of the sum of squares, 56 bits at N = 256).
//
// Follows the paper: squarers on every input, an adder tree and a digital
// square-root module (Sec. III-C, Fig. 7), minifloat norm (Sec. III-A). Own
// choices: vector length N, the minifloat layout, truncating rounding.
module l2norm_unit
  import deepcam_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  act_t   x [N],
  output logic   busy,
  output logic   done,
  output norm_t  norm
);
  localparam int unsigned SQ_W  = 2 * ACT_W;
  localparam int unsigned SUM_W = ((SQ_W + $clog2(N) + 1) / 2) * 2;  // even
  localparam int unsigned RT_W  = SUM_W / 2;

  logic [SUM_W-1:0] tree_sum, sum_q;
  logic             sq_start, sq_busy, sq_done;
  logic [RT_W-1:0]  root;

  // squarers and adder tree (a balanced tree after synthesis)
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < N; i++)
      tree_sum = tree_sum + SUM_W'(unsigned'(64'(x[i]) * 64'(x[i])));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q <= '0; sq_start <= 1'b0;
    end else begin
      sq_start <= start && !busy;
      if (start && !busy) sum_q <= tree_sum;
    end
  end

  isqrt #(.IN_W(SUM_W)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand(sum_q),
    .busy(sq_busy), .done(sq_done), .root
  );

  assign busy = sq_start || sq_busy;

  // minifloat encoding of root / 2^ACT_FRAC
  function automatic norm_t to_minifloat(input logic [RT_W-1:0] q);
    int p;
    logic [RT_W+NORM_MW-1:0] qs;
    p = -1;
    for (int i = 0; i < RT_W; i++) if (q[i]) p = i;
    if (p <= 1) begin
      return {NORM_EW'(0), NORM_MW'(q << 2)};            // subnormal
    end else if (p - 1 > (1 << NORM_EW) - 1 + (ACT_FRAC - 8)) begin
      return '1;                                         // saturate
    end else begin
      qs = (RT_W+NORM_MW)'(q) << NORM_MW;
      return {NORM_EW'(p - 1 - (ACT_FRAC - 8)), NORM_MW'(qs >> p)};
    end
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; norm <= '0;
    end else begin
      done <= sq_done;
      if (sq_done) norm <= to_minifloat(root);
    end
  end
endmodule
