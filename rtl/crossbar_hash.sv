// crossbar_hash: BEHAVIOURAL MODEL of the non-volatile-memory crossbar that
// computes the activation hash sign(x*C) on chip. Not synthesizable logic in
// the real chip: the part is an analog FeFET crossbar with input DACs,
// column op-amps and one sign sense amplifier per column.
//
// Model. ROWS inputs x (act_t, as the DACs would receive them) drive the
// rows; each of the COLS columns holds one column of the random projection
// matrix C as WB-bit signed conductance levels. On `fire` the model forms
// every column sum  s_c = sum_r x_r * C[r][c]  and its sense amplifier
// outputs hash[c] = 1 when s_c is negative (the paper's amplifiers "detect
// the negative results"). hash_valid pulses one clock after fire. C is
// written one row per clock through prog_* (programming the NVM cells), as
// the host would before inference.
//
// Follows the paper: crossbar encoding C, DAC inputs, sign-only sensing in
// place of ADCs (Sec. III-C, Fig. 7). Own choices: integer levels for C,
// the one-cycle evaluation and the programming port.
module crossbar_hash
  import deepcam_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = HASH_W,
  parameter int unsigned WB   = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       prog_en,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [COLS*WB-1:0]         prog_w,     // column c at [c*WB +: WB]
  input  logic                       fire,
  input  act_t                       x [ROWS],
  output logic                       hash_valid,
  output logic [COLS-1:0]            hash
);
  logic signed [WB-1:0] c_mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en)
      for (int c = 0; c < COLS; c++) c_mem[prog_row][c] <= prog_w[c*WB +: WB];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hash_valid <= 1'b0;
      hash       <= '0;
    end else begin
      hash_valid <= fire;
      if (fire) begin
        for (int c = 0; c < COLS; c++) begin
          logic signed [47:0] s;
          s = '0;
          for (int r = 0; r < ROWS; r++) s = s + 48'(x[r]) * 48'(c_mem[r][c]);
          hash[c] <= (s < 0);
        end
      end
    end
  end
endmodule
