// cam_chunk: one 256-bit-wide chunk of the dynamic size CAM, ROWS rows deep.
//
// Each row stores a 256-bit slice of a context hash. For a search, every
// cell whose stored bit differs from its search line pulls the row's match
// line segment down; the number of such cells is the row's mismatch count,
// the quantity the time-domain sense amplifier turns into a Hamming
// distance. This model gives that count directly as a population count of
// (stored XOR search). When the chunk's search lines are not driven
// (sl_en low, the don't-care level) no cell can mismatch and the count is 0.
//
// Write: one row per clock (wr_en, wr_row, wr_data). Search: mismatch counts
// are combinational in the stored rows and the search lines.
//
// Follows the paper: 256-bit chunk word, ROWS = M rows, XOR match behaviour
// of the FeFET CAM cell (Fig. 1, Fig. 6). Own choice: a digital population
// count stands in for the analog match-line discharge; rows reset to zero.
module cam_chunk
  import deepcam_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned W    = CHUNK_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [W-1:0]               wr_data,
  input  logic [W-1:0]               sl,
  input  logic                       sl_en,
  output logic [$clog2(W+1)-1:0]     mism [ROWS]
);
  logic [W-1:0] mem [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) mem[r] <= '0;
    end else if (wr_en) begin
      mem[wr_row] <= wr_data;
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      mism[r] = sl_en ? $clog2(W+1)'($countones(mem[r] ^ sl)) : '0;
    end
  end
endmodule
