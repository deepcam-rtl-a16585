// ctx_buffer: the context & data buffer between off-chip memory, the CAM and
// the transformation unit.
//
// DEPTH entries, each one context (8-bit norm + 1024-bit hash). One
// synchronous read port (data one cycle after rd_en) and one write port;
// a read and a write to the same address in one cycle return the old entry.
// Written as a memory array.
//
// The paper shows this buffer only as a block of the accelerator (Fig. 3,
// Fig. 7); its organisation, depth and ports are this design's.
module ctx_buffer
  import deepcam_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                      clk,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output context_t                  rd_data,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  context_t                  wr_data
);
  context_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
