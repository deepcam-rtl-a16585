// dyn_cam: the dynamic size CAM that computes, in one search, the Hamming
// distance between a search context and every stored row.
//
// Four 256-bit chunks (chunk 0 first) share the match lines of each row.
// Between neighbouring chunks sits a switch (a transmission gate in the
// paper) driven by an enable: gate i joins chunk i to chunk i+1. For a hash
// length of nchunks*256 bits the first nchunks-1 gates are closed, so a row's
// distance is the sum of the mismatch counts of chunk 0 and of every chunk
// connected to it through closed gates. The sense stage is clocked: the
// distances are registered.
//
// Timing: `srch_load` with a context at cycle t loads the search register;
// the distances of all rows are valid (hd_valid) at cycle t+2, whatever the
// number of rows (O(1) in the number of stored vectors). Rows are written
// one per cycle through wr_* (hash into the chunks, norm into a
// register beside the row); the hash length must be held while a search is
// in flight.
//
// Follows the paper: four 256-bit chunks, up to 1024 bits, M rows,
// enable-driven switches between adjacent chunks, search data register
// (Fig. 6, Sec. III-B). Own choices: the digital distance stands in for the
// time-to-digital sense amplifier; one-cycle sense latency.
module dyn_cam
  import deepcam_pkg::*;
#(
  parameter int unsigned ROWS = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  nchunk_t                  nchunks,
  input  logic                     wr_en,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  context_t                 wr_ctx,
  input  logic                     srch_load,
  input  context_t                 srch_ctx,
  output norm_t                    srch_norm,
  output norm_t                    row_norm [ROWS],
  output logic                     hd_valid,
  output hd_t                      hd [ROWS]
);
  logic [HASH_W-1:0]       sl;
  logic [N_CHUNKS-1:0]     sl_en;
  logic [N_CHUNKS-2:0]     gate_en;     // switch between chunk i and i+1
  logic [N_CHUNKS-1:0]     connected;   // chunk joined to chunk 0
  logic [CHUNK_HD_W-1:0]   mism [N_CHUNKS][ROWS];
  logic                    srch_q;
  hd_t                     hd_next [ROWS];

  search_reg u_sreg (
    .clk, .rst_n, .load(srch_load), .ctx_in(srch_ctx), .nchunks,
    .norm(srch_norm), .sl, .sl_en
  );

  for (genvar c = 0; c < N_CHUNKS; c++) begin : g_chunk
    cam_chunk #(.ROWS(ROWS), .W(CHUNK_W)) u_chunk (
      .clk, .rst_n,
      .wr_en,
      .wr_row,
      .wr_data (wr_ctx.hash[c*CHUNK_W +: CHUNK_W]),
      .sl      (sl[c*CHUNK_W +: CHUNK_W]),
      .sl_en   (sl_en[c]),
      .mism    (mism[c])
    );
  end

  always_comb begin
    for (int g = 0; g < N_CHUNKS-1; g++) gate_en[g] = (32'(nchunks) > g + 1);
    for (int c = 0; c < N_CHUNKS; c++) begin
      logic joined;
      joined = 1'b1;
      for (int g = 0; g < c; g++) joined = joined & gate_en[g];
      connected[c] = joined;
    end
  end

  // norms of the stored contexts, kept beside the CAM rows
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) row_norm[r] <= '0;
    end else if (wr_en) begin
      row_norm[wr_row] <= wr_ctx.norm;
    end
  end

  // a row's distance: the mismatch counts of the chunks joined to chunk 0
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      hd_next[r] = '0;
      for (int c = 0; c < N_CHUNKS; c++)
        if (connected[c]) hd_next[r] = hd_next[r] + HD_W'(mism[c][r]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      srch_q   <= 1'b0;
      hd_valid <= 1'b0;
      for (int r = 0; r < ROWS; r++) hd[r] <= '0;
    end else begin
      srch_q   <= srch_load;
      hd_valid <= srch_q;
      if (srch_q) begin
        for (int r = 0; r < ROWS; r++) hd[r] <= hd_next[r];
      end
    end
  end
endmodule
