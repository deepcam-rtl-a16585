// search_reg: the search data register on top of the dynamic size CAM.
//
// It holds the context being searched (its 8-bit norm and its hash) and
// drives the search lines of the four 256-bit chunks. Only the chunks in use
// for the current hash length are driven; the search lines of the chunks
// beyond are held at the "don't care" level (sl_en low), so an unused chunk
// can never discharge a match line. The register loads on `load` and its
// contents appear on the outputs one clock later.
//
// Follows the paper: a search data register spanning all four chunks
// (Fig. 6). Own choices: holding the norm next to the hash, and masking the
// unused chunks here as well as with the chunk switches in dyn_cam.
module search_reg
  import deepcam_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  context_t             ctx_in,
  input  nchunk_t              nchunks,   // 1..4 chunks in use
  output norm_t                norm,
  output logic [HASH_W-1:0]    sl,        // search line values
  output logic [N_CHUNKS-1:0]  sl_en      // chunk search lines driven
);
  context_t ctx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ctx_q <= '0;
    else if (load) ctx_q <= ctx_in;
  end

  always_comb begin
    for (int c = 0; c < N_CHUNKS; c++) begin
      sl_en[c]                 = (32'(nchunks) > c);
      sl[c*CHUNK_W +: CHUNK_W] = sl_en[c] ? ctx_q.hash[c*CHUNK_W +: CHUNK_W] : '0;
    end
  end

  assign norm = ctx_q.norm;
endmodule
