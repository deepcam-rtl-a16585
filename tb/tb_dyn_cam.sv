// tb_dyn_cam: stores random contexts in the dynamic size CAM and searches
// with every hash length (1..4 chunks). Checks each row's Hamming distance
// over the first 256*n bits, the stored norms, and the two-cycle latency
// from the search-register load to hd_valid.
module tb_dyn_cam;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  nchunk_t nchunks = 3'd4;
  logic wr_en = 0; logic [2:0] wr_row = 0; context_t wr_ctx = '0;
  logic srch_load = 0; context_t srch_ctx = '0;
  norm_t srch_norm; norm_t row_norm [ROWS]; logic hd_valid; hd_t hd [ROWS];
  context_t model [ROWS];
  int checks = 0, failures = 0;

  dyn_cam #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic context_t rnd_ctx();
    context_t c;
    for (int i = 0; i < HASH_W/32; i++) c.hash[i*32 +: 32] = $urandom;
    c.norm = 8'($urandom);
    return c;
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = 1; wr_row = 3'(r); model[r] = rnd_ctx(); wr_ctx = model[r];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 24; t++) begin
      automatic int n = 1 + (t % 4);
      automatic int lat = 0;
      automatic context_t s = rnd_ctx();
      if (t == 4) s = model[2];            // exact match on row 2
      @(negedge clk); nchunks = 3'(n); srch_load = 1; srch_ctx = s;
      @(negedge clk); srch_load = 0;
      while (!hd_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 1) begin failures++; $display("latency %0d cycles after load cycle", lat+1); end
      checks++;
      if (srch_norm !== s.norm) failures++;
      for (int r = 0; r < ROWS; r++) begin
        automatic int e = popcount(model[r].hash ^ s.hash, 256*n);
        checks++;
        if (int'(hd[r]) != e) begin failures++; $display("t%0d row %0d n%0d: %0d vs %0d", t, r, n, hd[r], e); end
        checks++;
        if (row_norm[r] !== model[r].norm) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
