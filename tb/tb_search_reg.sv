// tb_search_reg: loads contexts into the search data register and checks
// that only the chunks in use drive their search lines, that the norm is
// kept, and that the register holds its value without `load`.
module tb_search_reg;
  import deepcam_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  context_t ctx_in = '0;
  nchunk_t nchunks = 3'd4;
  norm_t norm; logic [HASH_W-1:0] sl; logic [N_CHUNKS-1:0] sl_en;
  int checks = 0, failures = 0;
  context_t held;

  search_reg dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check_out(input context_t c, input int n);
    checks++;
    if (norm !== c.norm) begin failures++; $display("norm %h vs %h", norm, c.norm); end
    for (int k = 0; k < N_CHUNKS; k++) begin
      logic [CHUNK_W-1:0] e = (k < n) ? c.hash[k*CHUNK_W +: CHUNK_W] : '0;
      checks++;
      if (sl[k*CHUNK_W +: CHUNK_W] !== e || sl_en[k] !== (k < n)) begin
        failures++; $display("chunk %0d wrong for n=%0d", k, n);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      automatic int n = 1 + (t % 4);
      @(negedge clk);
      for (int i = 0; i < HASH_W/32; i++) ctx_in.hash[i*32 +: 32] = $urandom;
      ctx_in.norm = 8'($urandom);
      load = 1; held = ctx_in;
      @(negedge clk); load = 0; nchunks = 3'(n);
      ctx_in = ~ctx_in;           // must not be taken without load
      #1 check_out(held, n);
      @(negedge clk); #1 check_out(held, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
