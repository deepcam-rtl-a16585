// tb_ctx_buffer: random writes and reads against an associative model,
// including read-during-write to the same address (old data returned).
module tb_ctx_buffer;
  import deepcam_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [3:0] rd_addr = 0, wr_addr = 0;
  context_t rd_data, wr_data = '0;
  context_t model [DEPTH];
  int checks = 0, failures = 0;
  ctx_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic context_t rnd_ctx();
    context_t c;
    for (int i = 0; i < HASH_W/32; i++) c.hash[i*32 +: 32] = $urandom;
    c.norm = 8'($urandom);
    return c;
  endfunction
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 4'(a); model[a] = rnd_ctx(); wr_data = model[a];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      automatic context_t e;
      @(negedge clk);
      rd_en = 1; rd_addr = 4'($urandom);
      e = model[rd_addr];
      wr_en = ($urandom % 2); wr_addr = (t % 4 == 0) ? rd_addr : 4'($urandom); wr_data = rnd_ctx();
      @(posedge clk); #1;
      if (wr_en) model[wr_addr] = wr_data;
      checks++;
      if (rd_data !== e) begin failures++; $display("read %0d wrong", rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
