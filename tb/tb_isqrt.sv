// tb_isqrt: random and corner radicands; checks root^2 <= x < (root+1)^2
// and that done comes IN_W/2 + 1 cycles after the start cycle.
module tb_isqrt;
  localparam int IN_W = 56;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [IN_W-1:0] radicand = '0;
  logic [IN_W/2-1:0] root;
  int checks = 0, failures = 0;
  isqrt #(.IN_W(IN_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic logic [63:0] x = {$urandom, $urandom} >> ($urandom % 64);
      automatic int cyc = 0;
      automatic logic [63:0] r, r1;
      x = x & ((64'd1 << IN_W) - 1);
      if (t == 0) x = 0;
      if (t == 1) x = (64'd1 << IN_W) - 1;
      if (t == 2) x = 64'd144;
      @(negedge clk); start = 1; radicand = IN_W'(x);
      @(negedge clk); start = 0;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      r = 64'(root); r1 = r + 1;
      checks++;
      if (!(r * r <= x && r1 * r1 > x)) begin failures++; $display("sqrt(%0d) gave %0d", x, root); end
      checks++;
      if (cyc + 1 != IN_W/2 + 1) begin failures++; $display("latency %0d", cyc + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
