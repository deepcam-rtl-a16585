// tb_l2norm_unit: random vectors of 8 elements of varied magnitude. The
// minifloat norm must be the real L2 norm rounded down to a representable
// value (checked as: decoded <= norm < next representable value), or the
// largest value when the norm is beyond range. Also checks the latency.
module tb_l2norm_unit;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  act_t x [N];
  norm_t norm;
  int checks = 0, failures = 0;
  l2norm_unit #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real next_up(input logic [7:0] n);
    if (n == 8'hFF) return 1.0e30;
    return mf_real(n + 8'd1);
  endfunction

  initial begin
    for (int i = 0; i < N; i++) x[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic real s = 0.0, nr;
      automatic int cyc = 0;
      automatic int sh = $urandom % 20;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        x[i] = act_t'($signed($urandom) >>> (8 + sh));
        if (t == 0) x[i] = '0;
        if (t == 1) x[i] = ACT_MAX;
        s += (real'(x[i]) / 256.0) ** 2;
      end
      nr = s ** 0.5;
      start = 1;
      @(negedge clk); start = 0;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (!((mf_real(norm) <= nr * (1.0 + 1e-12)) && (nr < next_up(norm) * (1.0 + 1e-12)))) begin
        failures++; $display("norm %f got %h (%f)", nr, norm, mf_real(norm));
      end
      checks++;
      // done in cycle 3 + SUM_W/2 = 29 after start (SUM_W = 52 for N = 8)
      if (cyc != 28) begin failures++; $display("latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
