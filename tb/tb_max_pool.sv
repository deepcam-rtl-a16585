// tb_max_pool: random values in windows of 1..4 with random gaps on the
// input and random back-pressure on the output; every output is compared
// with the maximum of its window, and the number of outputs is checked.
module tb_max_pool;
  import deepcam_pkg::*;
  logic clk = 0, rst_n = 0, en = 1;
  logic [3:0] win = 4'd4;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t in_data = '0, out_data;
  act_t exp_q [$];
  int checks = 0, failures = 0, stalls = 0;

  max_pool #(.WIN_W(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // output checker with random ready
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
        failures++; $display("pool out %0d unexpected", out_data);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (in_valid && !in_ready) stalls++;
  end
  always @(negedge clk) out_ready <= ($urandom % 4 != 0);

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int w = 1; w <= 4; w++) begin
      for (int g = 0; g < 30; g++) begin
        automatic act_t best = '0;
        automatic act_t vals [4];
        @(negedge clk); win = 4'(w); en = (w != 1) || (g % 2 == 0);
        for (int i = 0; i < w; i++) begin
          vals[i] = act_t'($signed($urandom % 2000) - 1000);
          if (i == 0 || vals[i] > best) best = vals[i];
        end
        exp_q.push_back(best);
        for (int i = 0; i < w; i++) begin
          in_valid = 1; in_data = vals[i];
          @(posedge clk); while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
          if ($urandom % 3 == 0) @(negedge clk);
        end
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
