// tb_relu: random signed inputs, checks max(0,x) and the bypass.
module tb_relu;
  import deepcam_pkg::*;
  logic en = 1; act_t x = '0, y;
  int checks = 0, failures = 0;
  relu dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 500; t++) begin
      int e;
      en = (t % 5 != 4); x = act_t'($urandom); #1;
      e = (en && int'(x) < 0) ? 0 : int'(x);
      checks++;
      if (int'(y) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
