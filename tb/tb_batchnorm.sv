// tb_batchnorm: random inputs and parameters against floor(gamma*x/256)+beta
// computed in 64-bit integers, with saturation, plus the bypass.
module tb_batchnorm;
  import deepcam_pkg::*;
  logic en = 1; act_t x = '0, beta = '0, y; logic signed [15:0] gamma = '0;
  int checks = 0, failures = 0;
  batchnorm dut (.*);
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic longint p, e;
      en = (t % 10 != 9);
      x = act_t'($urandom); gamma = 16'($urandom); beta = act_t'($urandom);
      if (t % 3 == 0) begin x = act_t'($signed($urandom % 4096) - 2048); gamma = 16'($signed($urandom % 1024) - 512); end
      #1;
      p = longint'(x) * longint'(gamma);
      e = ((p - ((p % 256 + 256) % 256)) / 256) + longint'(beta);
      if (e > 64'sd8388607) e = 8388607;
      if (e < -64'sd8388608) e = -8388608;
      if (!en) e = longint'(x);
      checks++;
      if (longint'(y) != e) begin failures++; if (failures < 10) $display("x=%0d g=%0d b=%0d y=%0d e=%0d", x, gamma, beta, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
