// tb_approx_dot: random distances, hash lengths and minifloat norms; the
// fixed-point product is compared with norm_a*norm_b*cos evaluated in real
// arithmetic, allowing for the truncation of the cosine and the output LSB.
module tb_approx_dot;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  hd_t hd = '0; nchunk_t nchunks = 3'd1; norm_t norm_a = '0, norm_b = '0;
  act_t dot; logic [1:0] region;
  int checks = 0, failures = 0;
  approx_dot dut (.*);
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int n = 1 + ($urandom % 4);
      automatic int k = 256 * n;
      automatic int h = $urandom % (k + 1);
      automatic real e, g, tol, lim;
      nchunks = 3'(n); hd = hd_t'(h);
      norm_a = 8'($urandom); norm_b = 8'($urandom);
      if (t < 4) begin norm_a = 8'hFF; norm_b = 8'hFF; h = (t % 2) ? k : 0; hd = hd_t'(h); end
      #1;
      e = dot_ref(h, k, norm_a, norm_b);
      lim = real'(ACT_MAX) / 256.0;
      if (e > lim) e = lim;
      if (e < -lim) e = -lim;
      g = real'(dot) / 256.0;
      tol = absr(mf_real(norm_a) * mf_real(norm_b)) * 4.0 / 16384.0 + 1.0 / 256.0;
      checks++;
      if (absr(e - g) > tol) begin
        failures++;
        if (failures < 10) $display("hd=%0d k=%0d na=%h nb=%h got %f exp %f", h, k, norm_a, norm_b, g, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
