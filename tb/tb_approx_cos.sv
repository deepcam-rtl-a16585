// tb_approx_cos: sweeps every Hamming distance 0..k for each hash length and
// compares the fixed-point cosine with the piecewise formula evaluated in
// real arithmetic (tolerance 4 LSB of Q2.14), and the segment reported.
module tb_approx_cos;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  hd_t hd = '0; nchunk_t nchunks = 3'd1; cos_t cos_out; logic [1:0] region;
  int checks = 0, failures = 0;
  approx_cos dut (.*);
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 1; n <= 4; n++) begin
      automatic int k = 256 * n;
      for (int h = 0; h <= k; h++) begin
        automatic real e, g;
        automatic int er;
        hd = hd_t'(h); nchunks = 3'(n); #1;
        e = cos_ref(h, k);
        g = real'(cos_out) / 16384.0;
        er = (2*h > k) ? 2 : (3*h <= k) ? 0 : 1;
        checks++;
        if (absr(e - g) > 4.0/16384.0 || int'(region) != er) begin
          failures++;
          if (failures < 10) $display("k=%0d hd=%0d got %f exp %f region %0d/%0d", k, h, g, e, region, er);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
