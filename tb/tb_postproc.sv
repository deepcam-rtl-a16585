// tb_postproc: random search results for an 8-row post-processing unit in
// both dataflows, with and without batchnorm, ReLU and pooling, and with
// random back-pressure. Each output is compared with a real-valued
// reference (approximate dot product, gamma*x+beta, max(0,.), window max)
// within the fixed-point tolerance; the output count per search and the
// busy flag are checked too.
module tb_postproc;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  nchunk_t nchunks = 3'd1; dataflow_e df = DF_ACT_STAT;
  logic [3:0] n_rows = 4'd8;
  logic bn_en = 0, relu_en = 0, pool_en = 0; logic [3:0] pool_win = 4'd1;
  logic signed [15:0] bn_gamma [ROWS]; act_t bn_beta [ROWS];
  logic hd_valid = 0; hd_t hd [ROWS]; norm_t row_norm [ROWS]; norm_t srch_norm = '0;
  logic [15:0] srch_idx = '0;
  logic busy, out_valid, out_ready = 1; act_t out_data;
  real exp_v [$]; real exp_t [$];
  int checks = 0, failures = 0, outs = 0;

  postproc #(.ROWS(ROWS), .WIN_W(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) out_ready <= ($urandom % 3 != 0);
  always @(posedge clk) if (out_valid && out_ready) begin
    automatic real g = real'(out_data) / 256.0;
    checks++; outs++;
    if (exp_v.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      if (absr(g - exp_v[0]) > exp_t[0]) begin
        failures++; $display("got %f expected %f (tol %f)", g, exp_v[0], exp_t[0]);
      end
      void'(exp_v.pop_front()); void'(exp_t.pop_front());
    end
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin hd[r] = '0; row_norm[r] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int n = 1 + ($urandom % 4);
      automatic int k = 256 * n;
      automatic int w = (t % 3 == 0) ? 2 : (t % 3 == 1) ? 4 : 1;
      automatic int nr = (w == 1) ? 1 + ($urandom % 8) : 8;
      automatic real lv [ROWS]; automatic real lt [ROWS];
      automatic real lim = real'(ACT_MAX) / 256.0;
      @(negedge clk);
      nchunks = 3'(n); df = dataflow_e'(t % 2); n_rows = 4'(nr);
      bn_en = (t % 4 >= 2); relu_en = (t % 5 != 0); pool_en = (w != 1); pool_win = 4'(w);
      srch_norm = 8'(8'h50 + $urandom % 64); srch_idx = 16'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        hd[r] = hd_t'($urandom % (k + 1));
        row_norm[r] = 8'(8'h50 + $urandom % 64);
        bn_gamma[r] = 16'($signed($urandom % 1024) - 256);
        bn_beta[r]  = act_t'($signed($urandom % 4096) - 2048);
      end
      for (int r = 0; r < ROWS; r++) begin
        automatic int bi = (df == DF_WEIGHT_STAT) ? r : int'(srch_idx[2:0]);
        automatic real d = dot_ref(int'(hd[r]), k, row_norm[r], srch_norm);
        automatic real tl = absr(mf_real(row_norm[r]) * mf_real(srch_norm)) * 4.0/16384.0 + 1.0/256.0;
        if (d > lim) d = lim;
        if (d < -lim) d = -lim;
        if (bn_en) begin
          d  = d * real'(bn_gamma[bi]) / 256.0 + real'(bn_beta[bi]) / 256.0;
          tl = tl * absr(real'(bn_gamma[bi]) / 256.0) + 1.0/256.0;
        end
        if (relu_en && d < 0.0) d = 0.0;
        lv[r] = d; lt[r] = tl;
      end
      for (int r = 0; r < nr; r += w) begin
        automatic real m = lv[r]; automatic real mt = lt[r];
        for (int i = 1; i < w; i++) begin
          if (lv[r+i] > m) m = lv[r+i];
          if (lt[r+i] > mt) mt = lt[r+i];
        end
        exp_v.push_back(m); exp_t.push_back(mt);
      end
      hd_valid = 1;
      @(negedge clk); hd_valid = 0;
      checks++;
      if (!busy) begin failures++; $display("busy low during sending"); end
      while (busy) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_v.size() != 0) begin failures++; $display("%0d outputs missing", exp_v.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
