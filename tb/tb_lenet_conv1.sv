// tb_lenet_conv1: the first convolution layer of LeNet5 on the accelerator
// at its default size, activation-stationary, hash length 256.
//
// Layer: one 32x32 input channel, six 5x5 kernels, stride 1, so 784 output
// positions and 6 output channels. The testbench acts as the host software:
// it makes a synthetic image and kernels, forms every 5x5 window, and
// computes the contexts (minifloat L2 norm, 256-bit sign(xC) hash with a
// Gaussian C). The 784 windows are processed in 13 tiles of up to 64 CAM
// rows; before each tile the host writes that tile's window contexts into
// the buffer. Every output is checked against the approximate dot product
// computed from the same contexts, and the approximation as a whole is
// checked against the exact convolution: the correlation must exceed 0.8
// (about 0.88 is reached with these data at k = 256).
module tb_lenet_conv1;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  localparam int ROWS = 64, IMG = 32, KS = 5, OUT = IMG - KS + 1, NK = 6, K = 256;
  localparam int NWIN = OUT * OUT, VL = KS * KS;
  localparam int KBASE = 0, WBASE = 16;

  logic clk = 0, rst_n = 0;
  logic ext_wr_en = 0; logic [8:0] ext_wr_addr = '0; context_t ext_wr_data = '0;
  logic ext_rd_en = 0; logic [8:0] ext_rd_addr = '0; context_t ext_rd_data;
  logic bn_wr_en = 0; logic [5:0] bn_wr_idx = '0;
  logic signed [GAMMA_W-1:0] bn_wr_gamma = '0; act_t bn_wr_beta = '0;
  logic prog_en = 0; logic [7:0] prog_row = '0; logic [HASH_W*4-1:0] prog_w = '0;
  logic start = 0; layer_cfg_t cfg_in = '0; logic busy, done;
  logic res_valid, res_ready = 1; act_t res_data;

  deepcam_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, tiles = 0;
  real img [IMG][IMG];
  real ker [NK][VL];
  real cmat [VL][K];
  context_t kctx [NK];
  context_t wctx [NWIN];
  real wvec [NWIN][VL];
  act_t got [$];
  real sx = 0, sy = 0, sxx = 0, syy = 0, sxy = 0;
  int n_pairs = 0;

  always @(posedge clk) if (res_valid && res_ready) got.push_back(res_data);

  initial begin
    #50000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real urand();
    return real'($urandom % 1000000) / 1000000.0;
  endfunction
  function automatic real gauss();   // sum of 12 uniforms - 6
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += urand();
    return s - 6.0;
  endfunction
  // round a positive real down to the minifloat
  function automatic logic [7:0] mf_enc(input real v);
    for (int e = 15; e >= 1; e--) begin
      real base = 2.0 ** (e - 7);
      if (v >= base) begin
        int m = int'($floor((v / base - 1.0) * 16.0));
        if (m > 15) m = 15;
        return {4'(e), 4'(m)};
      end
    end
    return {4'd0, 4'(int'($floor(v / (2.0 ** -6) * 16.0)))};
  endfunction
  function automatic context_t make_ctx(input real v [VL]);
    context_t c = '0;
    real n2 = 0.0;
    for (int i = 0; i < VL; i++) n2 += v[i] * v[i];
    c.norm = mf_enc(n2 ** 0.5);
    for (int j = 0; j < K; j++) begin
      real p = 0.0;
      for (int i = 0; i < VL; i++) p += v[i] * cmat[i][j];
      c.hash[j] = (p < 0.0);
    end
    return c;
  endfunction

  initial begin
    // host software: data and contexts
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++)
        img[y][x] = 0.5 + 0.4 * $sin(real'(x) / 3.0) * $cos(real'(y) / 4.0) + 0.1 * urand();
    for (int k = 0; k < NK; k++) for (int i = 0; i < VL; i++) ker[k][i] = 0.3 * gauss();
    for (int i = 0; i < VL; i++) for (int j = 0; j < K; j++) cmat[i][j] = gauss();
    for (int k = 0; k < NK; k++) kctx[k] = make_ctx(ker[k]);
    for (int w = 0; w < NWIN; w++) begin
      for (int i = 0; i < VL; i++) wvec[w][i] = img[w / OUT + i / KS][w % OUT + i % KS];
      wctx[w] = make_ctx(wvec[w]);
    end

    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NK; k++) begin
      @(negedge clk); ext_wr_en = 1; ext_wr_addr = 9'(KBASE + k); ext_wr_data = kctx[k];
    end
    @(negedge clk); ext_wr_en = 0;

    for (int w0 = 0; w0 < NWIN; w0 += ROWS) begin
      automatic int nr = (NWIN - w0 < ROWS) ? NWIN - w0 : ROWS;
      automatic layer_cfg_t c = '0;
      automatic int cyc = 0;
      for (int r = 0; r < nr; r++) begin
        @(negedge clk); ext_wr_en = 1; ext_wr_addr = 9'(WBASE + r); ext_wr_data = wctx[w0 + r];
      end
      @(negedge clk); ext_wr_en = 0;
      c.df = DF_ACT_STAT; c.nchunks = 3'(K / 256);
      c.n_rows = 16'(nr); c.stat_base = 16'(WBASE);
      c.n_search = 16'(NK); c.strm_base = 16'(KBASE);
      got.delete();
      @(negedge clk); cfg_in = c; start = 1;
      @(negedge clk); start = 0;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      tiles++;
      checks++;
      if (got.size() != nr * NK) begin failures++; $display("tile %0d: %0d outputs", tiles, got.size()); continue; end
      for (int k = 0; k < NK; k++)
        for (int r = 0; r < nr; r++) begin
          automatic context_t a = wctx[w0 + r];
          automatic int hd = popcount(a.hash ^ kctx[k].hash, K);
          automatic real e = dot_ref(hd, K, a.norm, kctx[k].norm);
          automatic real g = real'(got[k * nr + r]) / 256.0;
          automatic real tl = mf_real(a.norm) * mf_real(kctx[k].norm) * 4.0/16384.0 + 1.0/256.0;
          automatic real ex = 0.0;
          for (int i = 0; i < VL; i++) ex += wvec[w0 + r][i] * ker[k][i];
          checks++;
          if (absr(g - e) > tl) begin failures++; if (failures < 10) $display("w%0d k%0d: %f vs %f", w0 + r, k, g, e); end
          sx += ex; sy += g; sxx += ex * ex; syy += g * g; sxy += ex * g; n_pairs++;
        end
    end
    begin
      automatic real n = real'(n_pairs);
      automatic real corr = (n * sxy - sx * sy) / (((n * sxx - sx * sx) * (n * syy - sy * sy)) ** 0.5);
      $display("tiles %0d, outputs %0d, correlation with exact convolution %f", tiles, n_pairs, corr);
      checks++;
      if (tiles != 13 || n_pairs != NWIN * NK) failures++;
      checks++;
      if (!(corr > 0.8)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
