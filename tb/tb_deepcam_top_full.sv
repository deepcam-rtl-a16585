// tb_deepcam_top_full: end-to-end test of the accelerator with every parameter at its default
// (64 CAM rows, 512 buffer entries, 256 crossbar inputs).
//
// The host side is modelled in the testbench: it programs the crossbar with
// random levels, writes a batchnorm table, and fills the buffer with
// contexts. Stationary contexts are made from a random search hash with a
// growing fraction of bits flipped per row, so the Hamming distances span
// 0..k and all three cosine segments occur. It then runs tiles in both
// dataflows, with every hash length, with and without batchnorm, ReLU and
// pooling, with random back-pressure on the result port, and with the
// context generator writing the next layer's contexts back into the buffer.
// Results are compared with a real-valued reference; generated contexts with
// the exact sign of the crossbar column sums and the rounded-down L2 norm of
// the activations the same tile produced on the result port. Each mechanism
// is counted and must have happened at least once.
module tb_deepcam_top_full;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  localparam int ROWS = 64, DEPTH = 512, XB_N = 256, WB = 4;
  localparam int AW = $clog2(DEPTH);
  localparam int NSRCH = 8;
  localparam int S_BASE = 0, Q_BASE = ROWS, O_BASE = ROWS + NSRCH;

  logic clk = 0, rst_n = 0;
  logic ext_wr_en = 0; logic [AW-1:0] ext_wr_addr = '0; context_t ext_wr_data = '0;
  logic ext_rd_en = 0; logic [AW-1:0] ext_rd_addr = '0; context_t ext_rd_data;
  logic bn_wr_en = 0; logic [$clog2(ROWS)-1:0] bn_wr_idx = '0;
  logic signed [GAMMA_W-1:0] bn_wr_gamma = '0; act_t bn_wr_beta = '0;
  logic prog_en = 0; logic [$clog2(XB_N)-1:0] prog_row = '0; logic [HASH_W*WB-1:0] prog_w = '0;
  logic start = 0; layer_cfg_t cfg_in = '0; logic busy, done;
  logic res_valid, res_ready = 1; act_t res_data;

  deepcam_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ws = 0, n_as = 0, n_bn = 0, n_relu_clip = 0, n_pool = 0, n_xf = 0;
  int n_res_stall = 0, n_xf_stall = 0;
  int n_k [5];
  int n_region [3];

  context_t ctxs [DEPTH];
  logic signed [GAMMA_W-1:0] gam [ROWS]; act_t bet [ROWS];
  int xw [XB_N][HASH_W];
  act_t got [$];

  initial begin
    #20000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) res_ready <= ($urandom % 3 != 0);
  always @(posedge clk) begin
    if (res_valid && res_ready) got.push_back(res_data);
    if (res_valid && !res_ready) n_res_stall++;
    if (dut.u_xf.in_valid && !dut.u_xf.in_ready) n_xf_stall++;
  end

  function automatic context_t rnd_ctx();
    context_t c;
    for (int i = 0; i < HASH_W/32; i++) c.hash[i*32 +: 32] = $urandom;
    c.norm = 8'(8'h60 + $urandom % 48);
    return c;
  endfunction

  task automatic run_tile(input layer_cfg_t c);
    int cyc = 0;
    @(negedge clk); cfg_in = c; start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("tile did not finish"); end
    if (c.df == DF_WEIGHT_STAT) n_ws++; else n_as++;
    n_k[c.nchunks]++;
  endtask

  // expected output stream of a tile, in real numbers, with tolerances
  task automatic expect_tile(input layer_cfg_t c, output real ev [$], output real et [$]);
    int k = 256 * int'(c.nchunks);
    int w = c.pool_en ? int'(c.pool_win) : 1;
    real lim = real'(ACT_MAX) / 256.0;
    ev.delete(); et.delete();
    for (int s = 0; s < int'(c.n_search); s++) begin
      real lv [ROWS]; real lt [ROWS];
      context_t q = ctxs[int'(c.strm_base) + s];
      for (int r = 0; r < int'(c.n_rows); r++) begin
        context_t a = ctxs[int'(c.stat_base) + r];
        int hd = popcount(a.hash ^ q.hash, k);
        int bi = (c.df == DF_WEIGHT_STAT) ? r : (s % ROWS);
        real d = dot_ref(hd, k, a.norm, q.norm);
        real tl = mf_real(a.norm) * mf_real(q.norm) * 4.0/16384.0 + 1.0/256.0;
        n_region[(2*hd > k) ? 2 : (3*hd <= k) ? 0 : 1]++;
        if (d > lim) d = lim;
        if (d < -lim) d = -lim;
        if (c.bn_en) begin
          d  = d * real'(gam[bi]) / 256.0 + real'(bet[bi]) / 256.0;
          tl = tl * absr(real'(gam[bi]) / 256.0) + 1.0/256.0;
        end
        if (c.relu_en && d < 0.0) begin d = 0.0; n_relu_clip++; end
        lv[r] = d; lt[r] = tl;
      end
      for (int r = 0; r < int'(c.n_rows); r += w) begin
        real m = lv[r]; real mt = lt[r];
        for (int i = 1; i < w; i++) begin
          if (lv[r+i] > m) m = lv[r+i];
          if (lt[r+i] > mt) mt = lt[r+i];
        end
        ev.push_back(m); et.push_back(mt);
        if (w > 1) n_pool++;
      end
    end
    if (c.bn_en) n_bn++;
  endtask

  task automatic check_results(input real ev [$], input real et [$]);
    checks++;
    if (got.size() != ev.size()) begin
      failures++; $display("%0d results, expected %0d", got.size(), ev.size());
    end else begin
      for (int i = 0; i < ev.size(); i++) begin
        real g = real'(got[i]) / 256.0;
        checks++;
        if (absr(g - ev[i]) > et[i]) begin
          failures++;
          if (failures < 10) $display("result %0d: %f expected %f", i, g, ev[i]);
        end
      end
    end
  endtask

  layer_cfg_t c;
  real ev [$]; real et [$];

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // crossbar levels
    for (int r = 0; r < XB_N; r++) begin
      @(negedge clk); prog_en = 1; prog_row = ($clog2(XB_N))'(r);
      for (int col = 0; col < HASH_W; col++) begin
        xw[r][col] = int'($signed($urandom % 16)) - 8;
        prog_w[col*WB +: WB] = WB'(xw[r][col]);
      end
    end
    @(negedge clk); prog_en = 0;
    // batchnorm table
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); bn_wr_en = 1; bn_wr_idx = ($clog2(ROWS))'(r);
      gam[r] = 16'($signed($urandom % 512) - 128); bet[r] = act_t'($signed($urandom % 2048) - 1024);
      bn_wr_gamma = gam[r]; bn_wr_beta = bet[r];
    end
    @(negedge clk); bn_wr_en = 0;
    // contexts: searched ones random, stationary ones near the first search
    for (int s = 0; s < NSRCH; s++) ctxs[Q_BASE + s] = rnd_ctx();
    for (int r = 0; r < ROWS; r++) begin
      automatic context_t a = ctxs[Q_BASE];
      for (int b = 0; b < HASH_W; b++)
        if (($urandom % ROWS) < r) a.hash[b] = ~a.hash[b];
      a.norm = 8'(8'h60 + $urandom % 48);
      ctxs[S_BASE + r] = a;
    end
    for (int i = 0; i < ROWS + NSRCH; i++) begin
      @(negedge clk); ext_wr_en = 1; ext_wr_addr = AW'(i); ext_wr_data = ctxs[i];
    end
    @(negedge clk); ext_wr_en = 0;

    // tiles on the result port, all hash lengths and both dataflows
    for (int t = 0; t < 4; t++) begin
      c = '0;
      c.df = dataflow_e'(t % 2); c.nchunks = 3'(4 - t);
      c.n_rows = 16'(ROWS); c.n_search = 16'(NSRCH);
      c.stat_base = 16'(S_BASE); c.strm_base = 16'(Q_BASE);
      c.bn_en = (t >= 2); c.relu_en = (t % 2 == 1);
      c.pool_en = (t == 1 || t == 2); c.pool_win = (t == 1) ? 4'd2 : 4'd4;
      got.delete();
      expect_tile(c, ev, et);
      run_tile(c);
      check_results(ev, et);
    end

    // next-layer contexts: the same tile once on the result port, then
    // through the context generator into the buffer
    c = '0;
    c.df = DF_ACT_STAT; c.nchunks = 3'd2;
    c.n_rows = 16'(ROWS); c.n_search = 16'(NSRCH);
    c.stat_base = 16'(S_BASE); c.strm_base = 16'(Q_BASE);
    c.relu_en = 1'b1; c.vlen = 16'(XB_N < ROWS ? XB_N : ROWS); c.out_base = 16'(O_BASE);
    got.delete();
    expect_tile(c, ev, et);
    run_tile(c);
    check_results(ev, et);
    c.xform_en = 1'b1;
    run_tile(c);
    begin
      automatic int vl = int'(c.vlen);
      automatic int nv = got.size() / vl;
      for (int v = 0; v < nv; v++) begin
        automatic real s2 = 0.0, nx, up;
        automatic logic [HASH_W-1:0] h;
        automatic context_t rd;
        automatic act_t vec [XB_N];
        for (int i = 0; i < XB_N; i++) vec[i] = '0;
        for (int i = 0; i < vl; i++) vec[i] = got[v*vl + i];
        for (int i = 0; i < XB_N; i++) s2 += (real'(vec[i]) / 256.0) * (real'(vec[i]) / 256.0);
        nx = s2 ** 0.5;
        for (int col = 0; col < HASH_W; col++) begin
          automatic longint cs = 0;
          for (int i = 0; i < XB_N; i++) cs += longint'(vec[i]) * longint'(xw[i][col]);
          h[col] = (cs < 0);
        end
        @(negedge clk); ext_rd_en = 1; ext_rd_addr = AW'(O_BASE + v);
        @(negedge clk); ext_rd_en = 0; rd = ext_rd_data;
        up = (rd.norm == 8'hFF) ? 1.0e30 : mf_real(rd.norm + 8'd1);
        checks += 2;
        if (rd.hash !== h) begin failures++; $display("context %0d: hash differs", v); end
        if (!(mf_real(rd.norm) <= nx * (1.0 + 1e-12) && nx < up)) begin
          failures++; $display("context %0d: norm %h for %f", v, rd.norm, nx);
        end
        n_xf++;
      end
    end

    // every mechanism must have happened
    begin
      automatic int mech [string];
      mech["weight-stationary tile"] = n_ws;
      mech["activation-stationary tile"] = n_as;
      mech["hash length 256"] = n_k[1]; mech["hash length 512"] = n_k[2];
      mech["hash length 768"] = n_k[3]; mech["hash length 1024"] = n_k[4];
      mech["cosine segment 1"] = n_region[0]; mech["cosine segment 2"] = n_region[1];
      mech["cosine mirrored"] = n_region[2];
      mech["batchnorm"] = n_bn; mech["relu clipping"] = n_relu_clip;
      mech["pooling window"] = n_pool; mech["generated context"] = n_xf;
      mech["result back-pressure"] = n_res_stall; mech["generator stall"] = n_xf_stall;
      foreach (mech[m]) begin
        $display("%-28s %0d", m, mech[m]);
        checks++;
        if (mech[m] == 0) begin failures++; $display("  never happened"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
