// tb_act_ctx_gen: programs a random 8-input crossbar, streams activation
// vectors of random length 1..8 with random gaps and random back-pressure
// on the context output, and checks every generated context: the norm must
// be the real L2 norm rounded down to a minifloat, and each of the 1024
// hash bits the sign of the column sum (1 for negative). Also checks that
// the input is stalled while a context is being made.
module tb_act_ctx_gen;
  import deepcam_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 8, WB = 4;
  logic clk = 0, rst_n = 0;
  logic [3:0] vlen = 4'd8;
  logic in_valid = 0, in_ready; act_t in_data = '0;
  logic prog_en = 0; logic [2:0] prog_row = 0; logic [HASH_W*WB-1:0] prog_w = '0;
  logic ctx_valid, ctx_ready = 1; context_t ctx;
  int w [N][HASH_W];
  real exp_n [$]; logic [HASH_W-1:0] exp_h [$];
  int checks = 0, failures = 0, stalls = 0, got = 0;

  act_ctx_gen #(.N(N), .WB(WB)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) ctx_ready <= ($urandom % 2 == 0);
  always @(posedge clk) begin
    if (in_valid && !in_ready) stalls++;
    if (ctx_valid && ctx_ready) begin
      automatic real nx;
      automatic real up;
      got++;
      checks += 2;
      if (exp_n.size() == 0) failures += 2;
      else begin
        nx = exp_n.pop_front();
        up = (ctx.norm == 8'hFF) ? 1.0e30 : mf_real(ctx.norm + 8'd1);
        if (!(mf_real(ctx.norm) <= nx * (1.0 + 1e-12) && nx < up)) begin
          failures++; $display("norm %f got %h", nx, ctx.norm);
        end
        if (ctx.hash !== exp_h.pop_front()) begin failures++; $display("hash mismatch"); end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk); prog_en = 1; prog_row = 3'(r);
      for (int c = 0; c < HASH_W; c++) begin
        w[r][c] = int'($signed($urandom % 16)) - 8;
        prog_w[c*WB +: WB] = WB'(w[r][c]);
      end
    end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 30; t++) begin
      automatic int vl = 1 + ($urandom % N);
      automatic act_t v [N];
      automatic real s = 0.0;
      automatic logic [HASH_W-1:0] h;
      if (t < 3) vl = N;
      for (int i = 0; i < N; i++) v[i] = (i < vl) ? act_t'($signed($urandom % 40000) - 20000) : '0;
      for (int i = 0; i < N; i++) s += (real'(v[i]) / 256.0) ** 2;
      for (int c = 0; c < HASH_W; c++) begin
        automatic longint cs = 0;
        for (int i = 0; i < N; i++) cs += longint'(v[i]) * longint'(w[i][c]);
        h[c] = (cs < 0);
      end
      exp_n.push_back(s ** 0.5); exp_h.push_back(h);
      @(negedge clk); vlen = 4'(vl);
      for (int i = 0; i < vl; i++) begin
        in_valid = 1; in_data = v[i];
        @(posedge clk); while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
        if ($urandom % 4 == 0) @(negedge clk);
      end
    end
    repeat (200) @(negedge clk);
    checks++;
    if (got != 30) begin failures++; $display("%0d contexts", got); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
