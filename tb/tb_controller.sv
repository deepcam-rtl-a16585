// tb_controller: runs the controller against a simple model of the
// datapath (post-processing busy for a random time after each search,
// random context write-backs). Checks the buffer read addresses of the load
// and search phases, that each CAM row write follows its read by one cycle,
// that searches are issued in order and never while post-processing is
// busy, the write-back addresses, and the done pulse.
module tb_controller;
  import deepcam_pkg::*;
  localparam int ROWS = 8, DEPTH = 64;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg_in = '0, cfg;
  logic busy, done, rd_en, cam_wr_en, srch_load, ctx_ready, wb_en;
  logic [5:0] rd_addr, wb_addr; logic [2:0] cam_wr_row; logic [15:0] srch_idx;
  logic pp_busy = 0, pool_pending = 0, xf_idle = 1, ctx_valid = 0;
  int checks = 0, failures = 0;
  int pp_left = 0;
  int rd_log [$]; int wr_log [$]; int srch_log [$]; int wb_log [$];
  int last_rd = -1;

  controller #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // datapath model
  int pipe = 0;
  always @(posedge clk) begin
    if (srch_load) begin
      checks++;
      if (pp_busy) begin failures++; $display("search while busy"); end
      srch_log.push_back(int'(srch_idx));
      pipe <= 2;
    end
    if (pipe == 1) begin pp_busy <= 1; pp_left <= 1 + ($urandom % 12); end
    if (pipe > 0) pipe <= pipe - 1;
    if (pp_busy) begin
      if (pp_left <= 1) pp_busy <= 0;
      pp_left <= pp_left - 1;
    end
    ctx_valid <= ($urandom % 9 == 0);
    if (wb_en) wb_log.push_back(int'(wb_addr));
    if (cam_wr_en && rst_n) begin
      checks++;
      if (last_rd < 0) begin failures++; $display("CAM write without read at %0t", $time); end
      wr_log.push_back(int'(cam_wr_row));
    end
    last_rd <= rd_en ? int'(rd_addr) : -1;
    if (rd_en) rd_log.push_back(int'(rd_addr));
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      automatic int nr = 1 + ($urandom % ROWS);
      automatic int ns = 1 + ($urandom % 5);
      automatic int sb = $urandom % 16, qb = 20 + ($urandom % 16), ob = 40;
      automatic int cyc = 0;
      rd_log.delete(); wr_log.delete(); srch_log.delete(); wb_log.delete();
      @(negedge clk);
      cfg_in = '0;
      cfg_in.df = dataflow_e'(t % 2); cfg_in.nchunks = 3'(1 + t % 4);
      cfg_in.n_rows = 16'(nr); cfg_in.n_search = 16'(ns);
      cfg_in.stat_base = 16'(sb); cfg_in.strm_base = 16'(qb); cfg_in.out_base = 16'(ob);
      start = 1;
      @(negedge clk); start = 0;
      while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
      checks++;
      if (!done) failures++;
      checks++;
      if (rd_log.size() != nr + ns || wr_log.size() != nr || srch_log.size() != ns) begin
        failures++; $display("counts rd %0d wr %0d srch %0d", rd_log.size(), wr_log.size(), srch_log.size());
      end else begin
        for (int i = 0; i < nr; i++) begin
          checks += 2;
          if (rd_log[i] != sb + i) failures++;
          if (wr_log[i] != i) failures++;
        end
        for (int s = 0; s < ns; s++) begin
          checks += 2;
          if (rd_log[nr + s] != qb + s) failures++;
          if (srch_log[s] != s) failures++;
        end
      end
      for (int i = 0; i < wb_log.size(); i++) begin
        checks++;
        if (wb_log[i] != ob + i) begin failures++; $display("wb %0d at %0d", i, wb_log[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
