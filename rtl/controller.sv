// controller: sequencer of one tile of a layer on the accelerator.
//
// After `start` (configuration sampled in cfg) it
//   LOAD    reads n_rows contexts from the buffer (stat_base..) and writes
//           them into CAM rows 0..n_rows-1, one per cycle (buffer read
//           latency one cycle, so the write trails the read by one);
//   FETCH   reads the next search context (strm_base + s);
//   SEARCH  loads it into the search data register;
//   WAIT    waits until post-processing has taken the distances and sent
//           every lane on (post-processing busy low), then moves to the next
//           search;
//   DRAIN   after the last search waits until pooling, the output stream and
//           the context generator are empty, and pulses `done`.
// Contexts produced by the context generator are written back to the buffer
// at out_base, out_base+1, ... whenever they appear (wb_*). The buffer takes
// one write per cycle and write-back has priority over host writes, so
// ctx_ready is tied high and wb_en is ctx_valid passed through; both ports
// are kept so that a slower buffer could stall the generator.
// In weight-stationary dataflow the stationary contexts are weights and the
// searched ones activations; in activation-stationary dataflow the other way
// round. The sequence is the same; the dataflow only selects the batchnorm
// indexing in post-processing and, for the host, which buffer region is
// stat_base.
//
// The paper only names a controller (Fig. 3); this sequence is this design's.
module controller
  import deepcam_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned DEPTH = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  layer_cfg_t                cfg_in,
  output layer_cfg_t                cfg,        // held configuration
  output logic                      busy,
  output logic                      done,
  // buffer read port
  output logic                      rd_en,
  output logic [$clog2(DEPTH)-1:0]  rd_addr,
  // CAM
  output logic                      cam_wr_en,
  output logic [$clog2(ROWS)-1:0]   cam_wr_row,
  output logic                      srch_load,
  output logic [15:0]               srch_idx,
  // status of the datapath
  input  logic                      pp_busy,
  input  logic                      pool_pending,
  input  logic                      xf_idle,
  // write-back of generated contexts
  input  logic                      ctx_valid,
  output logic                      ctx_ready,
  output logic                      wb_en,
  output logic [$clog2(DEPTH)-1:0]  wb_addr
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FETCH, S_SEARCH, S_WAIT, S_DRAIN} state_e;
  state_e      state;
  logic [15:0] cnt;
  logic        load_q;
  logic [$clog2(ROWS)-1:0] row_q;
  logic [15:0] wb_cnt;
  logic [1:0]  wait_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; cfg <= '0; load_q <= 1'b0; row_q <= '0;
      srch_idx <= '0; done <= 1'b0; wb_cnt <= '0; wait_cnt <= '0;
    end else begin
      done   <= 1'b0;
      load_q <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cfg    <= cfg_in;
          cnt    <= '0;
          wb_cnt <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          load_q <= 1'b1;
          row_q  <= $clog2(ROWS)'(cnt);
          if (cnt + 1 >= cfg.n_rows) begin
            cnt   <= '0;
            state <= S_FETCH;
          end else begin
            cnt <= cnt + 1;
          end
        end
        S_FETCH: begin
          srch_idx <= cnt;
          state    <= S_SEARCH;
        end
        S_SEARCH: begin
          wait_cnt <= '0;
          state    <= S_WAIT;
        end
        S_WAIT: begin
          // distances arrive two cycles after the load; wait for them, then
          // for post-processing to finish
          if (wait_cnt != 2'd3) wait_cnt <= wait_cnt + 1'b1;
          else if (!pp_busy) begin
            if (cnt + 1 >= cfg.n_search) begin
              state <= S_DRAIN;
            end else begin
              cnt   <= cnt + 1;
              state <= S_FETCH;
            end
          end
        end
        S_DRAIN: if (!pp_busy && !pool_pending && xf_idle && !ctx_valid) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (ctx_valid && ctx_ready) wb_cnt <= wb_cnt + 1;
    end
  end

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    if (state == S_LOAD) begin
      rd_en   = 1'b1;
      rd_addr = $clog2(DEPTH)'(cfg.stat_base + cnt);
    end else if (state == S_FETCH) begin
      rd_en   = 1'b1;
      rd_addr = $clog2(DEPTH)'(cfg.strm_base + cnt);
    end
  end

  assign cam_wr_en  = load_q;
  assign cam_wr_row = row_q;
  assign srch_load  = (state == S_SEARCH);
  assign busy       = (state != S_IDLE);
  assign ctx_ready  = 1'b1;
  assign wb_en      = ctx_valid;
  assign wb_addr    = $clog2(DEPTH)'(cfg.out_base + wb_cnt);

  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == S_IDLE |-> cfg_in.n_rows >= 1 && cfg_in.n_rows <= 16'(ROWS));
  a_chunks: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == S_IDLE |-> cfg_in.nchunks >= 1 && cfg_in.nchunks <= 3'(N_CHUNKS));
endmodule
