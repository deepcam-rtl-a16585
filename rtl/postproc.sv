// postproc: the post-processing sub-module. It turns the Hamming distances
// of one search into output activations.
//
// When hd_valid pulses, every one of the ROWS lanes computes in parallel
// approximate dot product -> batchnorm -> ReLU for its row and the results
// are registered. The first n_rows lanes are then sent, lane 0 first, one per
// cycle, through the max-pooling unit onto the output stream (valid/ready).
// `busy` is high from hd_valid until the last lane has entered the pooling
// unit; the controller issues the next search only when busy is low, and a
// stalled output stream stalls the lanes.
//
// Batchnorm parameters are per output channel. With weight-stationary
// dataflow the rows are channels, so lane r uses bn entry r; with
// activation-stationary dataflow the search vector is the channel, so all
// lanes use entry srch_idx mod ROWS.
//
// Follows the paper: approximate dot product, ReLU and pooling in that order
// (Fig. 6, Fig. 7) and batchnorm in the digital domain (Sec. III-B). Own
// choices: batchnorm placed before ReLU, lane serialisation, the bn table
// indexing and all handshakes.
module postproc
  import deepcam_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned WIN_W = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration, held during a layer
  input  nchunk_t                    nchunks,
  input  dataflow_e                  df,
  input  logic [$clog2(ROWS):0]      n_rows,     // 1..ROWS lanes in use
  input  logic                       bn_en,
  input  logic                       relu_en,
  input  logic                       pool_en,
  input  logic [WIN_W-1:0]           pool_win,
  input  logic signed [GAMMA_W-1:0]  bn_gamma [ROWS],
  input  act_t                       bn_beta  [ROWS],
  // one search result
  input  logic                       hd_valid,
  input  hd_t                        hd [ROWS],
  input  norm_t                      row_norm [ROWS],
  input  norm_t                      srch_norm,
  input  logic [15:0]                srch_idx,
  output logic                       busy,
  // output activations
  output logic                       out_valid,
  input  logic                       out_ready,
  output act_t                       out_data
);
  localparam int unsigned RW = $clog2(ROWS);

  act_t       lane_q   [ROWS];
  act_t       lane_d   [ROWS];
  logic [RW:0] idx;
  logic       sending;
  logic       pool_ready;
  logic [RW-1:0] bsel;

  assign bsel = RW'(srch_idx);

  for (genvar r = 0; r < ROWS; r++) begin : g_lane
    act_t dot, bn_y;
    logic [1:0] region;
    approx_dot u_dot (
      .hd(hd[r]), .nchunks, .norm_a(row_norm[r]), .norm_b(srch_norm),
      .dot, .region
    );
    batchnorm u_bn (
      .en(bn_en), .x(dot),
      .gamma(df == DF_WEIGHT_STAT ? bn_gamma[r] : bn_gamma[bsel]),
      .beta (df == DF_WEIGHT_STAT ? bn_beta[r]  : bn_beta[bsel]),
      .y(bn_y)
    );
    relu u_relu (.en(relu_en), .x(bn_y), .y(lane_d[r]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending <= 1'b0;
      idx     <= '0;
      for (int r = 0; r < ROWS; r++) lane_q[r] <= '0;
    end else begin
      if (hd_valid) begin
        for (int r = 0; r < ROWS; r++) lane_q[r] <= lane_d[r];
        sending <= 1'b1;
        idx     <= '0;
      end else if (sending && pool_ready) begin
        if (idx + 1'b1 >= n_rows) sending <= 1'b0;
        idx <= idx + 1'b1;
      end
    end
  end

  assign busy = sending || hd_valid;

  max_pool #(.WIN_W(WIN_W)) u_pool (
    .clk, .rst_n, .en(pool_en), .win(pool_win),
    .in_valid(sending), .in_ready(pool_ready), .in_data(lane_q[idx[RW-1:0]]),
    .out_valid, .out_ready, .out_data
  );

  // a new search must not arrive while lanes are still being sent
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) hd_valid |-> !sending);
endmodule
