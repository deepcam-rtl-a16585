// deepcam_top: the CAM-based DNN accelerator.
//
// Datapath, in the order data flows:
//   ctx_buffer   contexts {8-bit L2 norm, 1024-bit hash} written by the host
//                (ext_wr_*) from off-chip memory and by the context
//                generator;
//   dyn_cam      ROWS stationary contexts in four 256-bit chunks; one search
//                gives the Hamming distance to every row at once, over 256,
//                512, 768 or 1024 bits (cfg.nchunks);
//   postproc     per row: approximate cosine, times both norms, batchnorm,
//                ReLU; rows then stream through max pooling;
//   act_ctx_gen  optional (cfg.xform_en): turns the output activations back
//                into contexts for the next layer (L2 norm + crossbar hash)
//                and writes them into the buffer at cfg.out_base;
//   controller   runs one tile per `start`: load n_rows contexts into the
//                CAM, then search n_search contexts, then drain.
// Without xform_en the activations leave on the res_* stream. A batchnorm
// table of ROWS (gamma, beta) pairs is written through bn_wr_*; the
// crossbar's random matrix through prog_*. While the controller is idle the
// host may read the buffer through ext_rd_* (data one cycle later).
//
// Follows the paper's block diagram (Fig. 3, Fig. 6, Fig. 7) and its main
// sizes: four 256-bit chunks up to a 1024-bit hash, 64 CAM rows. Buffer
// depth, crossbar input count, bn table and every handshake are this
// design's choices.
module deepcam_top
  import deepcam_pkg::*;
#(
  parameter int unsigned ROWS  = 64,    // CAM rows M
  parameter int unsigned DEPTH = 512,   // buffer entries
  parameter int unsigned XB_N  = 256,   // crossbar inputs (vector length)
  parameter int unsigned WB    = 4,     // crossbar weight bits
  parameter int unsigned WIN_W = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host / off-chip memory side of the buffer
  input  logic                      ext_wr_en,
  input  logic [$clog2(DEPTH)-1:0]  ext_wr_addr,
  input  context_t                  ext_wr_data,
  input  logic                      ext_rd_en,
  input  logic [$clog2(DEPTH)-1:0]  ext_rd_addr,
  output context_t                  ext_rd_data,
  // batchnorm table
  input  logic                      bn_wr_en,
  input  logic [$clog2(ROWS)-1:0]   bn_wr_idx,
  input  logic signed [GAMMA_W-1:0] bn_wr_gamma,
  input  act_t                      bn_wr_beta,
  // crossbar programming
  input  logic                      prog_en,
  input  logic [$clog2(XB_N)-1:0]   prog_row,
  input  logic [HASH_W*WB-1:0]      prog_w,
  // control
  input  logic                      start,
  input  layer_cfg_t                cfg_in,
  output logic                      busy,
  output logic                      done,
  // output activations
  output logic                      res_valid,
  input  logic                      res_ready,
  output act_t                      res_data
);
  layer_cfg_t cfg;
  logic       c_rd_en, rd_en, buf_wr_en;
  logic [$clog2(DEPTH)-1:0] c_rd_addr, rd_addr, buf_wr_addr;
  context_t   rd_data, buf_wr_data;
  logic       cam_wr_en, srch_load, hd_valid;
  logic [$clog2(ROWS)-1:0] cam_wr_row;
  logic [15:0] srch_idx;
  hd_t        hd [ROWS];
  norm_t      row_norm [ROWS];
  norm_t      srch_norm;
  logic       pp_busy, pp_valid, pp_ready;
  act_t       pp_data;
  logic       xf_in_ready, ctx_valid, ctx_ready, wb_en;
  logic [$clog2(DEPTH)-1:0] wb_addr;
  context_t   gen_ctx;
  logic signed [GAMMA_W-1:0] bn_gamma [ROWS];
  act_t       bn_beta [ROWS];

  // buffer ports: the controller reads while busy, the host while idle;
  // generated contexts take the write port over host writes
  assign rd_en       = busy ? c_rd_en   : ext_rd_en;
  assign rd_addr     = busy ? c_rd_addr : ext_rd_addr;
  assign ext_rd_data = rd_data;
  assign buf_wr_en   = wb_en | ext_wr_en;
  assign buf_wr_addr = wb_en ? wb_addr : ext_wr_addr;
  assign buf_wr_data = wb_en ? gen_ctx : ext_wr_data;

  ctx_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .rd_en, .rd_addr, .rd_data,
    .wr_en(buf_wr_en), .wr_addr(buf_wr_addr), .wr_data(buf_wr_data)
  );

  controller #(.ROWS(ROWS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg_in, .cfg, .busy, .done,
    .rd_en(c_rd_en), .rd_addr(c_rd_addr),
    .cam_wr_en, .cam_wr_row, .srch_load, .srch_idx,
    .pp_busy, .pool_pending(pp_valid), .xf_idle(xf_in_ready),
    .ctx_valid, .ctx_ready, .wb_en, .wb_addr
  );

  dyn_cam #(.ROWS(ROWS)) u_cam (
    .clk, .rst_n, .nchunks(cfg.nchunks),
    .wr_en(cam_wr_en), .wr_row(cam_wr_row), .wr_ctx(rd_data),
    .srch_load, .srch_ctx(rd_data),
    .srch_norm, .row_norm, .hd_valid, .hd
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin bn_gamma[r] <= '0; bn_beta[r] <= '0; end
    end else if (bn_wr_en) begin
      bn_gamma[bn_wr_idx] <= bn_wr_gamma;
      bn_beta[bn_wr_idx]  <= bn_wr_beta;
    end
  end

  postproc #(.ROWS(ROWS), .WIN_W(WIN_W)) u_pp (
    .clk, .rst_n,
    .nchunks(cfg.nchunks), .df(cfg.df), .n_rows(($clog2(ROWS)+1)'(cfg.n_rows)),
    .bn_en(cfg.bn_en), .relu_en(cfg.relu_en), .pool_en(cfg.pool_en),
    .pool_win(WIN_W'(cfg.pool_win)), .bn_gamma, .bn_beta,
    .hd_valid, .hd, .row_norm, .srch_norm, .srch_idx,
    .busy(pp_busy), .out_valid(pp_valid), .out_ready(pp_ready), .out_data(pp_data)
  );

  // route the activations to the result port or to the context generator
  assign pp_ready  = cfg.xform_en ? xf_in_ready : res_ready;
  assign res_valid = pp_valid && !cfg.xform_en;
  assign res_data  = pp_data;

  act_ctx_gen #(.N(XB_N), .WB(WB)) u_xf (
    .clk, .rst_n, .vlen(($clog2(XB_N)+1)'(cfg.vlen)),
    .in_valid(pp_valid && cfg.xform_en), .in_ready(xf_in_ready), .in_data(pp_data),
    .prog_en, .prog_row, .prog_w,
    .ctx_valid, .ctx_ready, .ctx(gen_ctx)
  );
endmodule
