// max_pool: streaming max pooling over groups of `win` consecutive values.
//
// The values of one pooling window arrive back to back on a valid/ready
// stream (the host lays out the order so that a window is contiguous). The
// unit keeps a running maximum and emits it when the window's last value has
// been taken; with win = 1 (or en low) every value passes through. The output
// is registered: one value out per window, one cycle after the window's last
// input. in_ready is low while an output waits for out_ready.
//
// Follows the paper: pooling is part of post-processing (Fig. 6, Fig. 7).
// Own choices: max pooling, a contiguous window order and the stream
// handshake; the paper names only "Pooling".
module max_pool
  import deepcam_pkg::*;
#(
  parameter int unsigned WIN_W = 4   // window length up to 2^WIN_W - 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [WIN_W-1:0]  win,
  input  logic              in_valid,
  output logic              in_ready,
  input  act_t              in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output act_t              out_data
);
  logic [WIN_W-1:0] cnt;
  act_t             best;
  logic [WIN_W-1:0] wlen;
  act_t             cand;
  logic             take;

  assign wlen     = (!en || win == '0) ? WIN_W'(1) : win;
  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;
  assign cand     = (cnt == '0 || in_data > best) ? in_data : best;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; best <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (cnt + 1'b1 >= wlen) begin
          cnt       <= '0;
          out_data  <= cand;
          out_valid <= 1'b1;
        end else begin
          cnt  <= cnt + 1'b1;
          best <= cand;
        end
      end
    end
  end
endmodule
