// act_ctx_gen: the on-the-fly activation context generator (the
// "transformation" half of the post-processing & transformation module).
//
// Output activations of a layer arrive one per beat on a valid/ready stream.
// Every `vlen` consecutive values form one input vector of the next layer;
// they are collected in the input register I1..In (elements beyond vlen are
// zero). When the vector is complete, the L2-norm unit (squarers, adder tree,
// square root) and the hashing crossbar start on it together. When both are
// finished the new context {norm, hash} is offered on the output stream.
// in_ready is low from the vector's last element until its context has been
// taken, so a busy generator stalls the post-processing stream.
//
// Latency: last element -> ctx_valid in 3 + (L2 sum width)/2 cycles (about
// 33 at the defaults).
//
// Follows the paper: the same two outputs as the software context generator,
// computed by an adder-tree/square-root path and an NVM crossbar with sign
// sensing (Sec. III-C, Fig. 7). Own choices: the collection of a vector from
// a stream, N = 256 inputs, zero padding and the handshakes.
module act_ctx_gen
  import deepcam_pkg::*;
#(
  parameter int unsigned N  = 256,
  parameter int unsigned WB = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(N):0]        vlen,        // 1..N elements per vector
  // activation stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  act_t                      in_data,
  // crossbar programming
  input  logic                      prog_en,
  input  logic [$clog2(N)-1:0]      prog_row,
  input  logic [HASH_W*WB-1:0]      prog_w,
  // generated contexts
  output logic                      ctx_valid,
  input  logic                      ctx_ready,
  output context_t                  ctx
);
  typedef enum logic [1:0] {S_COLLECT, S_FIRE, S_WAIT, S_OUT} state_e;
  state_e state;

  act_t              vec [N];
  logic [$clog2(N):0] idx;
  logic              fire;
  logic              n_busy, n_done, h_valid;
  logic              n_got, h_got;
  norm_t             n_val;
  logic [HASH_W-1:0] h_val;
  logic              take;

  assign in_ready = (state == S_COLLECT);
  assign take     = in_valid && in_ready;
  assign fire     = (state == S_FIRE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT; idx <= '0; n_got <= 1'b0; h_got <= 1'b0;
      for (int i = 0; i < N; i++) vec[i] <= '0;
      ctx <= '0;
    end else begin
      case (state)
        S_COLLECT: if (take) begin
          if (idx == '0) begin
            for (int i = 1; i < N; i++) vec[i] <= '0;
          end
          vec[idx[$clog2(N)-1:0]] <= in_data;
          if (idx + 1'b1 >= vlen) begin
            idx   <= '0;
            state <= S_FIRE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_FIRE: begin
          n_got <= 1'b0; h_got <= 1'b0;
          state <= S_WAIT;
        end
        S_WAIT: begin
          if (n_done)  begin n_got <= 1'b1; ctx.norm <= n_val; end
          if (h_valid) begin h_got <= 1'b1; ctx.hash <= h_val; end
          if ((n_got || n_done) && (h_got || h_valid)) state <= S_OUT;
        end
        S_OUT: if (ctx_ready) state <= S_COLLECT;
        default: state <= S_COLLECT;
      endcase
    end
  end

  assign ctx_valid = (state == S_OUT);

  l2norm_unit #(.N(N)) u_norm (
    .clk, .rst_n, .start(fire), .x(vec), .busy(n_busy), .done(n_done), .norm(n_val)
  );

  crossbar_hash #(.ROWS(N), .COLS(HASH_W), .WB(WB)) u_xbar (
    .clk, .rst_n, .prog_en, .prog_row, .prog_w, .fire, .x(vec),
    .hash_valid(h_valid), .hash(h_val)
  );

  a_ctx_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ctx_valid && !ctx_ready |=> ctx_valid && $stable(ctx));
endmodule
