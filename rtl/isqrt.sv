// isqrt: sequential integer square root, floor(sqrt(radicand)).
//
// Classic digit-by-digit (restoring) method: two radicand bits and one root
// bit per clock, IN_W/2 iterations. `start` samples the radicand; `done`
// is high in the (IN_W/2 + 1)-th cycle after the start cycle, for one cycle,
// with `root` valid (root holds its value until the next start). `busy` is
// high in between; a start while busy is ignored.
//
// The paper names a "digital square-root module" after the adder tree of the
// L2 norm (Sec. III-C, Fig. 7); the algorithm and timing are this design's.
module isqrt #(
  parameter int unsigned IN_W = 56   // even
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [IN_W-1:0]      radicand,
  output logic                 busy,
  output logic                 done,
  output logic [IN_W/2-1:0]    root
);
  localparam int unsigned OW = IN_W / 2;
  logic [IN_W-1:0]   rad_q;
  logic [OW-1:0]     rem_q;   // partial remainder (< 2^OW before the last step)
  logic [$clog2(OW+1)-1:0] cnt;
  logic [OW+1:0]     rem_sh, trial;

  always_comb begin
    rem_sh = {rem_q[OW-1:0], rad_q[IN_W-1 -: 2]};
    trial  = {root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad_q <= '0; rem_q <= '0; root <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rad_q <= radicand; rem_q <= '0; root <= '0;
        cnt   <= '0;       busy  <= 1'b1;
      end else if (busy) begin
        rad_q <= rad_q << 2;
        if (rem_sh >= trial) begin
          rem_q <= OW'(rem_sh - trial);
          root  <= {root[OW-2:0], 1'b1};
        end else begin
          rem_q <= OW'(rem_sh);
          root  <= {root[OW-2:0], 1'b0};
        end
        if (32'(cnt) == OW - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
