// tb_cam_chunk: writes random rows into a small CAM chunk and checks every
// row's mismatch count against a population count of (row XOR search), and
// that an undriven chunk reports no mismatch.
module tb_cam_chunk;
  import tb_ref_pkg::*;
  localparam int ROWS = 8, W = 256;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [2:0] wr_row = 0; logic [W-1:0] wr_data = '0, sl = '0;
  logic sl_en = 1;
  logic [8:0] mism [ROWS];
  logic [W-1:0] model [ROWS];
  int checks = 0, failures = 0;

  cam_chunk #(.ROWS(ROWS), .W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = 1; wr_row = 3'(r); model[r] = rnd(); wr_data = model[r];
      if (r == 3) begin model[r] = '0; wr_data = '0; end
      if (r == 4) begin model[r] = '1; wr_data = '1; end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk); sl = (t == 0) ? '0 : rnd(); sl_en = (t % 7 != 6);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        automatic int exp_m = sl_en ? popcount(1024'(model[r] ^ sl), W) : 0;
        checks++;
        if (int'(mism[r]) != exp_m) begin
          failures++; $display("row %0d: got %0d expected %0d", r, mism[r], exp_m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
