// tb_crossbar_hash: programs a random 8 x 64 matrix of 4-bit levels, fires
// random input vectors and checks each output bit against the sign of the
// column sum computed in the testbench.
module tb_crossbar_hash;
  import deepcam_pkg::*;
  localparam int ROWS = 8, COLS = 64, WB = 4;
  logic clk = 0, rst_n = 0, prog_en = 0, fire = 0, hash_valid;
  logic [2:0] prog_row = 0;
  logic [COLS*WB-1:0] prog_w = '0;
  act_t x [ROWS];
  logic [COLS-1:0] hash;
  int w [ROWS][COLS];
  int checks = 0, failures = 0, ones = 0;
  crossbar_hash #(.ROWS(ROWS), .COLS(COLS), .WB(WB)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int r = 0; r < ROWS; r++) x[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); prog_en = 1; prog_row = 3'(r);
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = int'($signed($urandom % 16)) - 8;
        prog_w[c*WB +: WB] = WB'(w[r][c]);
      end
    end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) x[r] = act_t'($signed($urandom % 20000) - 10000);
      fire = 1;
      @(negedge clk); fire = 0;
      checks++;
      if (!hash_valid) begin failures++; $display("hash_valid missing"); end
      for (int c = 0; c < COLS; c++) begin
        automatic longint s = 0;
        for (int r = 0; r < ROWS; r++) s += longint'(x[r]) * longint'(w[r][c]);
        checks++;
        if (hash[c] !== (s < 0)) failures++;
        ones += int'(hash[c]);
      end
    end
    checks++;
    if (ones == 0 || ones == 50*COLS) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
