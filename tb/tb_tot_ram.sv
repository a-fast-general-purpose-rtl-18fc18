// tb_tot_ram: self-checking test of the ToT RAM at its full 328 x 8 x 8-bit
// size: writes every cell, reads cells back in random order while other
// cells are rewritten, checks one-clock read latency against an array model.
module tb_tot_ram;
  localparam int ROWS = 328, COLS = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [2:0] wcol = 0, rcol = 0;
  logic [8:0] wrow = 0, rrow = 0;
  logic [7:0] wdata = 0, rdata;
  tot_ram #(.ROWS(ROWS), .COLS(COLS), .TOT_W(8)) dut (.clk, .we, .wcol, .wrow, .wdata, .re, .rcol, .rrow, .rdata);
  int checks = 0, failures = 0;
  byte unsigned model [COLS][ROWS];

  initial begin
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        we = 1; wcol = 3'(c); wrow = 9'(r); wdata = 8'($urandom);
        model[c][r] = wdata;
      end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      byte unsigned exp;
      @(negedge clk);
      re = 1; rcol = 3'($urandom_range(0, COLS - 1)); rrow = 9'($urandom_range(0, ROWS - 1));
      exp = model[rcol][rrow];
      // write a different cell in the same clock
      we = 1; wcol = 3'($urandom_range(0, COLS - 1)); wrow = 9'($urandom_range(0, ROWS - 1)); wdata = 8'($urandom);
      if (wcol == rcol && wrow == rrow) we = 0;
      @(posedge clk);
      if (we) model[wcol][wrow] = wdata;
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata != exp) begin
        failures++;
        if (failures < 10) $display("FAIL read c%0d r%0d got %0d exp %0d", rcol, rrow, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
