// tb_priority_chain: self-checking test of the priority chain. Random
// sparse and dense activity maps and every window start column; the
// expected winner is found by scanning module order (columns from the
// window start, wrapping; rows upward).
module tb_priority_chain;
  localparam int ROWS = 40, COLS = 8;
  logic [COLS-1:0][ROWS-1:0] active, grant;
  logic [2:0] first_col;
  logic found;
  logic [5:0] row;
  logic [2:0] col;
  priority_chain #(.ROWS(ROWS), .COLS(COLS)) dut (.active, .first_col, .found, .row, .col, .grant);
  int checks = 0, failures = 0;

  initial begin
    for (int i = 0; i < 5000; i++) begin
      bit ef; int er, ec;
      logic [COLS-1:0][ROWS-1:0] eg;
      int density;
      density = (i % 3 == 0) ? 0 : (i % 3 == 1) ? 2 : 30;
      for (int c = 0; c < COLS; c++)
        for (int r = 0; r < ROWS; r++)
          active[c][r] = ($urandom_range(0, 999) < density * 3);
      first_col = 3'($urandom_range(0, COLS - 1));
      #1;
      ef = 0; er = 0; ec = 0; eg = '0;
      for (int k = 0; k < COLS && !ef; k++) begin
        int c;
        c = (int'(first_col) + k) % COLS;
        for (int r = 0; r < ROWS && !ef; r++)
          if (active[c][r]) begin ef = 1; er = r; ec = c; end
      end
      if (ef) eg[ec][er] = 1'b1;
      checks++;
      if (found != ef || (ef && (int'(row) != er || int'(col) != ec)) || grant != eg) begin
        failures++;
        if (failures < 10) $display("FAIL %0d: got %0d r%0d c%0d exp %0d r%0d c%0d", i, found, row, col, ef, er, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
