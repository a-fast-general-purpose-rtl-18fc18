// priority_chain: finds the first active cell of the sliding grid.
//
// The grid has two identical copies: one over the HIT cells ("SEL HIT",
// picks the seed of the next cluster and the column the window aligns to)
// and one over the SELECTED cells ("SEL FOR READOUT", picks the next cell to
// read out). Priority follows the readout order of the pixel module: the
// column index is most significant and the row index least significant, so
// the winner is the lowest row of the first column that has an active cell.
//
// Columns are stored circularly (module column mod COLS) so that sliding
// the window only relabels its first column; the column order therefore
// starts at first_col and wraps around. Inside each column an OR chain from
// row 0 upward finds the first active row and drives its address on the
// column's row address bus (9 bits for 328 rows, as in the paper's cell
// diagram); a second chain over the columns picks the first column with an
// active cell. Splitting the chain into rows and columns is this design's
// choice; the order it implements is the paper's. Purely combinational.
//
// Outputs: found (some cell is active), row and col (physical column) of the
// winner, and grant, a one-hot map of the winner for the cells.
module priority_chain #(
  parameter int unsigned ROWS = 328,
  parameter int unsigned COLS = 8
) (
  input  logic [COLS-1:0][ROWS-1:0]   active,
  input  logic [$clog2(COLS)-1:0]     first_col,
  output logic                        found,
  output logic [$clog2(ROWS)-1:0]     row,
  output logic [$clog2(COLS)-1:0]     col,
  output logic [COLS-1:0][ROWS-1:0]   grant
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  logic [COLS-1:0]         col_any;   // OR of the column's chain
  logic [COLS-1:0][RW-1:0] col_row;   // row address bus of each column

  // Row chain of each column: the lowest active row wins.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      col_any[c] = 1'b0;
      col_row[c] = '0;
      for (int r = ROWS - 1; r >= 0; r--) begin
        if (active[c][r]) begin
          col_any[c] = 1'b1;
          col_row[c] = RW'(r);
        end
      end
    end
  end

  // Column chain, starting at the window's first column and wrapping.
  always_comb begin
    found = 1'b0;
    col   = '0;
    for (int k = COLS - 1; k >= 0; k--) begin
      int unsigned c;
      c = (32'(first_col) + 32'(k)) % COLS;
      if (col_any[c]) begin
        found = 1'b1;
        col   = CW'(c);
      end
    end
    row = col_row[col];
  end

  always_comb begin
    grant = '0;
    if (found) grant[col][row] = 1'b1;
  end

endmodule
