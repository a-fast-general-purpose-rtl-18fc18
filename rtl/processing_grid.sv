// processing_grid: the ROWS x COLS sliding grid of clustering cells.
//
// Default size 328 x 8 cells: 328 rows cover two front-end chips of a pixel
// module along r-phi and 8 columns cover four double columns along z, as in
// the paper. Each cell (cluster_cell) is written through a row decoder and a
// column decoder (ROW SEL AND COLUMN SEL), and sees the SELECTED flags of
// its 8 neighbours. Two identical priority chains run over the grid: one
// over HIT cells that are not SELECTED (seed and alignment) and one over the
// SELECTED cells (readout).
//
// The window is circular in the column direction: module column m lives in
// physical column m mod COLS, and first_col names the physical column that
// holds the window's first (lowest) module column. The neighbour links
// between the last and the first column of the window are cut, so no
// cluster can grow across that seam. This circular arrangement is how this
// design realises the paper's "virtual" alignment of the window.
//
// Timing: wr_en writes a cell at the clock edge; seed_en marks the first
// HIT cell SELECTED at the edge; read_en empties the first SELECTED cell at
// the edge. The chain outputs are combinational from the cell registers.
module processing_grid #(
  parameter int unsigned ROWS     = 328,
  parameter int unsigned COLS     = 8,
  parameter bit          DIAGONAL = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [$clog2(COLS)-1:0] first_col,   // physical column of window start
  // load port
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [$clog2(COLS)-1:0] wr_col,      // physical column
  // seed selection
  input  logic                    seed_en,
  // readout
  input  logic                    read_en,
  // first HIT (not SELECTED) cell
  output logic                    hit_found,
  output logic [$clog2(ROWS)-1:0] hit_row,
  output logic [$clog2(COLS)-1:0] hit_col,
  // first SELECTED cell
  output logic                    sel_found,
  output logic [$clog2(ROWS)-1:0] sel_row,
  output logic [$clog2(COLS)-1:0] sel_col
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  logic [COLS-1:0][ROWS-1:0] hit, sel, hit_only;
  logic [COLS-1:0][ROWS-1:0] seed_grant, read_grant;
  logic [ROWS-1:0]           row_sel;
  logic [COLS-1:0]           col_sel;
  logic [COLS-1:0]           link_left;   // column c is linked to column c-1

  // Row and column write decoders.
  always_comb begin
    row_sel = '0;
    col_sel = '0;
    if (wr_en) begin
      row_sel[wr_row] = 1'b1;
      col_sel[wr_col] = 1'b1;
    end
  end

  // Cut the neighbour link at the window seam.
  always_comb begin
    for (int c = 0; c < COLS; c++) link_left[c] = (CW'(c) != first_col);
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    localparam int unsigned CL = (c + COLS - 1) % COLS;   // physical left column
    localparam int unsigned CR = (c + 1) % COLS;          // physical right column
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      logic [7:0] nbr;
      logic       has_l, has_r;
      assign has_l = (COLS > 1) && link_left[c];
      assign has_r = (COLS > 1) && link_left[CR];
      assign nbr[0] = (r > 0)        ? sel[c][(r > 0) ? r - 1 : 0] : 1'b0;
      assign nbr[1] = (r < ROWS - 1) ? sel[c][(r < ROWS - 1) ? r + 1 : r] : 1'b0;
      assign nbr[2] = has_l & sel[CL][r];
      assign nbr[3] = has_r & sel[CR][r];
      assign nbr[4] = (r > 0)        ? (has_l & sel[CL][(r > 0) ? r - 1 : 0]) : 1'b0;
      assign nbr[5] = (r > 0)        ? (has_r & sel[CR][(r > 0) ? r - 1 : 0]) : 1'b0;
      assign nbr[6] = (r < ROWS - 1) ? (has_l & sel[CL][(r < ROWS - 1) ? r + 1 : r]) : 1'b0;
      assign nbr[7] = (r < ROWS - 1) ? (has_r & sel[CR][(r < ROWS - 1) ? r + 1 : r]) : 1'b0;

      cluster_cell #(.DIAGONAL(DIAGONAL)) u_cell (
        .clk      (clk),
        .rst      (rst),
        .row_sel  (row_sel[r]),
        .col_sel  (col_sel[c]),
        .nbr_sel  (nbr),
        .seed     (seed_en & seed_grant[c][r]),
        .readout  (read_en & read_grant[c][r]),
        .hit      (hit[c][r]),
        .selected (sel[c][r])
      );
    end
  end

  assign hit_only = hit & ~sel;

  // "SEL HIT" chain: first HIT cell.
  priority_chain #(.ROWS(ROWS), .COLS(COLS)) u_hit_chain (
    .active    (hit_only),
    .first_col (first_col),
    .found     (hit_found),
    .row       (hit_row),
    .col       (hit_col),
    .grant     (seed_grant)
  );

  // "SEL FOR READOUT" chain: first SELECTED cell.
  priority_chain #(.ROWS(ROWS), .COLS(COLS)) u_sel_chain (
    .active    (sel),
    .first_col (first_col),
    .found     (sel_found),
    .row       (sel_row),
    .col       (sel_col),
    .grant     (read_grant)
  );

endmodule
