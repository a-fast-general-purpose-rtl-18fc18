// core_logic: first step of the clustering algorithm (the "core").
//
// Joins the FSM and control logic (cluster_fsm) with the ROWS x COLS
// sliding processing grid (processing_grid). It takes hits (row, column)
// from the head of the input FIFO and returns them grouped cluster by
// cluster: a run of out_valid hits followed by an out_clus_end pulse. It
// also drives the ToT RAM: the write port gets the physical cell address and
// the ToT of each hit as it is loaded, the read port the cell address of
// each hit as it is read out, so the RAM data appears together with out_valid.
//
// Timing is that of cluster_fsm: 2 clocks per hit plus 2 per cluster while
// the FIFO keeps up; outputs are registered.
module core_logic
  import clus_pkg::*;
#(
  parameter int unsigned ROWS     = 328,
  parameter int unsigned COLS     = 8,
  parameter bit          DIAGONAL = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    hold,
  input  logic                    fifo_empty,
  input  hit_t                    fifo_head,
  output logic                    fifo_pop,
  // ToT RAM ports
  output logic                    ram_we,
  output logic [$clog2(COLS)-1:0] ram_wcol,
  output logic [$clog2(ROWS)-1:0] ram_wrow,
  output tot_t                    ram_wdata,
  output logic                    ram_re,
  output logic [$clog2(COLS)-1:0] ram_rcol,
  output logic [$clog2(ROWS)-1:0] ram_rrow,
  // clustered hit stream
  output logic                    out_valid,
  output row_t                    out_row,
  output col_t                    out_col,
  output logic                    out_clus_end,
  output logic                    out_mod_end,
  output col_t                    base_col,
  output logic                    idle
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  logic [CW-1:0] first_col, wr_col, hit_col, sel_col;
  logic [RW-1:0] wr_row, hit_row, sel_row;
  logic          wr_en, seed_en, read_en, hit_found, sel_found;

  cluster_fsm #(.ROWS(ROWS), .COLS(COLS)) u_fsm (
    .clk, .rst, .hold,
    .fifo_empty, .fifo_head, .fifo_pop,
    .first_col, .wr_en, .wr_row, .wr_col, .seed_en, .read_en,
    .hit_found, .hit_row, .hit_col, .sel_found, .sel_row, .sel_col,
    .ram_we, .ram_re, .ram_wdata,
    .out_valid, .out_row, .out_col, .out_clus_end, .out_mod_end,
    .base_col, .idle
  );

  processing_grid #(.ROWS(ROWS), .COLS(COLS), .DIAGONAL(DIAGONAL)) u_grid (
    .clk, .rst, .first_col,
    .wr_en, .wr_row, .wr_col,
    .seed_en, .read_en,
    .hit_found, .hit_row, .hit_col,
    .sel_found, .sel_row, .sel_col
  );

  assign ram_wcol = wr_col;
  assign ram_wrow = wr_row;
  assign ram_rcol = sel_col;
  assign ram_rrow = sel_row;

endmodule
