// clustering_engine: one sliding-window clustering channel.
//
// The block diagram of the algorithm: an input FIFO of hits, the core logic
// (FSM and ROWS x COLS processing grid) that regroups the hits cluster by
// cluster, the ToT RAM that keeps each hit's ToT while the hit sits in the
// grid, and the average calculator that turns each cluster into its centre.
// Finished clusters go into a small output FIFO; when it is nearly full the
// core is held, which is this design's own flow control (the paper has no
// output back-pressure). FIFO depths are assumed.
//
// Interface: in_valid/in_hit/in_ready is a valid-ready input of hits (a
// hit with last set closes the pixel module); out_valid/out_cluster/out_pop
// is a show-ahead output of clusters. Latency from the cluster end to
// out_valid is 3 clocks (core register, average register, FIFO).
module clustering_engine
  import clus_pkg::*;
#(
  parameter int unsigned ROWS         = 328,
  parameter int unsigned COLS         = 8,
  parameter bit          DIAGONAL     = 1'b1,
  parameter bit          USE_TOT      = 1'b1,
  parameter int unsigned HIT_DEPTH    = 256,
  parameter int unsigned CLUS_DEPTH   = 16
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     in_valid,
  input  hit_t     in_hit,
  output logic     in_ready,
  output logic     out_valid,
  output cluster_t out_cluster,
  input  logic     out_pop,
  output logic     idle
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  // Input FIFO
  logic  hf_empty, hf_full, hf_pop;
  hit_t  hf_head;
  logic [HIT_W-1:0] hf_dout;
  assign hf_head  = hit_t'(hf_dout);
  assign in_ready = !hf_full;

  hit_fifo #(.WIDTH(HIT_W), .DEPTH(HIT_DEPTH)) u_hit_fifo (
    .clk, .rst,
    .push (in_valid && !hf_full),
    .din  (in_hit),
    .pop  (hf_pop),
    .dout (hf_dout),
    .empty(hf_empty),
    .full (hf_full),
    .almost_full(),
    .count()
  );

  // Core
  logic          hold;
  logic          ram_we, ram_re;
  logic [CW-1:0] ram_wcol, ram_rcol;
  logic [RW-1:0] ram_wrow, ram_rrow;
  tot_t          ram_wdata, ram_rdata;
  logic          c_valid, c_clus_end, c_mod_end;
  row_t          c_row;
  col_t          c_col;
  logic          core_idle;

  core_logic #(.ROWS(ROWS), .COLS(COLS), .DIAGONAL(DIAGONAL)) u_core (
    .clk, .rst, .hold,
    .fifo_empty (hf_empty),
    .fifo_head  (hf_head),
    .fifo_pop   (hf_pop),
    .ram_we, .ram_wcol, .ram_wrow, .ram_wdata,
    .ram_re, .ram_rcol, .ram_rrow,
    .out_valid    (c_valid),
    .out_row      (c_row),
    .out_col      (c_col),
    .out_clus_end (c_clus_end),
    .out_mod_end  (c_mod_end),
    .base_col     (),
    .idle         (core_idle)
  );

  tot_ram #(.ROWS(ROWS), .COLS(COLS), .TOT_W(TOT_W)) u_tot_ram (
    .clk,
    .we (ram_we), .wcol (ram_wcol), .wrow (ram_wrow), .wdata (ram_wdata),
    .re (ram_re), .rcol (ram_rcol), .rrow (ram_rrow), .rdata (ram_rdata)
  );

  logic     a_valid;
  cluster_t a_cluster;

  average_calculator #(.USE_TOT(USE_TOT)) u_avg (
    .clk, .rst,
    .in_valid    (c_valid),
    .in_row      (c_row),
    .in_col      (c_col),
    .in_tot      (ram_rdata),
    .in_clus_end (c_clus_end),
    .in_mod_end  (c_mod_end),
    .out_valid   (a_valid),
    .out_cluster (a_cluster)
  );

  // Output FIFO of clusters; two clusters may be in flight after hold rises.
  logic cf_empty, cf_af;
  logic [CLUSTER_W-1:0] cf_dout;

  hit_fifo #(.WIDTH(CLUSTER_W), .DEPTH(CLUS_DEPTH), .AF_MARGIN(4)) u_clus_fifo (
    .clk, .rst,
    .push (a_valid),
    .din  (a_cluster),
    .pop  (out_pop),
    .dout (cf_dout),
    .empty(cf_empty),
    .full (),
    .almost_full(cf_af),
    .count()
  );

  assign hold        = cf_af;
  assign out_valid   = !cf_empty;
  assign out_cluster = cluster_t'(cf_dout);
  assign idle        = core_idle && hf_empty && cf_empty;

endmodule
