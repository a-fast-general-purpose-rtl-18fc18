// clustering_top: pixel clustering device for one input link.
//
// Hit words of pixel modules arrive on one 32-bit valid-ready input (one
// word per clock, 40 MHz on the real link). The module_dispatcher hands
// whole modules in turn to N_WIN sliding-window clustering engines (two by
// default: one window needs 2 clocks per hit plus 2 per cluster, about 3
// clocks per hit, so two are needed to follow the link). Each engine finds
// the clusters of its module on a 328 x 8 sliding grid and computes their
// ToT-weighted centres; the cluster_merger collects the results on one
// output, tagged with the engine number.
//
// Interface: in_valid/in_word/in_ready (word format in clus_pkg; bit 31
// marks a module's last hit), out_valid/out_cluster/out_win/out_ready, and
// idle, high when no engine holds any hit or cluster. The link receiver
// itself is outside this design and feeds in_word.
module clustering_top
  import clus_pkg::*;
#(
  parameter int unsigned N_WIN      = 2,
  parameter int unsigned ROWS       = 328,
  parameter int unsigned COLS       = 8,
  parameter bit          DIAGONAL   = 1'b1,
  parameter bit          USE_TOT    = 1'b1,
  parameter int unsigned HIT_DEPTH  = 256,
  parameter int unsigned CLUS_DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic [WORD_W-1:0]          in_word,
  output logic                       in_ready,
  output logic                       out_valid,
  output cluster_t                   out_cluster,
  output logic [$clog2(N_WIN+1)-1:0] out_win,
  input  logic                       out_ready,
  output logic                       idle
);
  logic     [N_WIN-1:0] win_valid, win_ready, win_out_valid, win_pop, win_idle;
  hit_t                 win_hit;
  cluster_t [N_WIN-1:0] win_cluster;

  module_dispatcher #(.N_WIN(N_WIN)) u_disp (
    .clk, .rst, .in_valid, .in_word, .in_ready,
    .win_valid, .win_hit, .win_ready, .cur_win()
  );

  for (genvar w = 0; w < N_WIN; w++) begin : g_win
    clustering_engine #(
      .ROWS(ROWS), .COLS(COLS), .DIAGONAL(DIAGONAL), .USE_TOT(USE_TOT),
      .HIT_DEPTH(HIT_DEPTH), .CLUS_DEPTH(CLUS_DEPTH)
    ) u_engine (
      .clk, .rst,
      .in_valid    (win_valid[w]),
      .in_hit      (win_hit),
      .in_ready    (win_ready[w]),
      .out_valid   (win_out_valid[w]),
      .out_cluster (win_cluster[w]),
      .out_pop     (win_pop[w]),
      .idle        (win_idle[w])
    );
  end

  cluster_merger #(.N_WIN(N_WIN)) u_merge (
    .clk, .rst,
    .in_valid   (win_out_valid),
    .in_cluster (win_cluster),
    .in_pop     (win_pop),
    .out_valid, .out_cluster, .out_win, .out_ready
  );

  assign idle = &win_idle;

endmodule
