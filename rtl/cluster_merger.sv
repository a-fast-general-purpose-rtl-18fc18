// cluster_merger: merges the cluster streams of the sliding windows.
//
// Each window delivers finished clusters from a show-ahead FIFO. The merger
// forwards one cluster per clock to the single output, choosing among the
// windows that have one by round robin, and tags it with the window number.
// The paper only says that two windows work in parallel; the round-robin
// merge is this design's choice. Clusters of one module keep their order;
// clusters of different modules may interleave (mod_end marks each module's
// last cluster).
//
// Interface: per window in_valid/in_cluster and an in_pop strobe back to its
// FIFO; output out_valid/out_cluster/out_win accepted with out_ready.
// Combinational from input to output; the round-robin pointer is a register.
module cluster_merger
  import clus_pkg::*;
#(
  parameter int unsigned N_WIN = 2
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic     [N_WIN-1:0]         in_valid,
  input  cluster_t [N_WIN-1:0]         in_cluster,
  output logic     [N_WIN-1:0]         in_pop,
  output logic                         out_valid,
  output cluster_t                     out_cluster,
  output logic [$clog2(N_WIN+1)-1:0]   out_win,
  input  logic                         out_ready
);
  localparam int unsigned WW = $clog2(N_WIN + 1);

  logic [WW-1:0] next_q;   // window with the highest priority this clock

  always_comb begin
    out_valid = 1'b0;
    out_win   = '0;
    for (int k = N_WIN - 1; k >= 0; k--) begin
      int unsigned w;
      w = (32'(next_q) + 32'(k)) % N_WIN;
      if (in_valid[w]) begin
        out_valid = 1'b1;
        out_win   = WW'(w);
      end
    end
    out_cluster = in_cluster[out_win];
    in_pop      = '0;
    if (out_valid && out_ready) in_pop[out_win] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) next_q <= '0;
    else if (out_valid && out_ready)
      next_q <= (32'(out_win) == N_WIN - 1) ? '0 : out_win + 1'b1;
  end

endmodule
