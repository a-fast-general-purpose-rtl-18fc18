// average_calculator: second step of the clustering algorithm.
//
// Computes the centre of each cluster from the hit stream of the core: the
// ToT-weighted average of the hit positions (USE_TOT = 1, the paper's main
// option), or the plain average of the positions (USE_TOT = 0, the paper's
// simpler option that ignores ToT). While a cluster's hits arrive it
// accumulates the hit count, the position sums and the ToT-weighted
// position sums. On the cluster-end pulse it divides and registers the
// centre, x along z (module column) and y along r-phi (module row), as
// unsigned fixed point with FRAC_BITS fractional bits, truncated. A cluster
// whose ToTs are all zero falls back to the plain average. The fixed-point
// format, the truncation and the single-clock divider are this design's
// choices; the paper gives only the weighted average.
//
// Timing: out_valid one clock after in_clus_end. Back-to-back clusters are
// fine: a hit arriving in the same clock as an end pulse starts the next
// cluster's sums.
module average_calculator
  import clus_pkg::*;
#(
  parameter bit USE_TOT = 1'b1
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     in_valid,
  input  row_t     in_row,
  input  col_t     in_col,
  input  tot_t     in_tot,
  input  logic     in_clus_end,
  input  logic     in_mod_end,
  output logic     out_valid,
  output cluster_t out_cluster
);
  localparam int unsigned SW = 32;   // accumulator width

  logic [NHIT_W-1:0] cnt_q;
  logic [SW-1:0]     sum_row_q, sum_col_q, wsum_q, wsum_row_q, wsum_col_q;

  logic [SW-1:0] num_x, num_y, den;
  always_comb begin
    if (USE_TOT && wsum_q != '0) begin
      num_x = wsum_col_q;
      num_y = wsum_row_q;
      den   = wsum_q;
    end else begin
      num_x = sum_col_q;
      num_y = sum_row_q;
      den   = SW'(cnt_q);
    end
  end

  logic [SW+FRAC_BITS-1:0] qx, qy;
  always_comb begin
    if (den == '0) begin
      qx = '0;
      qy = '0;
    end else begin
      qx = {num_x, {FRAC_BITS{1'b0}}} / {{FRAC_BITS{1'b0}}, den};
      qy = {num_y, {FRAC_BITS{1'b0}}} / {{FRAC_BITS{1'b0}}, den};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q      <= '0;
      sum_row_q  <= '0;
      sum_col_q  <= '0;
      wsum_q     <= '0;
      wsum_row_q <= '0;
      wsum_col_q <= '0;
      out_valid  <= 1'b0;
      out_cluster <= '0;
    end else begin
      out_valid <= in_clus_end;
      if (in_clus_end) begin
        out_cluster.mod_end <= in_mod_end;
        out_cluster.nhits   <= cnt_q;
        out_cluster.x       <= qx[COL_W+FRAC_BITS-1:0];
        out_cluster.y       <= qy[ROW_W+FRAC_BITS-1:0];
      end
      if (in_clus_end || in_valid) begin
        // start a new sum on a cluster end, add the hit if there is one
        cnt_q      <= (in_clus_end ? '0 : cnt_q)      + NHIT_W'(in_valid);
        sum_row_q  <= (in_clus_end ? '0 : sum_row_q)  + (in_valid ? SW'(in_row) : '0);
        sum_col_q  <= (in_clus_end ? '0 : sum_col_q)  + (in_valid ? SW'(in_col) : '0);
        wsum_q     <= (in_clus_end ? '0 : wsum_q)     + (in_valid ? SW'(in_tot) : '0);
        wsum_row_q <= (in_clus_end ? '0 : wsum_row_q) + (in_valid ? SW'(in_tot) * SW'(in_row) : '0);
        wsum_col_q <= (in_clus_end ? '0 : wsum_col_q) + (in_valid ? SW'(in_tot) * SW'(in_col) : '0);
      end
    end
  end

endmodule
