// tb_ref_pkg: stimulus generator and reference model for the clustering
// testbenches.
//
// gen_module() draws a pixel module of random clusters (each inside a box of
// at most 3 rows by 5 columns, the typical cluster size of the pixel
// detector; optionally some clusters longer than the window) and returns its
// hits in the detector's readout order: double columns in increasing order,
// hits shuffled inside each double column, the last hit flagged.
//
// ref_cluster() clusters that hit list the way the sliding-window algorithm
// does, written as plain software: align the window to the double column of
// the first remaining hit, load hits while they fall inside the window, take
// the first hit (lowest column, then lowest row) as seed, collect its
// 8-connected neighbours by a breadth-first search, remove them, repeat.
// Each cluster is summarised by order-independent sums, so the hardware's
// readout order inside a cluster does not matter.
package tb_ref_pkg;
  import clus_pkg::*;

  typedef struct {
    int n;
    longint sum_col, sum_row, sum_sig;   // sig: a hash of each pixel
    longint wsum, wsum_col, wsum_row;
    int cmin, cmax;                      // column span
    bit mod_end;
  } ref_clus_t;

  typedef hit_t hit_q_t[$];
  typedef ref_clus_t clus_q_t[$];

  function automatic longint pix_sig(int col, int row);
    return longint'(col) * 7919 + longint'(row) * longint'(row) * 31 + longint'(col) * longint'(col) * 131;
  endfunction

  // Random module: ncl clusters in a module of mrows x mcols pixels.
  // nlong of them are 1 row by 10 columns, longer than an 8-column window.
  function automatic hit_q_t gen_module(int mrows, int mcols, int ncl, int nlong);
    bit   occ [int];
    byte unsigned totm [int];
    hit_q_t out;
    int dc_n;
    for (int i = 0; i < ncl + nlong; i++) begin
      int r0, c0, h, w;
      if (i < nlong) begin h = 1; w = 10; end
      else begin h = 1 + $urandom_range(0, 2); w = 1 + $urandom_range(0, 4); end
      r0 = $urandom_range(0, mrows - h);
      c0 = $urandom_range(0, mcols - w);
      for (int r = r0; r < r0 + h; r++)
        for (int c = c0; c < c0 + w; c++)
          if ((r == r0 && c == c0) || i < nlong || $urandom_range(0, 1) == 1) begin
            occ[c * 1024 + r]  = 1'b1;
            totm[c * 1024 + r] = byte'($urandom_range(1, 255));
          end
    end
    dc_n = (mcols + 1) / 2;
    for (int dc = 0; dc < dc_n; dc++) begin
      hit_q_t bucket;
      foreach (occ[k]) begin
        if ((k / 1024) / 2 == dc) begin
          hit_t h;
          h.last = 1'b0;
          h.col  = col_t'(k / 1024);
          h.row  = row_t'(k % 1024);
          h.tot  = tot_t'(totm[k]);
          bucket.push_back(h);
        end
      end
      bucket.shuffle();
      foreach (bucket[j]) out.push_back(bucket[j]);
    end
    if (out.size() > 0) out[out.size() - 1].last = 1'b1;
    return out;
  endfunction

  function automatic clus_q_t ref_cluster(hit_q_t hits, int cols);
    clus_q_t res;
    int      grid_tot [int];   // key col*1024+row
    int      qi = 0;
    while (grid_tot.size() > 0 || qi < hits.size()) begin
      int base, first;
      int queue_k [$];
      ref_clus_t cl;
      bit seen [int];
      // align
      if (grid_tot.size() > 0) begin
        first = 1 << 30;
        foreach (grid_tot[k]) if (k < first) first = k;
        base = (first / 1024) & ~1;
      end else begin
        base = int'(hits[qi].col) & ~1;
      end
      // load
      while (qi < hits.size() && int'(hits[qi].col) >= base && int'(hits[qi].col) < base + cols) begin
        grid_tot[int'(hits[qi].col) * 1024 + int'(hits[qi].row)] = int'(hits[qi].tot);
        qi++;
      end
      // seed and flood fill
      first = 1 << 30;
      foreach (grid_tot[k]) if (k < first) first = k;
      cl = '{default: 0};
      cl.cmin = 1 << 30;
      queue_k.push_back(first);
      seen[first] = 1'b1;
      while (queue_k.size() > 0) begin
        int k, c, r, t;
        k = queue_k.pop_front();
        c = k / 1024; r = k % 1024; t = grid_tot[k];
        cl.n++;
        if (c < cl.cmin) cl.cmin = c;
        if (c > cl.cmax) cl.cmax = c;
        cl.sum_col += c; cl.sum_row += r; cl.sum_sig += pix_sig(c, r);
        cl.wsum += t; cl.wsum_col += longint'(t) * c; cl.wsum_row += longint'(t) * r;
        for (int dc = -1; dc <= 1; dc++)
          for (int dr = -1; dr <= 1; dr++) begin
            int nk;
            nk = (c + dc) * 1024 + (r + dr);
            if ((dc != 0 || dr != 0) && r + dr >= 0 && grid_tot.exists(nk) && !seen.exists(nk)) begin
              seen[nk] = 1'b1;
              queue_k.push_back(nk);
            end
          end
      end
      foreach (seen[k]) grid_tot.delete(k);
      cl.mod_end = (grid_tot.size() == 0 && qi == hits.size());
      res.push_back(cl);
    end
    return res;
  endfunction

  // Expected centre, same fixed-point rule as the hardware: truncated
  // (sum << FRAC_BITS) / weight, ToT-weighted unless the ToTs sum to zero.
  function automatic void expect_centre(ref_clus_t cl, bit use_tot, output int x, output int y);
    longint nx, ny, d;
    if (use_tot && cl.wsum != 0) begin nx = cl.wsum_col; ny = cl.wsum_row; d = cl.wsum; end
    else begin nx = cl.sum_col; ny = cl.sum_row; d = cl.n; end
    x = int'((nx << FRAC_BITS) / d);
    y = int'((ny << FRAC_BITS) / d);
  endfunction

endpackage
