// clus_pkg: shared constants and types of the pixel clustering device.
//
// The device clusters hits of one pixel module. A module is 328 rows (r-phi
// direction) by 144 columns (z direction); the sliding processing grid is
// 328 rows by 8 columns. A hit word is 32 bits and carries the column, the
// row and the time over threshold (ToT) of one hit pixel. The grid size, the
// module size, the 32-bit word, the 8-bit ToT and the 9-bit row address
// follow the paper; the bit positions inside the hit word are this design's
// own choice:
//   [31]    last : this is the last hit of the module (end-of-module marker)
//   [30:25] zero
//   [24:17] column (0..143)
//   [16:8]  row    (0..327)
//   [7:0]   ToT
package clus_pkg;

  localparam int unsigned MOD_ROWS = 328;  // rows of a pixel module (r-phi)
  localparam int unsigned MOD_COLS = 144;  // columns of a pixel module (z)
  localparam int unsigned ROW_W    = 9;    // row address bus width
  localparam int unsigned COL_W    = 8;    // module column index width
  localparam int unsigned TOT_W    = 8;    // time over threshold width
  localparam int unsigned WORD_W   = 32;   // input hit word width

  typedef logic [ROW_W-1:0] row_t;
  typedef logic [COL_W-1:0] col_t;
  typedef logic [TOT_W-1:0] tot_t;

  // One hit as it travels through the FIFO.
  typedef struct packed {
    logic last;   // last hit of the pixel module
    col_t col;    // module column (z)
    row_t row;    // module row (r-phi)
    tot_t tot;    // time over threshold
  } hit_t;

  localparam int unsigned HIT_W = $bits(hit_t);

  // Unpack a 32-bit input word into a hit.
  function automatic hit_t word_to_hit(logic [WORD_W-1:0] w);
    hit_t h;
    h.last = w[31];
    h.col  = w[24:17];
    h.row  = w[16:8];
    h.tot  = w[7:0];
    return h;
  endfunction

  function automatic logic [WORD_W-1:0] hit_to_word(hit_t h);
    return {h.last, 6'd0, h.col, h.row, h.tot};
  endfunction

  // Cluster definition ("combinatorial logic" box of the cell). The neighbour
  // vector is ordered: 0 up, 1 down, 2 left, 3 right (sides) and 4 up-left,
  // 5 up-right, 6 down-left, 7 down-right (corners). With DIAGONAL set a hit
  // joins the cluster of a SELECTED neighbour along a side or a corner, which
  // is the paper's definition; clearing it gives side-only clustering.
  function automatic logic joins_cluster(logic [7:0] nbr_sel, bit diagonal);
    return diagonal ? (|nbr_sel) : (|nbr_sel[3:0]);
  endfunction

  // Output record of one cluster, centre in fixed point with FRAC_BITS
  // fractional bits (FRAC_BITS chosen by the average calculator).
  localparam int unsigned FRAC_BITS = 4;
  localparam int unsigned NHIT_W    = 12;   // hits per cluster counter (grid holds 2624)

  typedef struct packed {
    logic                      mod_end;  // last cluster of its pixel module
    logic [NHIT_W-1:0]         nhits;    // hits in the cluster
    logic [COL_W+FRAC_BITS-1:0] x;       // centre along z (column), fixed point
    logic [ROW_W+FRAC_BITS-1:0] y;       // centre along r-phi (row), fixed point
  } cluster_t;

  localparam int unsigned CLUSTER_W = $bits(cluster_t);

endpackage
