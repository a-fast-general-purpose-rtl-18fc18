// cluster_fsm: FSM and control logic of the sliding-window clustering core.
//
// Runs the paper's sequence for each cluster: align the sliding window to
// the first hit, load hits, SELECT the first (priority-wise) hit, read out
// all SELECTED hits, start over. The window's first module column is kept in
// the register base_col; the window covers module columns base_col ..
// base_col+COLS-1 and physical grid column (m mod COLS) holds module column m.
//
// States
//   S_ALIGN  waiting for a hit to align to (grid and FIFO empty).
//   S_LOAD   one hit per clock is popped from the FIFO head and written into
//            the grid and the ToT RAM while its column lies inside the
//            window. When the head lies beyond the window, or the module's
//            last hit has been loaded, the same clock selects the seed (the
//            first HIT cell) and the FSM moves to S_READ. An empty FIFO
//            before the module's last hit means waiting.
//   S_READ   one SELECTED cell per clock is read out (grid cell emptied,
//            ToT RAM read, position output). The first clock that finds no
//            SELECTED cell ends the cluster and, in the same clock, aligns
//            the window to the next first hit (in the grid, else at the FIFO
//            head) and returns to S_LOAD.
// Hence a module of n hits in k clusters, with its hits waiting in the FIFO,
// takes 2n + 2k clocks: one to load and one to read each hit, one to align
// and one to select per cluster, the count the paper gives. Merging the
// align step into the clock that detects the end of a cluster, and the seed
// step into the clock that ends loading, is this design's choice.
//
// Alignment: the window starts at the double column of the first hit, i.e.
// one column to the left when the hit is in the second column of a double
// column (odd column index; the pairing of columns is assumed).
//
// Outputs (registered, one clock after the readout): out_valid with the
// module row and column of a hit, the ToT RAM returns the hit's ToT in the
// same clock; out_clus_end one clock after the cluster's last hit, with
// out_mod_end set when it was the last cluster of the module. hold freezes
// the FSM (no load, seed, readout or output) for output back-pressure.
module cluster_fsm
  import clus_pkg::*;
#(
  parameter int unsigned ROWS = 328,
  parameter int unsigned COLS = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    hold,
  // input FIFO (show-ahead)
  input  logic                    fifo_empty,
  input  hit_t                    fifo_head,
  output logic                    fifo_pop,
  // grid control
  output logic [$clog2(COLS)-1:0] first_col,
  output logic                    wr_en,
  output logic [$clog2(ROWS)-1:0] wr_row,
  output logic [$clog2(COLS)-1:0] wr_col,
  output logic                    seed_en,
  output logic                    read_en,
  input  logic                    hit_found,
  input  logic [$clog2(ROWS)-1:0] hit_row,
  input  logic [$clog2(COLS)-1:0] hit_col,
  input  logic                    sel_found,
  input  logic [$clog2(ROWS)-1:0] sel_row,
  input  logic [$clog2(COLS)-1:0] sel_col,
  // ToT RAM
  output logic                    ram_we,
  output logic                    ram_re,
  output tot_t                    ram_wdata,
  // hit stream, cluster by cluster
  output logic                    out_valid,
  output row_t                    out_row,
  output col_t                    out_col,
  output logic                    out_clus_end,
  output logic                    out_mod_end,
  // status
  output col_t                    base_col,
  output logic                    idle
);
  localparam int unsigned CW = $clog2(COLS);

  typedef enum logic [1:0] {S_ALIGN, S_LOAD, S_READ} state_e;

  state_e state_q, state_d;
  col_t   base_q, base_d;
  logic   all_loaded_q, all_loaded_d;

  // Physical column of a module column, and back.
  function automatic logic [CW-1:0] phys_col(col_t m);
    return CW'(32'(m) % COLS);
  endfunction

  function automatic col_t mod_col(logic [CW-1:0] p, col_t base);
    return col_t'(32'(base) + ((32'(p) + COLS - 32'(phys_col(base))) % COLS));
  endfunction

  logic head_in_window;
  assign head_in_window = (fifo_head.col >= base_q) &&
                          (32'(fifo_head.col) < 32'(base_q) + COLS);

  // Alignment target: first hit left in the grid, else the FIFO head.
  logic align_ok;
  col_t align_col;
  always_comb begin
    align_ok  = 1'b1;
    align_col = '0;
    if (hit_found)        align_col = mod_col(hit_col, base_q);
    else if (!fifo_empty) align_col = fifo_head.col;
    else                  align_ok  = 1'b0;
    align_col[0] = 1'b0;  // start of the double column
  end

  logic do_load, do_read, end_cluster;

  always_comb begin
    state_d      = state_q;
    base_d       = base_q;
    all_loaded_d = all_loaded_q;
    do_load      = 1'b0;
    do_read      = 1'b0;
    seed_en      = 1'b0;
    end_cluster  = 1'b0;
    if (!hold) begin
      unique case (state_q)
        S_ALIGN: begin
          if (align_ok) begin
            base_d  = align_col;
            state_d = S_LOAD;
          end
        end
        S_LOAD: begin
          if (!fifo_empty && !all_loaded_q && head_in_window) begin
            do_load = 1'b1;
            if (fifo_head.last) all_loaded_d = 1'b1;
          end else if (all_loaded_q || !fifo_empty) begin
            if (hit_found) begin
              seed_en = 1'b1;
              state_d = S_READ;
            end else begin
              state_d = S_ALIGN;
            end
          end
        end
        S_READ: begin
          if (sel_found) begin
            do_read = 1'b1;
          end else begin
            end_cluster = 1'b1;
            if (all_loaded_q && !hit_found) all_loaded_d = 1'b0;
            if (align_ok) begin
              base_d  = align_col;
              state_d = S_LOAD;
            end else begin
              state_d = S_ALIGN;
            end
          end
        end
        default: state_d = S_ALIGN;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q      <= S_ALIGN;
      base_q       <= '0;
      all_loaded_q <= 1'b0;
      out_valid    <= 1'b0;
      out_row      <= '0;
      out_col      <= '0;
      out_clus_end <= 1'b0;
      out_mod_end  <= 1'b0;
    end else begin
      state_q      <= state_d;
      base_q       <= base_d;
      all_loaded_q <= all_loaded_d;
      out_valid    <= do_read;
      out_row      <= row_t'(sel_row);
      out_col      <= mod_col(sel_col, base_q);
      out_clus_end <= end_cluster;
      out_mod_end  <= end_cluster && all_loaded_q && !hit_found;
    end
  end

  assign first_col = phys_col(base_q);
  assign fifo_pop  = do_load;
  assign wr_en     = do_load;
  assign wr_row    = fifo_head.row[$clog2(ROWS)-1:0];
  assign wr_col    = phys_col(fifo_head.col);
  assign read_en   = do_read;
  assign ram_we    = do_load;
  assign ram_re    = do_read;
  assign ram_wdata = fifo_head.tot;
  assign base_col  = base_q;
  assign idle      = (state_q == S_ALIGN) && !all_loaded_q;

  // Control rules: loading, seeding and readout are mutually exclusive, and
  // nothing is popped from an empty FIFO.
  a_exclusive: assert property (@(posedge clk) disable iff (rst)
                                $onehot0({do_load, seed_en, do_read}));
  a_pop_ok:    assert property (@(posedge clk) disable iff (rst) !(fifo_pop && fifo_empty));

endmodule
