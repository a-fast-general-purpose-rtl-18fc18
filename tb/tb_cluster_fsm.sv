// tb_cluster_fsm: directed, self-checking test of the clustering FSM,
// run with a processing grid as its environment and a behavioural FIFO.
//   1. one hit in an odd column: the window aligns one column to the left
//      (start of the double column); clock-exact timing of align, load,
//      seed, readout and cluster end; output position of the hit.
//   2. hits spanning more than the window: only in-window hits are loaded
//      before the first seed; the window slides to the next first hit.
//   3. hold stops loading and readout.
module tb_cluster_fsm;
  import clus_pkg::*;
  localparam int ROWS = 16, COLS = 8;
  logic clk = 0, rst = 1, hold = 0;
  always #5 clk = ~clk;
  hit_t q [$];
  logic fifo_empty, fifo_pop;
  hit_t fifo_head;
  assign fifo_empty = q.size() == 0;
  assign fifo_head  = (q.size() == 0) ? '0 : q[0];
  logic [2:0] first_col, wr_col, hit_col, sel_col;
  logic [3:0] wr_row, hit_row, sel_row;
  logic wr_en, seed_en, read_en, hit_found, sel_found, ram_we, ram_re;
  tot_t ram_wdata;
  logic out_valid, out_clus_end, out_mod_end, idle;
  row_t out_row;
  col_t out_col, base_col;

  cluster_fsm #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst, .hold, .fifo_empty, .fifo_head, .fifo_pop,
    .first_col, .wr_en, .wr_row, .wr_col, .seed_en, .read_en, .hit_found, .hit_row, .hit_col,
    .sel_found, .sel_row, .sel_col, .ram_we, .ram_re, .ram_wdata,
    .out_valid, .out_row, .out_col, .out_clus_end, .out_mod_end, .base_col, .idle);
  processing_grid #(.ROWS(ROWS), .COLS(COLS)) u_grid (.clk, .rst, .first_col, .wr_en, .wr_row, .wr_col,
    .seed_en, .read_en, .hit_found, .hit_row, .hit_col, .sel_found, .sel_row, .sel_col);

  always @(posedge clk) if (!rst && fifo_pop) void'(q.pop_front());

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic hit_t mk(int c, int r, int t, bit last);
    hit_t h;
    h.col = col_t'(c); h.row = row_t'(r); h.tot = tot_t'(t); h.last = last;
    return h;
  endfunction

  initial begin
    int pops, seeds;
    repeat (2) @(posedge clk);
    rst = 0;
    // ---- 1: single hit in column 13 ----
    @(negedge clk);
    q.push_back(mk(13, 5, 77, 1));
    // cycle A (align): base becomes 12
    @(negedge clk);
    chk(base_col == 12, $sformatf("align to double column: base %0d exp 12", base_col));
    chk(fifo_pop && wr_en && ram_we && ram_wdata == 77, "load in the clock after align");
    chk(wr_col == 3'(13 % COLS), "physical write column = column mod COLS");
    @(negedge clk);
    chk(seed_en && !fifo_pop, "seed in the clock after the last load");
    @(negedge clk);
    chk(read_en && ram_re, "readout in the clock after the seed");
    @(negedge clk);
    chk(out_valid && out_col == 13 && out_row == 5, $sformatf("output hit c%0d r%0d", out_col, out_row));
    chk(!read_en, "cluster end detected in the clock after the last readout");
    @(negedge clk);
    chk(out_clus_end && out_mod_end, "cluster end and module end flagged");
    @(negedge clk);
    chk(idle, "idle after module");

    // ---- 2: window limit ----
    // hits in columns 2..9 are in the window [2, 9]; column 10 is outside
    q.push_back(mk(3, 1, 1, 0));
    q.push_back(mk(2, 8, 1, 0));
    q.push_back(mk(9, 4, 1, 0));
    q.push_back(mk(10, 4, 1, 0));   // beyond the window, joins hit (9,4) only after sliding
    q.push_back(mk(11, 9, 1, 1));
    pops = 0; seeds = 0;
    while (seeds == 0) begin
      @(negedge clk);
      if (fifo_pop) pops++;
      if (seed_en) seeds++;
    end
    chk(base_col == 2, $sformatf("window base %0d exp 2", base_col));
    chk(pops == 3, $sformatf("loaded %0d hits before the first seed, exp 3", pops));
    chk(q.size() == 2 && q[0].col == 10, "hit beyond the window stays in the FIFO");
    // read out; next alignments follow the first remaining hit
    begin
      int clus = 0, guard = 0;
      bit saw_base8 = 0;
      while (!(out_clus_end && out_mod_end) && guard < 200) begin
        @(negedge clk);
        guard++;
        if (out_clus_end) clus++;
        if (base_col == 8) saw_base8 = 1;
      end
      // clusters {(2,8)} and {(3,1)} are read in window [2,9]; the window
      // then slides to column 8 (first remaining hit (9,4)), loads (10,4)
      // and (11,9), and reads {(9,4),(10,4)} and {(11,9)}
      chk(clus == 4, $sformatf("%0d clusters exp 4", clus));
      chk(saw_base8, "window slid to column 8");
    end

    // ---- 3: hold ----
    @(negedge clk);
    hold = 1;
    q.push_back(mk(40, 3, 5, 1));
    repeat (5) begin
      @(negedge clk);
      chk(!fifo_pop && !read_en && !seed_en, "nothing happens under hold");
    end
    hold = 0;
    begin
      int guard = 0;
      while (!out_mod_end && guard < 20) begin @(negedge clk); guard++; end
      chk(out_mod_end && q.size() == 0, "module processed after hold released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
