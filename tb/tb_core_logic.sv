// tb_core_logic: self-checking test of the clustering core (FSM + grid).
//
// Feeds random pixel modules through a behavioural show-ahead FIFO and
// compares every cluster the core emits (hit count, position sums, a pixel
// hash, end-of-module flag) with the software reference model. Phase 1
// preloads three modules and checks the paper's cycle count: 2 clocks per
// hit plus 2 per cluster (plus one clock for the very first alignment).
// Phase 2 trickles hits in with gaps and toggles hold, to check waiting and
// back-pressure. A 36 x 8 grid keeps the run short; the logic is the same
// at 328 x 8.
module tb_core_logic;
  import clus_pkg::*;
  import tb_ref_pkg::*;

  localparam int ROWS = 36;
  localparam int COLS = 8;
  localparam int MCOLS = 40;

  logic clk = 0, rst = 1, hold = 0;
  always #5 clk = ~clk;

  hit_t   q [$];
  logic   fifo_empty;
  hit_t   fifo_head;
  logic   fifo_pop;
  logic   out_valid, out_clus_end, out_mod_end, idle;
  row_t   out_row;
  col_t   out_col, base_col;

  assign fifo_empty = (q.size() == 0);
  assign fifo_head  = (q.size() == 0) ? '0 : q[0];

  core_logic #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst, .hold, .fifo_empty, .fifo_head, .fifo_pop,
    .ram_we(), .ram_wcol(), .ram_wrow(), .ram_wdata(),
    .ram_re(), .ram_rcol(), .ram_rrow(),
    .out_valid, .out_row, .out_col, .out_clus_end, .out_mod_end,
    .base_col, .idle
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // collect clusters from the DUT
  ref_clus_t got [$];
  ref_clus_t cur = '{default: 0};
  always @(posedge clk) begin
    if (!rst) begin
      if (out_valid) begin
        cur.n++;
        cur.sum_col += out_col; cur.sum_row += out_row;
        cur.sum_sig += pix_sig(int'(out_col), int'(out_row));
      end
      if (out_clus_end) begin
        cur.mod_end = out_mod_end;
        got.push_back(cur);
        cur = '{default: 0};
      end
    end
  end

  // FIFO pop
  always @(posedge clk) if (!rst && fifo_pop) void'(q.pop_front());

  task automatic compare(clus_q_t exp);
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL cluster count got %0d exp %0d", got.size(), exp.size());
    end
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i].n != exp[i].n || got[i].sum_col != exp[i].sum_col ||
          got[i].sum_row != exp[i].sum_row || got[i].sum_sig != exp[i].sum_sig ||
          got[i].mod_end != exp[i].mod_end) begin
        failures++;
        if (failures < 10)
          $display("FAIL cluster %0d: got n=%0d c=%0d r=%0d e=%0d exp n=%0d c=%0d r=%0d e=%0d", i,
                   got[i].n, got[i].sum_col, got[i].sum_row, got[i].mod_end,
                   exp[i].n, exp[i].sum_col, exp[i].sum_row, exp[i].mod_end);
      end
    end
  endtask

  initial begin
    hit_q_t mods [3];
    clus_q_t exp;
    int nhits, nclus;
    longint t0, t1;

    // ---------- phase 1: preloaded modules, cycle count ----------
    nhits = 0;
    for (int m = 0; m < 3; m++) begin
      clus_q_t e;
      mods[m] = gen_module(ROWS, MCOLS, 12, (m == 1) ? 1 : 0);
      e = ref_cluster(mods[m], COLS);
      foreach (e[i]) exp.push_back(e[i]);
      foreach (mods[m][i]) q.push_back(mods[m][i]);
      nhits += mods[m].size();
    end
    nclus = exp.size();
    repeat (3) @(posedge clk);
    rst = 0;
    t0 = cyc;
    // wait for the third module end
    begin
      int ends = 0;
      while (ends < 3) begin
        @(posedge clk);
        if (out_clus_end && out_mod_end) ends++;
      end
    end
    t1 = cyc;
    @(posedge clk);
    compare(exp);
    checks++;
    if (t1 - t0 != longint'(2 * nhits + 2 * nclus + 1)) begin
      failures++;
      $display("FAIL cycle count: %0d clocks for %0d hits / %0d clusters, expected %0d",
               t1 - t0, nhits, nclus, 2 * nhits + 2 * nclus + 1);
    end else
      $display("phase 1: %0d hits, %0d clusters in %0d clocks", nhits, nclus, t1 - t0);
    // the long cluster (10 columns) must have been split
    repeat (3) @(posedge clk);

    // ---------- phase 2: starved input and hold ----------
    got.delete();
    exp.delete();
    for (int m = 0; m < 4; m++) begin
      hit_q_t h;
      clus_q_t e;
      h = gen_module(ROWS, MCOLS, 10, 0);
      e = ref_cluster(h, COLS);
      foreach (e[i]) exp.push_back(e[i]);
      foreach (h[i]) begin
        q.push_back(h[i]);
        repeat ($urandom_range(0, 3)) begin
          @(posedge clk);
          hold <= ($urandom_range(0, 3) == 0);
        end
      end
    end
    while (got.size() < exp.size() && cyc < 200000) begin
      @(posedge clk);
      hold <= ($urandom_range(0, 3) == 0);
    end
    hold <= 0;
    repeat (5) @(posedge clk);
    compare(exp);
    checks++;
    if (!idle || q.size() != 0) begin
      failures++;
      $display("FAIL core not idle at the end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
