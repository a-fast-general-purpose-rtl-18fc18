// tb_link_rate: throughput test of the whole device at its default size
// against the rate of one input link.
//
// The link delivers one hit every 25 ns (40 MHz); with a 15 ns device clock
// that is 0.6 words per clock, which this test models by offering 3 words
// in every 5 clocks. The data are full-size pixel modules of isolated
// 2-hit clusters, the average cluster size assumed for the published rate
// estimate: one window needs 2 clocks per hit + 2 per cluster = 3 clocks per
// hit, so a single window could not follow, while two windows working on
// alternate modules can. The test checks that the link is never stalled
// (in_ready stays high), that every cluster comes out with 2 hits and the
// right centre, and that the device finishes within the time the backlog
// of the last module needs (3 clocks per hit). It also checks the exact
// clock count of one window on a module that is already in its FIFO.
module tb_link_rate;
  import clus_pkg::*;
  import tb_ref_pkg::*;
  localparam int NMOD = 8;
  localparam int PAIRS = 200;          // 2-hit clusters per module
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, idle;
  logic out_ready = 1;
  logic [31:0] in_word = '0;
  cluster_t out_cluster;
  logic [1:0] out_win;

  clustering_top dut (.clk, .rst, .in_valid, .in_word, .in_ready,
    .out_valid, .out_cluster, .out_win, .out_ready, .idle);

  int checks = 0, failures = 0, n_stall = 0, n_out = 0;
  ref_clus_t exp [2][$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // A module of isolated vertical pairs: even columns only, rows 3 apart.
  function automatic hit_q_t pair_module(int pairs);
    hit_q_t h;
    int placed = 0;
    for (int c = 0; c < MOD_COLS && placed < pairs; c += 2)
      for (int r = 0; r + 1 < MOD_ROWS && placed < pairs; r += 3)
        if ($urandom_range(0, 3) == 0) begin
          hit_t a, b;
          a.col = col_t'(c); a.row = row_t'(r);     a.tot = tot_t'($urandom_range(1, 255)); a.last = 0;
          b.col = col_t'(c); b.row = row_t'(r + 1); b.tot = tot_t'($urandom_range(1, 255)); b.last = 0;
          h.push_back(a); h.push_back(b);
          placed++;
        end
    // hits of one double column arrive in any order
    begin
      hit_q_t o;
      for (int dc = 0; dc < MOD_COLS / 2; dc++) begin
        hit_q_t bk;
        foreach (h[i]) if (int'(h[i].col) / 2 == dc) bk.push_back(h[i]);
        bk.shuffle();
        foreach (bk[i]) o.push_back(bk[i]);
      end
      o[o.size() - 1].last = 1'b1;
      return o;
    end
  endfunction

  always @(posedge clk) if (!rst) begin
    if (in_valid && !in_ready) n_stall++;
    if (out_valid && out_ready) begin
      ref_clus_t e;
      int x, y, w;
      w = int'(out_win);
      n_out++;
      checks++;
      if (w > 1 || exp[w].size() == 0) begin failures++; $display("FAIL unexpected cluster"); end
      else begin
        e = exp[w].pop_front();
        expect_centre(e, 1'b1, x, y);
        if (out_cluster.nhits != 2 || e.n != 2 || int'(out_cluster.x) != x || int'(out_cluster.y) != y) begin
          failures++;
          if (failures < 10) $display("FAIL cluster n=%0d x=%0d y=%0d exp n=%0d x=%0d y=%0d",
            out_cluster.nhits, out_cluster.x, out_cluster.y, e.n, x, y);
        end
      end
    end
  end

  initial begin
    longint t_in_end, t_done, t0, t1;
    int nhits = 0, last_mod_hits = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // ---- part 1: 8 modules at link rate ----
    for (int m = 0; m < NMOD; m++) begin
      hit_q_t h;
      clus_q_t e;
      h = pair_module(PAIRS);
      e = ref_cluster(h, 8);
      foreach (e[i]) exp[m % 2].push_back(e[i]);
      nhits += h.size();
      last_mod_hits = h.size();
      foreach (h[i]) begin
        @(negedge clk);
        in_valid = (cyc % 5) < 3;
        while (!in_valid) begin
          @(negedge clk);
          in_valid = (cyc % 5) < 3;
        end
        in_word = hit_to_word(h[i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    end
    t_in_end = cyc;
    wait (exp[0].size() == 0 && exp[1].size() == 0);
    t_done = cyc;
    $display("%0d hits in %0d modules: link busy %0d clocks, device done %0d clocks after the last word",
             nhits, NMOD, t_in_end, t_done - t_in_end);
    checks++;
    if (n_stall != 0) begin failures++; $display("FAIL link stalled %0d clocks", n_stall); end
    checks++;
    if (t_done - t_in_end > longint'(3 * last_mod_hits + 20)) begin
      failures++; $display("FAIL device fell behind the link");
    end
    // ---- part 2: exact window clock count, module preloaded ----
    repeat (20) @(negedge clk);
    begin
      hit_q_t h;
      clus_q_t e;
      h = pair_module(100);                   // fits the 256-word input FIFO
      e = ref_cluster(h, 8);
      foreach (e[i]) exp[0].push_back(e[i]);   // module 8 goes to window 0
      out_ready = 0;                            // keep the output quiet, no hold yet
      force dut.g_win[0].u_engine.hold = 1'b1;  // let the FIFO fill before starting
      foreach (h[i]) begin
        @(negedge clk);
        in_valid = 1; in_word = hit_to_word(h[i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      out_ready = 1;
      @(negedge clk);
      release dut.g_win[0].u_engine.hold;
      t0 = cyc;
      while (!(dut.g_win[0].u_engine.c_clus_end && dut.g_win[0].u_engine.c_mod_end)) @(posedge clk);
      t1 = cyc;
      $display("one window: %0d hits, %0d clusters in %0d clocks (%0.2f clocks per hit)",
               h.size(), e.size(), t1 - t0, real'(t1 - t0) / h.size());
      checks++;
      // 2 per hit + 2 per cluster, +1 for the first alignment after idle
      if (t1 - t0 != longint'(2 * h.size() + 2 * e.size() + 1)) begin
        failures++; $display("FAIL window clock count, expected %0d", 2 * h.size() + 2 * e.size() + 1);
      end
      wait (exp[0].size() == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
