// tb_clustering_top: end-to-end, self-checking test of the whole clustering
// device at its default size (two sliding windows of 328 x 8 cells, ToT
// weighting on).
//
// Generates full 328 x 144 pixel modules of random clusters, sends them in
// readout order over the 32-bit input, one word per clock when the device
// is ready, and drains the cluster output with periodic stalls. Module m is
// clustered by window m mod 2; each window's clusters are compared in order
// with the software reference (hit count, ToT-weighted centre, module end).
// It also counts how often each mechanism of the design occurred and fails
// if one never did: window realignment within a module, a cluster split at
// the window length, loads stopped by a hit beyond the window, input stall,
// output back-pressure (hold), both windows busy at once, and both windows
// offering a cluster to the merger in the same clock.
module tb_clustering_top;
  import clus_pkg::*;
  import tb_ref_pkg::*;
  localparam int NMOD = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, idle;
  logic [31:0] in_word = '0;
  cluster_t out_cluster;
  logic [1:0] out_win;

  clustering_top dut (.clk, .rst, .in_valid, .in_word, .in_ready,
    .out_valid, .out_cluster, .out_win, .out_ready, .idle);

  int checks = 0, failures = 0;
  ref_clus_t exp [2][$];
  int n_realign = 0, n_split = 0, n_beyond = 0, n_in_stall = 0, n_hold = 0;
  int n_both_busy = 0, n_both_out = 0, n_clusters = 0, n_mod_end = 0;
  col_t last_base [2];

  always @(posedge clk) if (!rst) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (dut.g_win[0].u_engine.hold || dut.g_win[1].u_engine.hold) n_hold++;
    if (!dut.g_win[0].u_engine.core_idle && !dut.g_win[1].u_engine.core_idle) n_both_busy++;
    if (dut.win_out_valid == 2'b11) n_both_out++;
    if (dut.g_win[0].u_engine.u_core.u_fsm.base_q != last_base[0]) n_realign++;
    last_base[0] <= dut.g_win[0].u_engine.u_core.u_fsm.base_q;
    if (dut.g_win[0].u_engine.u_core.u_fsm.state_q == 2'd1 &&
        !dut.g_win[0].u_engine.u_core.u_fsm.fifo_empty &&
        !dut.g_win[0].u_engine.u_core.u_fsm.head_in_window &&
        !dut.g_win[0].u_engine.u_core.u_fsm.all_loaded_q) n_beyond++;
    if (out_valid && out_ready) begin
      ref_clus_t e;
      int x, y, w;
      w = int'(out_win);
      checks++;
      n_clusters++;
      if (out_cluster.mod_end) n_mod_end++;
      if (w > 1 || exp[w].size() == 0) begin failures++; $display("FAIL unexpected cluster from window %0d", w); end
      else begin
        e = exp[w].pop_front();
        expect_centre(e, 1'b1, x, y);
        if (int'(out_cluster.nhits) != e.n || int'(out_cluster.x) != x || int'(out_cluster.y) != y ||
            out_cluster.mod_end != e.mod_end) begin
          failures++;
          if (failures < 10) $display("FAIL win %0d cluster n=%0d x=%0d y=%0d exp n=%0d x=%0d y=%0d", w,
            out_cluster.nhits, out_cluster.x, out_cluster.y, e.n, x, y);
        end
      end
    end
  end

  initial begin
    longint t0, t1;
    int nhits = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    t0 = $time;
    fork
      forever begin
        @(negedge clk);
        out_ready = ($time / 10) % 600 > 250;
      end
      begin
        for (int m = 0; m < NMOD; m++) begin
          hit_q_t h;
          clus_q_t e;
          h = gen_module(MOD_ROWS, MOD_COLS, 150, 2);
          e = ref_cluster(h, 8);
          foreach (e[i]) begin
            exp[m % 2].push_back(e[i]);
            if (e[i].cmax - e[i].cmin == 7) n_split++;   // cut at the window length
          end
          nhits += h.size();
          foreach (h[i]) begin
            @(negedge clk);
            in_valid = 1; in_word = hit_to_word(h[i]);
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk);
          end
          @(negedge clk);
          in_valid = 0;
        end
      end
    join_any
    wait (exp[0].size() == 0 && exp[1].size() == 0);
    repeat (10) @(negedge clk);
    t1 = $time;
    $display("%0d modules, %0d hits, %0d clusters in %0d clocks", NMOD, nhits, n_clusters, (t1 - t0) / 10);
    checks++;
    if (!idle) begin failures++; $display("FAIL device not idle at the end"); end
    checks++;
    if (n_mod_end != NMOD) begin failures++; $display("FAIL %0d module ends, expected %0d", n_mod_end, NMOD); end
    $display("mechanisms: split %0d, realign %0d, load stopped beyond window %0d, input stall %0d, hold %0d, both windows busy %0d, both outputs waiting %0d",
             n_split, n_realign, n_beyond, n_in_stall, n_hold, n_both_busy, n_both_out);
    checks += 7;
    if (n_split == 0)     begin failures++; $display("FAIL no cluster cut at the window length"); end
    if (n_realign == 0)   begin failures++; $display("FAIL no window realignment"); end
    if (n_beyond == 0)    begin failures++; $display("FAIL no load stopped by a hit beyond the window"); end
    if (n_in_stall == 0)  begin failures++; $display("FAIL no input stall"); end
    if (n_hold == 0)      begin failures++; $display("FAIL no output back-pressure"); end
    if (n_both_busy == 0) begin failures++; $display("FAIL windows never worked in parallel"); end
    if (n_both_out == 0)  begin failures++; $display("FAIL merger never arbitrated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
