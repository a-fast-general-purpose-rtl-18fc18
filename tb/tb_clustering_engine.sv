// tb_clustering_engine: self-checking test of one sliding-window channel
// (FIFO, core, ToT RAM, average calculator, output FIFO). Random modules,
// including clusters longer than the window, are pushed with random gaps;
// the cluster output is drained with random stalls so that the output FIFO
// fills and holds the core. Every cluster's hit count, ToT-weighted centre
// and module-end flag is compared with the software reference. A 64 x 8
// grid keeps the run short.
module tb_clustering_engine;
  import clus_pkg::*;
  import tb_ref_pkg::*;
  localparam int ROWS = 64, COLS = 8, MCOLS = 48;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_pop, idle;
  hit_t in_hit = '0;
  cluster_t out_cluster;
  logic drain = 0;
  clustering_engine #(.ROWS(ROWS), .COLS(COLS), .HIT_DEPTH(32), .CLUS_DEPTH(8)) dut (
    .clk, .rst, .in_valid, .in_hit, .in_ready, .out_valid, .out_cluster, .out_pop, .idle);
  int checks = 0, failures = 0, n_hold = 0, n_in_stall = 0;
  ref_clus_t exp [$];

  assign out_pop = out_valid && drain;

  always @(posedge clk) if (!rst) begin
    if (dut.hold) n_hold++;
    if (in_valid && !in_ready) n_in_stall++;
    if (out_pop) begin
      ref_clus_t e;
      int x, y;
      checks++;
      if (exp.size() == 0) begin failures++; $display("FAIL unexpected cluster"); end
      else begin
        e = exp.pop_front();
        expect_centre(e, 1'b1, x, y);
        if (int'(out_cluster.nhits) != e.n || int'(out_cluster.x) != x || int'(out_cluster.y) != y ||
            out_cluster.mod_end != e.mod_end) begin
          failures++;
          if (failures < 10) $display("FAIL cluster n=%0d x=%0d y=%0d e=%0d exp n=%0d x=%0d y=%0d e=%0d",
            out_cluster.nhits, out_cluster.x, out_cluster.y, out_cluster.mod_end, e.n, x, y, e.mod_end);
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    fork
      begin
        for (int i = 0; i < 40000; i++) begin
          @(negedge clk);
          drain = (i / 300) % 3 != 0 && $urandom_range(0, 1);
        end
      end
      begin
        for (int m = 0; m < 10; m++) begin
          hit_q_t h;
          clus_q_t e;
          h = gen_module(ROWS, MCOLS, 25, m % 3 == 0 ? 2 : 0);
          e = ref_cluster(h, COLS);
          foreach (e[i]) exp.push_back(e[i]);
          foreach (h[i]) begin
            @(negedge clk);
            in_valid = 1; in_hit = h[i];
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk);
            @(negedge clk);
            in_valid = 0;
            repeat ($urandom_range(0, 1)) @(negedge clk);
          end
        end
      end
    join_any
    wait (exp.size() == 0 && idle);
    drain = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL engine not idle"); end
    if (n_hold == 0) begin failures++; $display("FAIL output back-pressure never held the core"); end
    if (n_in_stall == 0) begin failures++; $display("FAIL input FIFO never full"); end
    $display("hold clocks %0d, input stall clocks %0d", n_hold, n_in_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog, %0d clusters outstanding", exp.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
