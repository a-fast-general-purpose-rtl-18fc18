// tb_cluster_merger: self-checking test of the round-robin cluster merger
// with two sources modelled as show-ahead queues and a randomly stalling
// sink. Checks that every cluster arrives once, in order per source, with
// the right window tag, and that the grant alternates whenever both
// sources wait.
module tb_cluster_merger;
  import clus_pkg::*;
  localparam int N = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid, in_pop;
  cluster_t [N-1:0] in_cluster;
  logic out_valid, out_ready = 0;
  cluster_t out_cluster;
  logic [1:0] out_win;
  cluster_merger #(.N_WIN(N)) dut (.clk, .rst, .in_valid, .in_cluster, .in_pop, .out_valid, .out_cluster, .out_win, .out_ready);
  cluster_t src [N][$];
  cluster_t exp [N][$];
  int checks = 0, failures = 0, n_both = 0;
  int last_win = -1;
  bit last_both = 0;

  always_comb begin
    for (int w = 0; w < N; w++) begin
      in_valid[w]   = src[w].size() > 0;
      in_cluster[w] = (src[w].size() > 0) ? src[w][0] : '0;
    end
  end

  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) begin
      cluster_t e;
      int w;
      w = int'(out_win);
      checks++;
      if (w >= N || exp[w].size() == 0) begin failures++; $display("FAIL bad window %0d", w); end
      else begin
        e = exp[w].pop_front();
        if (e != out_cluster) begin failures++; $display("FAIL cluster mismatch from window %0d", w); end
        if (in_pop != N'(1 << w)) begin failures++; $display("FAIL pop strobe %b", in_pop); end
        void'(src[w].pop_front());
      end
      if (in_valid == '1) begin
        n_both++;
        checks++;
        if (last_both && w == last_win) begin failures++; $display("FAIL round robin not alternating"); end
      end
      last_both = (in_valid == '1);
      last_win  = w;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 3) != 0;
      for (int w = 0; w < N; w++)
        if ($urandom_range(0, 2) == 0 && src[w].size() < 6) begin
          cluster_t c;
          c = cluster_t'({$urandom, $urandom});
          src[w].push_back(c);
          exp[w].push_back(c);
        end
    end
    @(negedge clk);
    out_ready = 1;
    repeat (30) @(negedge clk);
    checks++;
    if (exp[0].size() != 0 || exp[1].size() != 0) begin failures++; $display("FAIL clusters left"); end
    if (n_both == 0) begin failures++; $display("FAIL both sources never waited together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
