// tb_module_dispatcher: self-checking test of the module dispatcher with
// two windows: random module lengths and random window back-pressure; each
// word must reach the window that owns its module (modules alternate), in
// order, unchanged, and the link must stall while that window is not ready.
module tb_module_dispatcher;
  import clus_pkg::*;
  localparam int N = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready;
  logic [31:0] in_word = '0;
  logic [N-1:0] win_valid, win_ready;
  hit_t win_hit;
  logic [1:0] cur_win;
  module_dispatcher #(.N_WIN(N)) dut (.clk, .rst, .in_valid, .in_word, .in_ready, .win_valid, .win_hit, .win_ready, .cur_win);
  int checks = 0, failures = 0, n_stall = 0;
  hit_t exp [N][$];

  always @(posedge clk) if (!rst) begin
    for (int w = 0; w < N; w++)
      if (win_valid[w] && win_ready[w]) begin
        hit_t e;
        checks++;
        if (exp[w].size() == 0) begin failures++; $display("FAIL unexpected word in window %0d", w); end
        else begin
          e = exp[w].pop_front();
          if (e != win_hit) begin failures++; $display("FAIL window %0d word mismatch", w); end
        end
      end
    if (in_valid && !in_ready) n_stall++;
  end

  initial begin
    win_ready = '1;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < 60; m++) begin
      int len;
      len = $urandom_range(1, 12);
      for (int i = 0; i < len; i++) begin
        hit_t h;
        h.col = col_t'($urandom_range(0, 143)); h.row = row_t'($urandom_range(0, 327));
        h.tot = tot_t'($urandom); h.last = (i == len - 1);
        exp[m % N].push_back(h);
        @(negedge clk);
        in_valid = 1; in_word = hit_to_word(h);
        win_ready = N'($urandom_range(0, 3));
        #1;
        while (!in_ready) begin
          @(negedge clk);
          win_ready = N'($urandom_range(0, 3));
          #1;
        end
        @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    end
    repeat (2) @(negedge clk);
    checks++;
    if (exp[0].size() != 0 || exp[1].size() != 0) begin failures++; $display("FAIL words not delivered"); end
    if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
