// tb_hit_fifo: self-checking test of the show-ahead FIFO against a queue
// model: random push/pop traffic, simultaneous push and pop, full, empty
// and almost-full flags, and the show-ahead output word.
module tb_hit_fifo;
  localparam int W = 33, D = 8, M = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, empty, full, af;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D+1)-1:0] count;
  hit_fifo #(.WIDTH(W), .DEPTH(D), .AF_MARGIN(M)) dut (
    .clk, .rst, .push, .din, .pop, .dout, .empty, .full, .almost_full(af), .count);
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int n_full = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // check flags and head against the model
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) ||
          af != (model.size() >= D - M) || int'(count) != model.size() ||
          (model.size() > 0 && dout != model[0])) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d size %0d count %0d empty %0d full %0d", i, model.size(), count, empty, full);
      end
      if (full) n_full++;
      push = ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 35)) && !full;
      pop  = ($urandom_range(0, 99) < 50) && !empty;
      din  = {$urandom, $urandom_range(0, 1)};
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL FIFO never full"); end
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
