// hit_fifo: synchronous show-ahead FIFO.
//
// Holds the hit words of the pixel module being received until the sliding
// window is ready to load them, and (with a different WIDTH) the finished
// clusters of one sliding window until the output merger takes them. The
// paper shows a FIFO between the input link and the core logic; its depth
// and interface are this design's own choice.
//
// Interface: push/din write one word per cycle when not full; dout always
// shows the oldest word while empty is low (show-ahead), so the FSM can
// look at the column of the next hit before deciding to pop it. pop removes
// that word. count and almost_full (count >= DEPTH - AF_MARGIN) serve as
// flow control. A push and a pop may happen in the same cycle. All outputs
// are derived from registers; a pushed word is visible on dout the cycle
// after the push. Synchronous active-high reset empties the FIFO.
module hit_fifo #(
  parameter int unsigned WIDTH     = 33,
  parameter int unsigned DEPTH     = 256,
  parameter int unsigned AF_MARGIN = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic             almost_full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  assign empty       = (count == '0);
  assign full        = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign almost_full = (32'(count) + AF_MARGIN >= DEPTH);
  assign dout        = mem[rd_ptr];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Handshake rules: never write a full FIFO, never read an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));

endmodule
