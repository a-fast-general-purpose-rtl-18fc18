// module_dispatcher: spreads pixel modules over the sliding windows.
//
// To keep pace with the 40 MHz hit rate of one input link the device runs
// N_WIN sliding windows in parallel, each clustering a different pixel
// module (the paper uses two). The dispatcher sends each whole module, a run
// of hit words ending with one whose last bit is set, to one window and
// moves to the next window in turn after the last word. How modules are
// shared out is not given in the paper; strict rotation is this design's
// choice.
//
// Interface: valid-ready input of 32-bit words; per window a valid, the
// unpacked hit and that window's ready. in_ready follows the ready of the
// current window, so a full window FIFO stalls the link. Combinational
// path from win_ready to in_ready; cur_win changes on the clock after a
// last word is accepted.
module module_dispatcher
  import clus_pkg::*;
#(
  parameter int unsigned N_WIN = 2
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic [WORD_W-1:0]        in_word,
  output logic                     in_ready,
  output logic [N_WIN-1:0]         win_valid,
  output hit_t                     win_hit,
  input  logic [N_WIN-1:0]         win_ready,
  output logic [$clog2(N_WIN+1)-1:0] cur_win
);
  hit_t h;
  assign h       = word_to_hit(in_word);
  assign win_hit = h;

  always_comb begin
    win_valid          = '0;
    win_valid[cur_win] = in_valid;
    in_ready           = win_ready[cur_win];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_win <= '0;
    end else if (in_valid && in_ready && h.last) begin
      cur_win <= (32'(cur_win) == N_WIN - 1) ? '0 : cur_win + 1'b1;
    end
  end

endmodule
