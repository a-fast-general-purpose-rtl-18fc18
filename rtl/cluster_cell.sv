// cluster_cell: elementary cell of the clustering grid.
//
// Each cell stands for one pixel of the sliding window and has three states,
// EMPTY, HIT and SELECTED, kept in two flip-flops as in the paper's cell
// diagram: hit_q (the pixel holds a hit not yet read out) and sel_q (the hit
// belongs to the cluster being read out). Encoding: EMPTY = {hit,sel} 00,
// HIT = 10, SELECTED = 11.
//
//   write    = row_sel AND col_sel (the paper's WRITE): EMPTY -> HIT
//   seed     = the "SEL HIT" priority chain granted this cell while the FSM
//              selects a seed: HIT -> SELECTED
//   joining  = the cell is HIT and the cluster definition is true for the
//              SELECTED flags of its 8 neighbours: HIT -> SELECTED
//   readout  = the "SEL FOR READOUT" chain granted this cell: -> EMPTY
//
// Propagation runs every cycle: a SELECTED cell turns its HIT neighbours
// SELECTED one clock later, while the readout chain empties one SELECTED cell
// per clock. The cluster definition is joins_cluster() in clus_pkg (side or
// corner contact, as in the paper; DIAGONAL=0 gives side contact only). The
// ordering of the neighbour vector is this design's choice. Readout has
// priority over every other event; write has priority over seed and join
// (the FSM never issues them in the same cycle). Synchronous reset to EMPTY.
module cluster_cell
  import clus_pkg::*;
#(
  parameter bit DIAGONAL = 1'b1
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       row_sel,   // ROW SEL
  input  logic       col_sel,   // COLUMN SEL
  input  logic [7:0] nbr_sel,   // SELECTED flags of the 8 first neighbours
  input  logic       seed,      // SEL HIT grant, qualified by the FSM
  input  logic       readout,   // SEL FOR READOUT grant, qualified by the FSM
  output logic       hit,       // state HIT or SELECTED
  output logic       selected   // state SELECTED
);
  logic hit_q, sel_q;
  logic write;

  assign write = row_sel & col_sel;

  always_ff @(posedge clk) begin
    if (rst) begin
      hit_q <= 1'b0;
      sel_q <= 1'b0;
    end else if (readout) begin
      hit_q <= 1'b0;
      sel_q <= 1'b0;
    end else if (write) begin
      hit_q <= 1'b1;
    end else if (hit_q && !sel_q && (seed || joins_cluster(nbr_sel, DIAGONAL))) begin
      sel_q <= 1'b1;
    end
  end

  assign hit      = hit_q;
  assign selected = sel_q;

endmodule
