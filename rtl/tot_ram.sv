// tot_ram: ToT store of the sliding window.
//
// The grid itself keeps only hit/selected flags; the time over threshold of
// each hit is written here, at the physical grid cell the hit occupies,
// while the hit is loaded, and read back when the cell is read out. Size
// COLS x ROWS words of TOT_W bits: 8 x 328 x 8 bits = 20992 bits, the
// "~21 kbits" of the paper. One write and one read port (simple dual port);
// the read is synchronous, data valid one clock after re, which matches the
// registered hit output of the core. Written as an array so an FPGA tool
// maps it to block RAM. A read and a write of the same cell in one clock
// cannot happen (a cell is loaded only while it is empty).
module tot_ram #(
  parameter int unsigned ROWS  = 328,
  parameter int unsigned COLS  = 8,
  parameter int unsigned TOT_W = 8
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(COLS)-1:0] wcol,
  input  logic [$clog2(ROWS)-1:0] wrow,
  input  logic [TOT_W-1:0]        wdata,
  input  logic                    re,
  input  logic [$clog2(COLS)-1:0] rcol,
  input  logic [$clog2(ROWS)-1:0] rrow,
  output logic [TOT_W-1:0]        rdata
);
  logic [TOT_W-1:0] mem [COLS][ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[wcol][wrow] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[rcol][rrow];
  end

endmodule
