// tb_cluster_cell: self-checking test of one clustering cell against a
// model of its three states (EMPTY, HIT, SELECTED). Random write, seed,
// readout and neighbour patterns, for both cluster definitions (side or
// corner contact, side only).
module tb_cluster_cell;
  import clus_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic row_sel, col_sel, seed, readout;
  logic [7:0] nbr;
  logic hit8, sel8, hit4, sel4;
  cluster_cell #(.DIAGONAL(1'b1)) dut8 (.clk, .rst, .row_sel, .col_sel, .nbr_sel(nbr),
    .seed, .readout, .hit(hit8), .selected(sel8));
  cluster_cell #(.DIAGONAL(1'b0)) dut4 (.clk, .rst, .row_sel, .col_sel, .nbr_sel(nbr),
    .seed, .readout, .hit(hit4), .selected(sel4));
  int checks = 0, failures = 0;
  typedef enum {EMPTY, HIT, SELECTED} st_e;
  st_e m8 = EMPTY, m4 = EMPTY;
  int n_corner_join = 0;

  function automatic st_e step(st_e s, bit diag);
    if (readout) return EMPTY;
    if (row_sel && col_sel) return (s == EMPTY) ? HIT : s;
    if (s == HIT && (seed || (diag ? (nbr != 0) : (nbr[3:0] != 0)))) return SELECTED;
    return s;
  endfunction

  initial begin
    {row_sel, col_sel, seed, readout, nbr} = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (hit8 != (m8 != EMPTY) || sel8 != (m8 == SELECTED) ||
          hit4 != (m4 != EMPTY) || sel4 != (m4 == SELECTED)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: %0d%0d/%0d%0d model %s %s", i, hit8, sel8, hit4, sel4, m8.name(), m4.name());
      end
      row_sel = $urandom_range(0, 3) == 0;
      col_sel = $urandom_range(0, 1);
      seed    = $urandom_range(0, 7) == 0;
      readout = $urandom_range(0, 9) == 0;
      nbr     = ($urandom_range(0, 3) == 0) ? 8'(1 << $urandom_range(0, 7)) : 8'h00;
      if (m8 == HIT && nbr[7:4] != 0 && !readout && !(row_sel && col_sel) && !seed) n_corner_join++;
      @(posedge clk);
      m8 = step(m8, 1'b1);
      m4 = step(m4, 1'b0);
    end
    checks++;
    if (n_corner_join == 0) begin failures++; $display("FAIL no corner join exercised"); end
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
