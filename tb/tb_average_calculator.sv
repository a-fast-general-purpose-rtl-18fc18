// tb_average_calculator: self-checking test of the cluster centre
// computation. Random clusters of 1..30 hits (some with all ToTs zero) go
// through a ToT-weighted and an unweighted instance, back to back and with
// gaps; each centre, hit count and module-end flag is compared with the
// truncated fixed-point average computed in the testbench.
module tb_average_calculator;
  import clus_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_clus_end = 0, in_mod_end = 0;
  row_t in_row = '0;
  col_t in_col = '0;
  tot_t in_tot = '0;
  logic vw, vu;
  cluster_t cw, cu;
  average_calculator #(.USE_TOT(1'b1)) dut_w (.clk, .rst, .in_valid, .in_row, .in_col, .in_tot,
    .in_clus_end, .in_mod_end, .out_valid(vw), .out_cluster(cw));
  average_calculator #(.USE_TOT(1'b0)) dut_u (.clk, .rst, .in_valid, .in_row, .in_col, .in_tot,
    .in_clus_end, .in_mod_end, .out_valid(vu), .out_cluster(cu));
  int checks = 0, failures = 0;
  ref_clus_t exp_q [$];
  int n_zero = 0;

  always @(posedge clk) if (!rst && vw) begin
    ref_clus_t e;
    int xw, yw, xu, yu;
    e = exp_q.pop_front();
    expect_centre(e, 1'b1, xw, yw);
    expect_centre(e, 1'b0, xu, yu);
    checks++;
    if (!vu || int'(cw.x) != xw || int'(cw.y) != yw || int'(cu.x) != xu || int'(cu.y) != yu ||
        int'(cw.nhits) != e.n || cw.mod_end != e.mod_end) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d got w(%0d,%0d) u(%0d,%0d) exp w(%0d,%0d) u(%0d,%0d)",
        e.n, cw.x, cw.y, cu.x, cu.y, xw, yw, xu, yu);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 400; k++) begin
      ref_clus_t e;
      int n;
      bit zero;
      e = '{default: 0};
      n = $urandom_range(1, 30);
      zero = ($urandom_range(0, 9) == 0);
      if (zero) n_zero++;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_clus_end = 0;
        in_valid = 1;
        in_row = row_t'($urandom_range(0, 327));
        in_col = col_t'($urandom_range(0, 143));
        in_tot = zero ? '0 : tot_t'($urandom_range(0, 255));
        e.n++; e.sum_col += in_col; e.sum_row += in_row;
        e.wsum += in_tot; e.wsum_col += longint'(in_tot) * in_col; e.wsum_row += longint'(in_tot) * in_row;
      end
      @(negedge clk);
      in_valid = 0;
      in_clus_end = 1;
      in_mod_end = $urandom_range(0, 1);
      e.mod_end = in_mod_end;
      exp_q.push_back(e);
      if ($urandom_range(0, 1)) begin
        @(negedge clk);
        in_clus_end = 0;
      end
    end
    @(negedge clk);
    in_clus_end = 0; in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d clusters missing", exp_q.size()); end
    if (n_zero == 0) begin failures++; $display("FAIL zero-ToT case not exercised"); end
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
