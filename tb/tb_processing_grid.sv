// tb_processing_grid: self-checking test of the sliding processing grid.
//
// For many random fillings and window start columns: writes hits through
// the row/column decoders, then repeatedly seeds the first HIT cell and
// reads out SELECTED cells one per clock until none is left. Checks that the
// seed is the first hit in window order (column from the window start, then
// row), that every cluster read out equals the 8-connected component of the
// seed computed in software (with no connection across the window seam
// between the last and the first window column), that no cell is read twice
// and that the grid ends empty.
module tb_processing_grid;
  localparam int ROWS = 20, COLS = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [2:0] first_col = 0, wr_col = 0, hit_col, sel_col;
  logic [4:0] wr_row = 0, hit_row, sel_row;
  logic wr_en = 0, seed_en = 0, read_en = 0, hit_found, sel_found;
  processing_grid #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst, .first_col, .wr_en, .wr_row, .wr_col,
    .seed_en, .read_en, .hit_found, .hit_row, .hit_col, .sel_found, .sel_row, .sel_col);
  int checks = 0, failures = 0;
  int n_seam = 0;
  bit occ [COLS][ROWS];   // indexed by window column (0 = first) and row

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int it = 0; it < 150; it++) begin
      int nh;
      @(negedge clk);
      first_col = 3'($urandom_range(0, COLS - 1));
      nh = $urandom_range(1, 40);
      occ = '{default: 0};
      for (int i = 0; i < nh; i++) begin
        int wc, r;
        wc = $urandom_range(0, COLS - 1); r = $urandom_range(0, ROWS - 1);
        occ[wc][r] = 1;
        wr_en = 1; wr_row = 5'(r); wr_col = 3'((wc + int'(first_col)) % COLS);
        @(negedge clk);
      end
      wr_en = 0;
      @(negedge clk);
      // the seam is exercised when both the first and last window column hold hits
      for (int r = 0; r < ROWS; r++) if (occ[0][r] && occ[COLS-1][r]) n_seam++;
      while (1) begin
        int ec, er, found;
        bit comp [int];
        int q [$];
        int nread;
        found = 0;
        for (int wc = 0; wc < COLS && !found; wc++)
          for (int r = 0; r < ROWS && !found; r++)
            if (occ[wc][r]) begin found = 1; ec = wc; er = r; end
        checks++;
        if (hit_found != found) begin failures++; $display("FAIL hit_found %0d exp %0d", hit_found, found); break; end
        if (!found) break;
        checks++;
        if ((int'(hit_col) - int'(first_col) + COLS) % COLS != ec || int'(hit_row) != er) begin
          failures++; $display("FAIL seed r%0d c%0d exp r%0d wc%0d", hit_row, hit_col, er, ec);
        end
        // expected component
        comp[ec * 64 + er] = 1; q.push_back(ec * 64 + er);
        while (q.size() > 0) begin
          int k, c, r;
          k = q.pop_front(); c = k / 64; r = k % 64;
          for (int dc = -1; dc <= 1; dc++)
            for (int dr = -1; dr <= 1; dr++)
              if (c + dc >= 0 && c + dc < COLS && r + dr >= 0 && r + dr < ROWS &&
                  occ[c + dc][r + dr] && !comp.exists((c + dc) * 64 + r + dr)) begin
                comp[(c + dc) * 64 + r + dr] = 1; q.push_back((c + dc) * 64 + r + dr);
              end
        end
        seed_en = 1;
        @(negedge clk);
        seed_en = 0;
        nread = 0;
        while (sel_found && nread < 200) begin
          int wc, k;
          wc = (int'(sel_col) - int'(first_col) + COLS) % COLS;
          k = wc * 64 + int'(sel_row);
          checks++;
          if (!comp.exists(k)) begin
            failures++;
            if (failures < 10) $display("FAIL read r%0d wc%0d not in cluster", sel_row, wc);
          end else comp.delete(k);
          occ[wc][sel_row] = 0;
          read_en = 1;
          @(negedge clk);
          read_en = 0;
          nread++;
        end
        checks++;
        if (comp.size() != 0) begin failures++; $display("FAIL %0d cluster cells not read", comp.size()); end
        foreach (comp[k]) occ[k / 64][k % 64] = 0;
      end
    end
    checks++;
    if (n_seam == 0) begin failures++; $display("FAIL seam never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
