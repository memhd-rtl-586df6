// tb_am_unit: self-checking test of am_unit.
//
// D = 12, 20 centroid columns, 8x8 arrays: 2 dimension blocks x 3 centroid
// blocks = 6 arrays, padded in both directions. A random binary AM is
// programmed and random binary queries are searched. Every result block must
// arrive in order with the right index, blk_last only on the third, and each
// existing column's score must equal popcount(Q^b AND centroid) computed
// here. Exactly 6 array operations per search are required.
module tb_am_unit;
  localparam int unsigned D = 12, NC = 20, R = 8, C = 8;
  localparam int unsigned NDB = 2, NCB = 3, NT = 6, SW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 we, start, busy, op_active, bv, bl;
  logic [2:0]           tile, row;
  logic [C-1:0]         wd;
  logic [D-1:0]         qb;
  logic [1:0]           bidx;
  logic [C-1:0][SW-1:0] bs;

  bit a [D][NC];

  am_unit #(.DIM(D), .N_COL(NC), .ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .wr_en(we), .wr_tile(tile), .wr_row(row), .wr_data(wd),
    .start, .qb, .busy, .op_active, .blk_valid(bv), .blk_last(bl), .blk_idx(bidx), .blk_scores(bs));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; start = 0; tile = '0; row = '0; wd = '0; qb = '0;
    foreach (a[j, c]) a[j][c] = 1'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cb = 0; cb < int'(NCB); cb++)
      for (int db = 0; db < int'(NDB); db++)
        for (int r = 0; r < int'(R); r++) begin
          @(negedge clk);
          we = 1; tile = 3'(cb * int'(NDB) + db); row = 3'(r);
          for (int c = 0; c < int'(C); c++) begin
            automatic int j = db * int'(R) + r, col = cb * int'(C) + c;
            wd[c] = (j < int'(D) && col < int'(NC)) ? a[j][col] : 1'($urandom);
          end
        end
    @(negedge clk); we = 0;
    for (int k = 0; k < 15; k++) begin
      automatic int ops = 0, nblk = 0, cyc = 0;
      qb = (k == 0) ? '1 : D'($urandom);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (nblk < int'(NCB) && cyc < 100) begin
        if (op_active) ops++;
        if (bv) begin
          check(int'(bidx) == nblk, $sformatf("query %0d: block %0d arrived as %0d", k, nblk, bidx));
          check(bl == (nblk == int'(NCB) - 1), $sformatf("query %0d: blk_last wrong on block %0d", k, nblk));
          for (int c = 0; c < int'(C); c++) begin
            automatic int col = nblk * int'(C) + c, e = 0;
            if (col >= int'(NC)) continue;
            for (int j = 0; j < int'(D); j++) if (qb[j] && a[j][col]) e++;
            check(int'(bs[c]) == e, $sformatf("query %0d column %0d: %0d != %0d", k, col, bs[c], e));
          end
          nblk++;
        end
        cyc++;
        @(negedge clk);
      end
      check(nblk == int'(NCB), $sformatf("query %0d: only %0d blocks", k, nblk));
      check(ops == int'(NT), $sformatf("query %0d: %0d array operations, expected %0d", k, ops, NT));
      @(negedge clk);
      check(!busy, "busy after the last block");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
