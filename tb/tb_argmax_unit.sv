// tb_argmax_unit: self-checking test of argmax_unit.
//
// 20 columns arriving in 3 blocks of 8 (the last has 4 padding columns).
// Random score blocks, blocks with ties (lowest index must win, also across
// blocks), and padding columns holding the largest score (must be ignored)
// are presented. The result is compared with a scan done here.
module tb_argmax_unit;
  localparam int unsigned C = 8, NC = 20, SW = 6, NCB = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 clear, bv, bl, done;
  logic [1:0]           bidx;
  logic [C-1:0][SW-1:0] bs;
  logic [4:0]           best_col;
  logic [SW-1:0]        best_score;

  argmax_unit #(.COLS(C), .N_COL(NC), .S_W(SW)) dut (
    .clk, .rst_n, .clear, .blk_valid(bv), .blk_last(bl), .blk_idx(bidx), .blk_scores(bs),
    .done, .best_col, .best_score);

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
    int sc [NCB*C];
    clear = 0; bv = 0; bl = 0; bidx = '0; bs = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      automatic int eb = -1, es = -1;
      for (int i = 0; i < int'(NCB*C); i++) begin
        case (k % 4)
          0: sc[i] = $urandom_range(0, 63);
          1: sc[i] = $urandom_range(0, 3);          // many ties
          2: sc[i] = (i >= int'(NC)) ? 63 : $urandom_range(0, 40); // padding largest
          default: sc[i] = (i == 3 || i == 11 || i == 19) ? 50 : $urandom_range(0, 49);
        endcase
      end
      for (int i = 0; i < int'(NC); i++) if (sc[i] > es) begin es = sc[i]; eb = i; end
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int b = 0; b < int'(NCB); b++) begin
        bv = 1; bidx = 2'(b); bl = (b == int'(NCB) - 1);
        for (int c = 0; c < int'(C); c++) bs[c] = SW'(sc[b * int'(C) + c]);
        @(negedge clk);
        bv = 0; bl = 0;
        bs = '1;
        if (b != int'(NCB) - 1) begin
          check(!done, $sformatf("case %0d: done before the last block", k));
          @(negedge clk);
        end
      end
      check(done, $sformatf("case %0d: done missing", k));
      check(int'(best_col) == eb, $sformatf("case %0d: column %0d, expected %0d", k, best_col, eb));
      check(int'(best_score) == es, $sformatf("case %0d: score %0d, expected %0d", k, best_score, es));
      @(negedge clk);
      check(!done, $sformatf("case %0d: done longer than one cycle", k));
      check(int'(best_col) == eb, $sformatf("case %0d: result not held", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
