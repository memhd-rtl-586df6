// tb_imc_array: self-checking test of imc_array.
//
// Two arrays are tested: the default 128x128 array with 8-bit inputs (the
// encoder configuration) and a 16x8 array with 1-bit inputs (the
// associative-memory configuration). Random cell contents are written row
// by row, then random input vectors are applied; every column sum is
// compared with a sum computed here from the same cell and input values.
// Also checked: the result appears exactly one cycle after op_en and holds
// while op_en is low, and a write in the same cycle as an operation is not
// seen by that operation.
module tb_imc_array;
  localparam int unsigned R0 = 128, C0 = 128, W0 = 8;
  localparam int unsigned R1 = 16,  C1 = 8,   W1 = 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // array 0
  logic                    we0, op0;
  logic [6:0]              row0;
  logic [C0-1:0]           wd0;
  logic [R0-1:0][W0-1:0]   in0;
  logic [C0-1:0][W0+7-1:0] out0;
  logic [C0-1:0]           ref_cells0 [R0];
  // array 1
  logic                    we1, op1;
  logic [3:0]              row1;
  logic [C1-1:0]           wd1;
  logic [R1-1:0][W1-1:0]   in1;
  logic [C1-1:0][W1+4-1:0] out1;
  logic [C1-1:0]           ref_cells1 [R1];

  imc_array #(.ROWS(R0), .COLS(C0), .IN_W(W0)) dut0 (
    .clk, .wr_en(we0), .wr_row(row0), .wr_data(wd0), .op_en(op0), .op_in(in0), .op_out(out0));
  imc_array #(.ROWS(R1), .COLS(C1), .IN_W(W1)) dut1 (
    .clk, .wr_en(we1), .wr_row(row1), .wr_data(wd1), .op_en(op1), .op_in(in1), .op_out(out1));

  function automatic int ref0(int c);
    int s = 0;
    for (int r = 0; r < int'(R0); r++) if (ref_cells0[r][c]) s += int'(in0[r]);
    return s;
  endfunction
  function automatic int ref1(int c);
    int s = 0;
    for (int r = 0; r < int'(R1); r++) if (ref_cells1[r][c]) s += int'(in1[r]);
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp0 [C0];
    we0 = 0; op0 = 0; row0 = '0; wd0 = '0; in0 = '0;
    we1 = 0; op1 = 0; row1 = '0; wd1 = '0; in1 = '0;
    // program both arrays
    for (int r = 0; r < int'(R0); r++) begin
      @(negedge clk);
      we0 = 1; row0 = 7'(r);
      for (int c = 0; c < int'(C0); c++) wd0[c] = 1'($urandom);
      ref_cells0[r] = wd0;
      if (r < int'(R1)) begin
        we1 = 1; row1 = 4'(r); wd1 = 8'($urandom);
        ref_cells1[r] = wd1;
      end else we1 = 0;
    end
    @(negedge clk); we0 = 0; we1 = 0;
    // random operations
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      for (int r = 0; r < int'(R0); r++) in0[r] = (k == 0) ? 8'hff : 8'($urandom);
      for (int r = 0; r < int'(R1); r++) in1[r] = 1'($urandom);
      op0 = 1; op1 = 1;
      @(negedge clk);
      op0 = 0; op1 = 0;
      for (int c = 0; c < int'(C0); c++) begin
        exp0[c] = ref0(c);
        check(int'(out0[c]) == exp0[c], $sformatf("array0 op %0d col %0d: %0d != %0d", k, c, out0[c], exp0[c]));
      end
      for (int c = 0; c < int'(C1); c++)
        check(int'(out1[c]) == ref1(c), $sformatf("array1 op %0d col %0d: %0d != %0d", k, c, out1[c], ref1(c)));
      // hold while idle
      for (int r = 0; r < int'(R0); r++) in0[r] = 8'($urandom);
      @(negedge clk);
      for (int c = 0; c < int'(C0); c += 17)
        check(int'(out0[c]) == exp0[c], $sformatf("array0 col %0d did not hold", c));
    end
    // write and operate in the same cycle: the operation sees the old row
    @(negedge clk);
    for (int r = 0; r < int'(R1); r++) in1[r] = 1'b1;
    we1 = 1; row1 = 4'd0; wd1 = ~ref_cells1[0]; op1 = 1;
    @(negedge clk);
    we1 = 0; op1 = 0;
    for (int c = 0; c < int'(C1); c++)
      check(int'(out1[c]) == ref1(c), $sformatf("array1 write/op collision col %0d", c));
    ref_cells1[0] = ~ref_cells1[0];
    @(negedge clk); op1 = 1;
    @(negedge clk); op1 = 0;
    for (int c = 0; c < int'(C1); c++)
      check(int'(out1[c]) == ref1(c), $sformatf("array1 after rewrite col %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
