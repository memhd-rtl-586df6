// tb_input_buffer: self-checking test of input_buffer.
//
// 20 features in blocks of 8 rows (three blocks, the last padded by four
// rows). Every feature is written with a random value, then every block is
// read back and compared, and the padding rows must read zero. A second
// round overwrites a few features and checks that only they change.
module tb_input_buffer;
  localparam int unsigned NF = 20, R = 8, W = 8, NB = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we;
  logic [4:0]    addr;
  logic [W-1:0]  wd;
  logic [1:0]    blk;
  logic [R-1:0][W-1:0] rd;
  logic [W-1:0]  model [NF];

  input_buffer #(.N_FEAT(NF), .ROWS(R), .FEAT_W(W)) dut (
    .clk, .rst_n, .wr_en(we), .wr_addr(addr), .wr_data(wd), .rd_blk(blk), .rd_data(rd));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all(input string tag);
    for (int b = 0; b < int'(NB); b++) begin
      blk = 2'(b);
      #1;
      for (int r = 0; r < int'(R); r++) begin
        int i = b * int'(R) + r;
        if (i < int'(NF)) check(rd[r] == model[i], $sformatf("%s feature %0d: %0d != %0d", tag, i, rd[r], model[i]));
        else              check(rd[r] == '0, $sformatf("%s padding row %0d not zero", tag, i));
      end
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = '0; wd = '0; blk = '0;
    for (int i = 0; i < int'(NF); i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_all("after reset");
    for (int i = 0; i < int'(NF); i++) begin
      @(negedge clk);
      we = 1; addr = 5'(i); wd = 8'($urandom_range(1, 255));
      model[i] = wd;
    end
    @(negedge clk); we = 0;
    check_all("first fill");
    foreach (model[i]) if (i % 3 == 1) begin
      @(negedge clk);
      we = 1; addr = 5'(i); wd = 8'($urandom);
      model[i] = wd;
    end
    @(negedge clk); we = 0;
    check_all("rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
