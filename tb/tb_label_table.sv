// tb_label_table: self-checking test of label_table.
//
// 20 centroid columns, 6 classes. After reset every column must read class
// 0; then every column gets a random class and all are read back, and a
// second round rewrites some of them.
module tb_label_table;
  localparam int unsigned NC = 20, K = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       we;
  logic [4:0] wcol, rcol;
  logic [2:0] wcls, rcls;
  logic [2:0] model [NC];

  label_table #(.N_COL(NC), .N_CLASS(K)) dut (
    .clk, .rst_n, .wr_en(we), .wr_col(wcol), .wr_class(wcls), .rd_col(rcol), .rd_class(rcls));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all(input string tag);
    for (int c = 0; c < int'(NC); c++) begin
      rcol = 5'(c);
      #1;
      check(rcls == model[c], $sformatf("%s column %0d: %0d != %0d", tag, c, rcls, model[c]));
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
    we = 0; wcol = '0; wcls = '0; rcol = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_all("reset");
    for (int r = 0; r < 2; r++) begin
      for (int c = 0; c < int'(NC); c++) begin
        if (r == 1 && c % 2 == 0) continue;
        @(negedge clk);
        we = 1; wcol = 5'(c); wcls = 3'($urandom_range(1, K - 1));
        model[c] = wcls;
      end
      @(negedge clk); we = 0;
      check_all(r == 0 ? "fill" : "rewrite");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
