// tb_query_binarizer: self-checking test of query_binarizer.
//
// Random 16-element queries and a few corner cases (all equal: no element is
// above the mean; one large element; elements exactly at the mean) are
// applied. Each output bit is compared with (Q[j] > mean) evaluated here in
// real arithmetic; out_valid must pulse exactly one cycle after in_valid.
module tb_query_binarizer;
  localparam int unsigned D = 16, QW = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 iv, ov;
  logic [D-1:0][QW-1:0] q;
  logic [D-1:0]         qb;

  query_binarizer #(.DIM(D), .Q_W(QW)) dut (
    .clk, .rst_n, .in_valid(iv), .q(q), .out_valid(ov), .qb(qb));

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
    iv = 0; q = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      real mean;
      logic [D-1:0] expv;
      @(negedge clk);
      for (int j = 0; j < int'(D); j++) begin
        case (k)
          0: q[j] = 10'd300;                                   // all equal
          1: q[j] = (j == 5) ? 10'd1023 : 10'd0;               // one large
          2: q[j] = (j < 8) ? 10'd100 : 10'd300;               // halves, mean 200
          3: q[j] = (j < 2) ? 10'd200 : ((j % 2 == 1) ? 10'd300 : 10'd100); // mean exactly 200
          default: q[j] = 10'($urandom);
        endcase
      end
      iv = 1;
      mean = 0.0;
      for (int j = 0; j < int'(D); j++) mean += real'(q[j]);
      mean = mean / real'(D);
      for (int j = 0; j < int'(D); j++) expv[j] = real'(q[j]) > mean;
      @(negedge clk);
      iv = 0;
      check(ov == 1'b1, $sformatf("case %0d: out_valid missing", k));
      check(qb == expv, $sformatf("case %0d: qb %h != %h", k, qb, expv));
      q = '1;  // must not disturb the held result
      @(negedge clk);
      check(ov == 1'b0, $sformatf("case %0d: out_valid longer than one cycle", k));
      check(qb == expv, $sformatf("case %0d: qb not held", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
