// tb_em_unit: self-checking test of em_unit.
//
// 20 features, D = 12, 8x8 arrays: 3 row blocks x 2 dimension blocks = 6
// arrays, the last row block and the last dimension block both padded. A
// random binary projection matrix is programmed tile by tile and random
// feature vectors are encoded; the feature blocks are served from this
// testbench in answer to rd_blk. Each Q[j] is compared with sum_i F[i]*M[i][j]
// computed here. The schedule is checked too: exactly 6 cycles with an array
// operation, and done 8 cycles (operations + 2) after the start cycle.
module tb_em_unit;
  localparam int unsigned NF = 20, D = 12, R = 8, C = 8, W = 8;
  localparam int unsigned NRB = 3, NDB = 2, NT = 6;
  localparam int unsigned QW = W + 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 we, start, busy, done, op_active;
  logic [2:0]           tile;
  logic [2:0]           row;
  logic [C-1:0]         wd;
  logic [1:0]           rd_blk;
  logic [R-1:0][W-1:0]  feat_blk;
  logic [D-1:0][QW-1:0] q;

  bit          m [NF][D];
  logic [W-1:0] f [NRB*R];

  em_unit #(.N_FEAT(NF), .DIM(D), .ROWS(R), .COLS(C), .FEAT_W(W)) dut (
    .clk, .rst_n, .wr_en(we), .wr_tile(tile), .wr_row(row), .wr_data(wd),
    .start, .rd_blk, .feat_blk, .busy, .done, .op_active, .q);

  always_comb for (int r = 0; r < int'(R); r++) feat_blk[r] = f[int'(rd_blk) * int'(R) + r];

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
    we = 0; start = 0; tile = '0; row = '0; wd = '0;
    foreach (f[i]) f[i] = '0;
    foreach (m[i, j]) m[i][j] = 1'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int db = 0; db < int'(NDB); db++)
      for (int rb = 0; rb < int'(NRB); rb++)
        for (int r = 0; r < int'(R); r++) begin
          @(negedge clk);
          we = 1; tile = 3'(db * int'(NRB) + rb); row = 3'(r);
          for (int c = 0; c < int'(C); c++) begin
            automatic int i = rb * int'(R) + r, j = db * int'(C) + c;
            wd[c] = (i < int'(NF) && j < int'(D)) ? m[i][j] : 1'($urandom);
          end
        end
    @(negedge clk); we = 0;
    for (int k = 0; k < 12; k++) begin
      automatic int ops = 0, lat = 0;
      for (int i = 0; i < int'(NF); i++) f[i] = (k == 0) ? 8'hff : 8'($urandom);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        if (op_active) ops++;
        lat++;
        @(negedge clk);
        if (lat > 100) break;
      end
      check(ops == int'(NT), $sformatf("vector %0d: %0d array operations, expected %0d", k, ops, NT));
      check(lat == int'(NT) + 1, $sformatf("vector %0d: done %0d cycles after start, expected %0d", k, lat + 1, NT + 2));
      for (int j = 0; j < int'(D); j++) begin
        automatic int e = 0;
        for (int i = 0; i < int'(NF); i++) if (m[i][j]) e += int'(f[i]);
        check(int'(q[j]) == e, $sformatf("vector %0d Q[%0d] = %0d, expected %0d", k, j, q[j], e));
      end
      @(negedge clk);
      check(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
