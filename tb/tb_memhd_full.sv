// tb_memhd_full: end-to-end test of memhd_top at its default size.
//
// Sizes are the design's defaults, the MNIST 128x128 model: 784 features of
// 8 bits, D = 128, 128 centroid columns, 10 classes, 128x128 arrays: 7
// encoder arrays and one AM array, 7 + 1 array operations per inference.
// A random binary projection matrix, a random binary AM and a centroid
// label table (column c < N_CLASS belongs to class c, every further column
// to a random class, so classes own different numbers of centroids) are programmed through the host ports, then feature
// vectors are classified. For every inference the prediction (class, column
// and score) is compared with a reference computed here from the same
// numbers: Q = M^T F, Q^b[j] = (Q[j] > mean Q), score[c] = popcount(Q^b AND
// A[:,c]), first maximum, its label. Also checked: the number of encoder
// and AM array operations (the paper's cycle counts) and the latency
// (operations + 7 cycles). Each mechanism of the design is counted and must
// occur at least once: accumulation over several feature blocks, zero
// padding of the last feature block, accumulation over several dimension
// blocks of the AM, a winner outside the first centroid block, a winner that
// is not the first centroid of its class, a tie resolved to the lower column,
// a start ignored while busy, and reprogramming between inferences.
module tb_memhd_full;
  import memhd_pkg::*;
  localparam int unsigned NF = memhd_pkg::N_FEAT, D = memhd_pkg::DIM, NC = memhd_pkg::N_COL;
  localparam int unsigned K = memhd_pkg::N_CLASS, R = memhd_pkg::ARR_ROWS, C = memhd_pkg::ARR_COLS;
  localparam int unsigned FW = memhd_pkg::FEAT_W;
  localparam int unsigned EM_RB = (NF + R - 1) / R, EM_DB = (D + C - 1) / C;
  localparam int unsigned AM_DB = (D + R - 1) / R, AM_CB = (NC + C - 1) / C;
  localparam int unsigned EM_T = EM_RB * EM_DB, AM_T = AM_DB * AM_CB;
  localparam int unsigned TW = ((EM_T > AM_T ? EM_T : AM_T) > 1) ? $clog2(EM_T > AM_T ? EM_T : AM_T) : 1;
  localparam int unsigned AW = $clog2(NF), RW = $clog2(R), CW = $clog2(NC), KW = $clog2(K);
  localparam int unsigned SW = $clog2(AM_DB * R + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          feat_we, w_we, w_sel, lbl_we, start, busy, done;
  logic [AW-1:0] feat_addr;
  logic [FW-1:0] feat_data;
  logic [TW-1:0] w_tile;
  logic [RW-1:0] w_row;
  logic [C-1:0]  w_data;
  logic [CW-1:0] lbl_col, pred_col;
  logic [KW-1:0] lbl_class, pred_class;
  logic [SW-1:0] pred_score;

  memhd_top dut (
    .clk, .rst_n, .feat_we, .feat_addr, .feat_data, .w_we, .w_sel, .w_tile, .w_row, .w_data,
    .lbl_we, .lbl_col, .lbl_class, .start, .busy, .done, .pred_class, .pred_col, .pred_score);

  // model of what is programmed
  bit          m [NF][D];
  bit          a [D][NC];
  int          lbl [NC];
  int          f [NF];

  // mechanism counters
  int n_multi_fblk = 0, n_fpad = 0, n_multi_dblk = 0, n_late_blk = 0;
  int n_sub_centroid = 0, n_tie = 0, n_ignored_start = 0, n_reprogram = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(input bit sel, input int t, input int r, input logic [C-1:0] d);
    @(negedge clk);
    w_we = 1; w_sel = sel; w_tile = TW'(t); w_row = RW'(r); w_data = d;
    @(negedge clk);
    w_we = 0;
  endtask

  task automatic program_em();
    for (int db = 0; db < int'(EM_DB); db++)
      for (int rb = 0; rb < int'(EM_RB); rb++)
        for (int r = 0; r < int'(R); r++) begin
          logic [C-1:0] d;
          for (int c = 0; c < int'(C); c++) begin
            int i = rb * int'(R) + r, j = db * int'(C) + c;
            d[c] = (i < int'(NF) && j < int'(D)) ? m[i][j] : 1'($urandom);
          end
          write_row(1'b0, db * int'(EM_RB) + rb, r, d);
        end
  endtask

  task automatic program_am();
    for (int cb = 0; cb < int'(AM_CB); cb++)
      for (int db = 0; db < int'(AM_DB); db++)
        for (int r = 0; r < int'(R); r++) begin
          logic [C-1:0] d;
          for (int c = 0; c < int'(C); c++) begin
            int j = db * int'(R) + r, col = cb * int'(C) + c;
            d[c] = (j < int'(D) && col < int'(NC)) ? a[j][col] : 1'($urandom);
          end
          write_row(1'b1, cb * int'(AM_DB) + db, r, d);
        end
  endtask

  task automatic program_labels();
    for (int c = 0; c < int'(NC); c++) begin
      @(negedge clk);
      lbl_we = 1; lbl_col = CW'(c); lbl_class = KW'(lbl[c]);
      @(negedge clk);
      lbl_we = 0;
    end
  endtask

  task automatic load_features();
    for (int i = 0; i < int'(NF); i++) begin
      @(negedge clk);
      feat_we = 1; feat_addr = AW'(i); feat_data = FW'(f[i]);
    end
    @(negedge clk);
    feat_we = 0;
  endtask

  // reference classification
  task automatic reference(output int e_col, output int e_score, output int e_cls, output bit tie);
    longint q [D];
    longint s;
    bit qb [D];
    s = 0;
    for (int j = 0; j < int'(D); j++) begin
      q[j] = 0;
      for (int i = 0; i < int'(NF); i++) if (m[i][j]) q[j] += f[i];
      s += q[j];
    end
    for (int j = 0; j < int'(D); j++) qb[j] = (q[j] * D) > s;
    e_col = -1; e_score = -1; tie = 0;
    for (int c = 0; c < int'(NC); c++) begin
      int sc = 0;
      for (int j = 0; j < int'(D); j++) if (qb[j] && a[j][c]) sc++;
      if (sc > e_score) begin e_score = sc; e_col = c; tie = 0; end
      else if (sc == e_score) tie = 1;
    end
    e_cls = lbl[e_col];
  endtask

  task automatic classify(input string tag, input bit poke_start);
    int e_col, e_score, e_cls, lat, em_ops, am_ops;
    bit tie;
    reference(e_col, e_score, e_cls, tie);
    load_features();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = poke_start;
    lat = 1; em_ops = 0; am_ops = 0;
    while (!done && lat < 100000) begin
      if (dut.em_op) em_ops++;
      if (dut.am_op) am_ops++;
      @(negedge clk);
      start = 0;
      lat++;
    end
    check(int'(pred_col) == e_col, $sformatf("%s: column %0d, expected %0d", tag, pred_col, e_col));
    check(int'(pred_score) == e_score, $sformatf("%s: score %0d, expected %0d", tag, pred_score, e_score));
    check(int'(pred_class) == e_cls, $sformatf("%s: class %0d, expected %0d", tag, pred_class, e_cls));
    check(em_ops == int'(EM_T), $sformatf("%s: %0d encoder operations, expected %0d", tag, em_ops, EM_T));
    check(am_ops == int'(AM_T), $sformatf("%s: %0d AM operations, expected %0d", tag, am_ops, AM_T));
    check(lat == int'(EM_T + AM_T) + 7, $sformatf("%s: latency %0d, expected %0d", tag, lat, EM_T + AM_T + 7));
    if (EM_RB > 1) n_multi_fblk++;
    if (NF % R != 0) n_fpad++;
    if (AM_DB > 1) n_multi_dblk++;
    if (e_col >= int'(C)) n_late_blk++;
    if (e_col >= int'(K)) n_sub_centroid++;
    if (tie && int'(pred_col) == e_col) n_tie++;
    if (poke_start) n_ignored_start++;
    @(negedge clk);
    check(!busy && !done, $sformatf("%s: not idle after done", tag));
  endtask

  // A mechanism that the configuration makes possible must have happened.
  task automatic count(input bit possible, input int n, input string what);
    if (possible) begin
      check(n > 0, $sformatf("mechanism never exercised: %s", what));
      $display("mechanism %-34s : %0d", what, n);
    end else begin
      $display("mechanism %-34s : not possible at this size", what);
    end
  endtask

  initial begin
    feat_we = 0; w_we = 0; w_sel = 0; lbl_we = 0; start = 0;
    feat_addr = '0; feat_data = '0; w_tile = '0; w_row = '0; w_data = '0;
    lbl_col = '0; lbl_class = '0;
    foreach (m[i, j]) m[i][j] = 1'($urandom);
    foreach (a[j, c]) a[j][c] = 1'($urandom);
    foreach (lbl[c]) lbl[c] = (c < int'(K)) ? c : $urandom_range(0, K - 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    program_em();
    program_am();
    program_labels();
    for (int k = 0; k < 4; k++) begin
      foreach (f[i]) f[i] = $urandom_range(0, (1 << FW) - 1);
      classify($sformatf("random %0d", k), k % 3 == 1);
    end
    // a tie at the maximum: the last column copies an all-ones column 0
    for (int j = 0; j < int'(D); j++) begin a[j][0] = 1; a[j][NC - 1] = 1; end
    program_am();
    n_reprogram++;
    foreach (f[i]) f[i] = $urandom_range(0, (1 << FW) - 1);
    classify("tie", 1'b0);
    // a winner in the last centroid block, not the first centroid of its class
    for (int j = 0; j < int'(D); j++) begin a[j][0] = 1'($urandom); a[j][NC - 1] = 1; end
    lbl[NC - 1] = (lbl[NC - 1] + 1) % int'(K);
    program_labels();
    program_am();
    n_reprogram++;
    foreach (f[i]) f[i] = $urandom_range(0, (1 << FW) - 1);
    classify("late winner", 1'b0);
    count(EM_RB > 1, n_multi_fblk, "encoder feature-block accumulation");
    count(NF % R != 0, n_fpad, "feature padding");
    count(AM_DB > 1, n_multi_dblk, "AM dimension-block accumulation");
    count(AM_CB > 1, n_late_blk, "winner beyond the first block");
    count(NC > K, n_sub_centroid, "winner is a later centroid");
    count(1'b1, n_tie, "tie to the lower column");
    count(1'b1, n_ignored_start, "start ignored while busy");
    count(1'b1, n_reprogram, "AM reprogrammed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
