// tb_memhd_ctrl: self-checking test of memhd_ctrl.
//
// The completion pulses of the units are produced here with random delays.
// Checked: start is taken only when idle (em_start and clear_best with it),
// each phase advances only on its own completion pulse and issues the next
// start pulse in the same cycle, done lasts one cycle and busy covers the
// whole inference.
module tb_memhd_ctrl;
  import memhd_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   start, em_done, bin_valid, best_done;
  logic   em_start, clear_best, bin_go, am_start, busy, done;
  phase_e phase;

  memhd_ctrl dut (.clk, .rst_n, .start, .em_done, .bin_valid, .best_done,
                  .em_start, .clear_best, .bin_go, .am_start, .busy, .done, .phase);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // wait n cycles, during which no output pulse may appear
  task automatic quiet(input int n, input string tag);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      check(!em_start && !bin_go && !am_start && !done, $sformatf("%s: spurious pulse", tag));
      check(busy, $sformatf("%s: busy dropped", tag));
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; em_done = 0; bin_valid = 0; best_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1;
    check(!busy && phase == ST_IDLE, "not idle after reset");
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      start = 1;
      #1;
      check(em_start && clear_best, "em_start/clear_best not given with start");
      @(negedge clk);
      start = (k % 2 == 0);   // a start while busy must be ignored
      #1;
      check(phase == ST_ENCODE && !em_start, "not encoding");
      quiet($urandom_range(0, 5), "encode");
      start = 0;
      em_done = 1; #1;
      check(bin_go, "bin_go not given with em_done");
      @(negedge clk); em_done = 0;
      check(phase == ST_BINARY, "not binarising");
      quiet($urandom_range(0, 2), "binary");
      bin_valid = 1; #1;
      check(am_start, "am_start not given with bin_valid");
      @(negedge clk); bin_valid = 0;
      check(phase == ST_SEARCH, "not searching");
      quiet($urandom_range(0, 5), "search");
      best_done = 1;
      @(negedge clk); best_done = 0;
      check(done && busy && phase == ST_DONE, "done missing");
      @(negedge clk);
      check(!done && !busy && phase == ST_IDLE, "not back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
