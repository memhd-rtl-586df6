// memhd_ctrl: sequencer of one MEMHD inference.
//
// An inference runs the phases of the in-memory inference flow in order:
// projection encoding on the EM arrays, binarisation of the query, dot
// similarity on the AM arrays with the argmax, and a final cycle that
// presents the result. The controller starts each unit with a one-cycle
// pulse and waits for the unit's completion pulse. The paper gives the order
// (encode, then associative search); the handshake is this design's own.
//
// Interface and timing: start is accepted only in ST_IDLE. em_start and
// clear_best are asserted in the cycle start is accepted; bin_go in the
// cycle em_done arrives; am_start in the cycle bin_valid arrives. done is
// high for the one cycle spent in ST_DONE, the cycle after best_done.
module memhd_ctrl
  import memhd_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   em_done,
  input  logic   bin_valid,
  input  logic   best_done,
  output logic   em_start,
  output logic   clear_best,
  output logic   bin_go,
  output logic   am_start,
  output logic   busy,
  output logic   done,
  output phase_e phase
);

  phase_e state, state_next;

  always_comb begin
    state_next = state;
    em_start   = 1'b0;
    clear_best = 1'b0;
    bin_go     = 1'b0;
    am_start   = 1'b0;
    unique case (state)
      ST_IDLE:   if (start) begin
                   em_start   = 1'b1;
                   clear_best = 1'b1;
                   state_next = ST_ENCODE;
                 end
      ST_ENCODE: if (em_done) begin
                   bin_go     = 1'b1;
                   state_next = ST_BINARY;
                 end
      ST_BINARY: if (bin_valid) begin
                   am_start   = 1'b1;
                   state_next = ST_SEARCH;
                 end
      ST_SEARCH: if (best_done) state_next = ST_DONE;
      ST_DONE:   state_next = ST_IDLE;
      default:   state_next = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_IDLE;
    else        state <= state_next;
  end

  assign busy  = (state != ST_IDLE);
  assign done  = (state == ST_DONE);
  assign phase = state;

  // A unit's completion pulse must only arrive in the phase that waits for it.
  a_em_done: assert property (@(posedge clk) disable iff (!rst_n)
                               em_done |-> state == ST_ENCODE)
    else $error("memhd_ctrl: stray em_done");
  a_bin_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                 bin_valid |-> state == ST_BINARY)
    else $error("memhd_ctrl: stray bin_valid");
  a_best_done: assert property (@(posedge clk) disable iff (!rst_n)
                                 best_done |-> state == ST_SEARCH)
    else $error("memhd_ctrl: stray best_done");

endmodule
