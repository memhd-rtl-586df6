// argmax_unit: selects the centroid column with the highest dot similarity.
//
// Scores arrive one centroid block (COLS columns) at a time. Within a block
// a comparator scan finds the largest score of the columns that exist
// (global index below N_COL); it replaces the running best only if it is
// strictly larger, so on a tie the lowest column index wins. When the block
// marked last has been taken in, done pulses and best_col/best_score hold the
// result until the next clear. The paper defines the prediction as the argmax
// of the dot similarity over all centroids; the tie rule and the block-serial
// scan are this design's choices.
//
// Interface and timing: clear (one cycle) resets the running best; blk_valid
// with blk_idx/blk_scores/blk_last is taken at the clock edge; done follows
// one cycle after the last block.
module argmax_unit #(
  parameter int unsigned COLS  = 128,
  parameter int unsigned N_COL = 128,
  parameter int unsigned S_W   = 8,
  localparam int unsigned N_CB = (N_COL + COLS - 1) / COLS,
  localparam int unsigned CBW  = (N_CB > 1) ? $clog2(N_CB) : 1,
  localparam int unsigned CW   = (N_COL > 1) ? $clog2(N_COL) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     blk_valid,
  input  logic                     blk_last,
  input  logic [CBW-1:0]           blk_idx,
  input  logic [COLS-1:0][S_W-1:0] blk_scores,
  output logic                     done,
  output logic [CW-1:0]            best_col,
  output logic [S_W-1:0]           best_score
);

  logic           have_best;
  logic           blk_any;
  logic [CW-1:0]  blk_col;
  logic [S_W-1:0] blk_max;

  // best valid column of the incoming block
  always_comb begin
    blk_any = 1'b0;
    blk_col = '0;
    blk_max = '0;
    for (int c = 0; c < int'(COLS); c++) begin
      if (32'(blk_idx) * COLS + 32'(c) < N_COL) begin
        if (!blk_any || (blk_scores[c] > blk_max)) begin
          blk_any = 1'b1;
          blk_max = blk_scores[c];
          blk_col = CW'(32'(blk_idx) * COLS + 32'(c));
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_best  <= 1'b0;
      best_col   <= '0;
      best_score <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        have_best  <= 1'b0;
        best_col   <= '0;
        best_score <= '0;
      end else if (blk_valid) begin
        if (blk_any && (!have_best || (blk_max > best_score))) begin
          have_best  <= 1'b1;
          best_col   <= blk_col;
          best_score <= blk_max;
        end
        done <= blk_last;
      end
    end
  end

endmodule
