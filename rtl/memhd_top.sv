// memhd_top: MEMHD in-memory inference engine.
//
// Classifies one input feature vector with a binary projection encoder and a
// multi-centroid binary associative memory, both held in binary
// in-memory-computing arrays:
//   1. encoding   Q = M^T F on ceil(N_FEAT/ROWS) x ceil(DIM/COLS) arrays
//   2. binarise   Q^b[j] = (Q[j] > mean(Q))
//   3. search     score[c] = popcount(Q^b AND centroid c) on
//                 ceil(DIM/ROWS) x ceil(N_COL/COLS) arrays
//   4. predict    the class of the column with the highest score
// With the default (MNIST 128x128) sizes this is 7 encoder arrays and a single
// associative-memory array, 7 + 1 array operations per inference.
//
// Interface:
//   feat_we/feat_addr/feat_data  write one input feature.
//   w_we/w_sel/w_tile/w_row/w_data  write one row of an array: w_sel = 0 the
//       encoder (tile = db*N_RB + rb, row = feature within the block, bit c =
//       dimension db*COLS + c), w_sel = 1 the AM (tile = cb*ceil(DIM/ROWS) + db,
//       row = dimension within the block, bit c = centroid cb*COLS + c).
//   lbl_we/lbl_col/lbl_class  set the class of one AM column.
//   start   begin an inference (ignored while busy); the host may write only
//           while busy is low.
//   done    one-cycle pulse; pred_class, pred_col and pred_score hold the
//           result until the next done.
// Latency from the start cycle to done: EM + AM operations + 7 cycles.
// The datapath follows the paper's inference flow; the host ports, the
// feature format and the timing are this design's own.
module memhd_top
  import memhd_pkg::*;
#(
  parameter int unsigned N_FEAT_P  = memhd_pkg::N_FEAT,
  parameter int unsigned DIM_P     = memhd_pkg::DIM,
  parameter int unsigned N_COL_P   = memhd_pkg::N_COL,
  parameter int unsigned N_CLASS_P = memhd_pkg::N_CLASS,
  parameter int unsigned ROWS      = memhd_pkg::ARR_ROWS,
  parameter int unsigned COLS      = memhd_pkg::ARR_COLS,
  parameter int unsigned FEAT_W_P  = memhd_pkg::FEAT_W,
  localparam int unsigned EM_RB    = (N_FEAT_P + ROWS - 1) / ROWS,
  localparam int unsigned EM_TILES = EM_RB * ((DIM_P + COLS - 1) / COLS),
  localparam int unsigned AM_DB    = (DIM_P + ROWS - 1) / ROWS,
  localparam int unsigned AM_TILES = AM_DB * ((N_COL_P + COLS - 1) / COLS),
  localparam int unsigned TW       = ((EM_TILES > AM_TILES ? EM_TILES : AM_TILES) > 1)
                                     ? $clog2(EM_TILES > AM_TILES ? EM_TILES : AM_TILES) : 1,
  localparam int unsigned AW       = (N_FEAT_P > 1) ? $clog2(N_FEAT_P) : 1,
  localparam int unsigned RW       = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW       = (N_COL_P > 1) ? $clog2(N_COL_P) : 1,
  localparam int unsigned KW       = (N_CLASS_P > 1) ? $clog2(N_CLASS_P) : 1,
  localparam int unsigned S_W      = $clog2(AM_DB * ROWS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // input features
  input  logic                feat_we,
  input  logic [AW-1:0]       feat_addr,
  input  logic [FEAT_W_P-1:0] feat_data,
  // array programming
  input  logic                w_we,
  input  logic                w_sel,
  input  logic [TW-1:0]       w_tile,
  input  logic [RW-1:0]       w_row,
  input  logic [COLS-1:0]     w_data,
  // centroid labels
  input  logic                lbl_we,
  input  logic [CW-1:0]       lbl_col,
  input  logic [KW-1:0]       lbl_class,
  // inference
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [KW-1:0]       pred_class,
  output logic [CW-1:0]       pred_col,
  output logic [S_W-1:0]      pred_score
);

  localparam int unsigned EM_BW  = (EM_RB > 1) ? $clog2(EM_RB) : 1;
  localparam int unsigned EM_TW  = (EM_TILES > 1) ? $clog2(EM_TILES) : 1;
  localparam int unsigned AM_TW  = (AM_TILES > 1) ? $clog2(AM_TILES) : 1;
  localparam int unsigned N_CB   = (N_COL_P + COLS - 1) / COLS;
  localparam int unsigned CBW    = (N_CB > 1) ? $clog2(N_CB) : 1;
  localparam int unsigned Q_W    = FEAT_W_P + $clog2(EM_RB * ROWS);

  logic                          em_start, clear_best, bin_go, am_start;
  logic                          em_busy, em_done, em_op;
  logic                          bin_valid;
  logic                          am_busy, am_op;
  logic                          blk_valid, blk_last;
  logic [CBW-1:0]                blk_idx;
  logic [COLS-1:0][S_W-1:0]      blk_scores;
  logic                          best_done;
  logic [CW-1:0]                 best_col;
  logic [S_W-1:0]                best_score;
  logic [KW-1:0]                 best_class;
  logic [EM_BW-1:0]              rd_blk;
  logic [ROWS-1:0][FEAT_W_P-1:0] feat_blk;
  logic [DIM_P-1:0][Q_W-1:0]     q;
  logic [DIM_P-1:0]              qb;
  phase_e                        phase;

  input_buffer #(.N_FEAT(N_FEAT_P), .ROWS(ROWS), .FEAT_W(FEAT_W_P)) u_in (
    .clk, .rst_n,
    .wr_en   (feat_we),
    .wr_addr (feat_addr),
    .wr_data (feat_data),
    .rd_blk  (rd_blk),
    .rd_data (feat_blk)
  );

  em_unit #(.N_FEAT(N_FEAT_P), .DIM(DIM_P), .ROWS(ROWS), .COLS(COLS),
            .FEAT_W(FEAT_W_P)) u_em (
    .clk, .rst_n,
    .wr_en     (w_we && !w_sel),
    .wr_tile   (EM_TW'(w_tile)),
    .wr_row    (w_row),
    .wr_data   (w_data),
    .start     (em_start),
    .rd_blk    (rd_blk),
    .feat_blk  (feat_blk),
    .busy      (em_busy),
    .done      (em_done),
    .op_active (em_op),
    .q         (q)
  );

  query_binarizer #(.DIM(DIM_P), .Q_W(Q_W)) u_bin (
    .clk, .rst_n,
    .in_valid  (bin_go),
    .q         (q),
    .out_valid (bin_valid),
    .qb        (qb)
  );

  am_unit #(.DIM(DIM_P), .N_COL(N_COL_P), .ROWS(ROWS), .COLS(COLS)) u_am (
    .clk, .rst_n,
    .wr_en      (w_we && w_sel),
    .wr_tile    (AM_TW'(w_tile)),
    .wr_row     (w_row),
    .wr_data    (w_data),
    .start      (am_start),
    .qb         (qb),
    .busy       (am_busy),
    .op_active  (am_op),
    .blk_valid  (blk_valid),
    .blk_last   (blk_last),
    .blk_idx    (blk_idx),
    .blk_scores (blk_scores)
  );

  argmax_unit #(.COLS(COLS), .N_COL(N_COL_P), .S_W(S_W)) u_argmax (
    .clk, .rst_n,
    .clear      (clear_best),
    .blk_valid  (blk_valid),
    .blk_last   (blk_last),
    .blk_idx    (blk_idx),
    .blk_scores (blk_scores),
    .done       (best_done),
    .best_col   (best_col),
    .best_score (best_score)
  );

  label_table #(.N_COL(N_COL_P), .N_CLASS(N_CLASS_P)) u_lbl (
    .clk, .rst_n,
    .wr_en    (lbl_we),
    .wr_col   (lbl_col),
    .wr_class (lbl_class),
    .rd_col   (best_col),
    .rd_class (best_class)
  );

  memhd_ctrl u_ctrl (
    .clk, .rst_n,
    .start      (start),
    .em_done    (em_done),
    .bin_valid  (bin_valid),
    .best_done  (best_done),
    .em_start   (em_start),
    .clear_best (clear_best),
    .bin_go     (bin_go),
    .am_start   (am_start),
    .busy       (busy),
    .done       (done),
    .phase      (phase)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred_class <= '0;
      pred_col   <= '0;
      pred_score <= '0;
    end else if (best_done) begin
      pred_class <= best_class;
      pred_col   <= best_col;
      pred_score <= best_score;
    end
  end

  // The host may change features, arrays or labels only between inferences.
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                     busy |-> !(feat_we || w_we || lbl_we))
    else $error("memhd_top: write while an inference is running");
  a_em_tile: assert property (@(posedge clk) disable iff (!rst_n)
                               (w_we && !w_sel) |-> 32'(w_tile) < EM_TILES)
    else $error("memhd_top: encoder tile %0d out of range", w_tile);
  a_am_tile: assert property (@(posedge clk) disable iff (!rst_n)
                               (w_we && w_sel) |-> 32'(w_tile) < AM_TILES)
    else $error("memhd_top: AM tile %0d out of range", w_tile);
  // At most one array operation per cycle, each in its own phase.
  a_em_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                em_op |-> (phase == ST_ENCODE && !am_busy))
    else $error("memhd_top: encoder operation outside the encoding phase");
  a_am_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                am_op |-> (phase == ST_SEARCH && !em_busy))
    else $error("memhd_top: AM operation outside the search phase");

endmodule
