// am_unit: multi-centroid binary associative memory (AM).
//
// Holds the DIM x N_COL binary class-vector matrix: every column is one
// centroid (class vector) of some class, several columns per class, and a
// query is compared with all of them by dot similarity, the popcount of
// (Q^b AND column). The matrix is cut into tiles of ROWS dimensions x COLS
// centroids, one imc_array (1-bit inputs) per tile: N_DB = ceil(DIM/ROWS)
// dimension blocks times N_CB = ceil(N_COL/COLS) centroid blocks. For the main
// configuration (D = C = 128) the whole AM is one array and the search is one
// operation ("one-shot"); for D = 512, C = 128 it is four operations.
//
// Operations are issued one per cycle, tile t = cb*N_DB + db. The column sums
// of the N_DB tiles of one centroid block are added up; when the last one
// has been added the block's COLS scores are presented on blk_scores with a
// one-cycle blk_valid pulse (blk_last marks the final block). Columns at or
// beyond N_COL and rows at or beyond DIM of the last tiles are padding: the
// query bits of padded rows are forced to zero, and padded columns are left
// for the argmax stage to ignore.
// That the AM is binary, multi-centroid, searched by dot similarity on IMC
// arrays and fills the whole array width follows the paper; tiling order and
// the schedule are this design's choices.
//
// Interface and timing:
//   wr_en/wr_tile/wr_row/wr_data  program row wr_row (a dimension) of a tile;
//                                 bit c is centroid cb*COLS+c.
//   start/qb     start pulse with the binary query; operations are issued in
//                the N_TILE cycles after the start cycle.
//   blk_*        results, the last block two cycles after the last operation.
//   op_active    high in every cycle in which an array operation is issued.
module am_unit #(
  parameter int unsigned DIM   = 128,
  parameter int unsigned N_COL = 128,
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 128,
  localparam int unsigned N_DB   = (DIM + ROWS - 1) / ROWS,
  localparam int unsigned N_CB   = (N_COL + COLS - 1) / COLS,
  localparam int unsigned N_TILE = N_DB * N_CB,
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned TW     = (N_TILE > 1) ? $clog2(N_TILE) : 1,
  localparam int unsigned DBW    = (N_DB > 1) ? $clog2(N_DB) : 1,
  localparam int unsigned CBW    = (N_CB > 1) ? $clog2(N_CB) : 1,
  localparam int unsigned PS_W   = 1 + RW,
  localparam int unsigned S_W    = $clog2(N_DB * ROWS + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [TW-1:0]             wr_tile,
  input  logic [RW-1:0]             wr_row,
  input  logic [COLS-1:0]           wr_data,
  input  logic                      start,
  input  logic [DIM-1:0]            qb,
  output logic                      busy,
  output logic                      op_active,
  output logic                      blk_valid,
  output logic                      blk_last,
  output logic [CBW-1:0]            blk_idx,
  output logic [COLS-1:0][S_W-1:0]  blk_scores
);

  logic [N_DB*ROWS-1:0] qpad;
  logic                 issuing;
  logic [DBW-1:0]       db;
  logic [CBW-1:0]       cb;
  logic [TW-1:0]        tile;
  logic                 pend_valid, pend_first, pend_blk_end;
  logic [TW-1:0]        pend_tile;
  logic [CBW-1:0]       pend_cb;

  logic [COLS-1:0][PS_W-1:0] arr_out [N_TILE];
  logic [ROWS-1:0][0:0]      arr_in  [N_DB];

  assign qpad      = (N_DB*ROWS)'(qb);
  assign tile      = TW'(32'(cb) * N_DB + 32'(db));
  assign op_active = issuing;
  assign busy      = issuing || pend_valid || blk_valid;

  for (genvar d = 0; d < int'(N_DB); d++) begin : g_in
    assign arr_in[d] = qpad[d*ROWS +: ROWS];
  end

  for (genvar t = 0; t < int'(N_TILE); t++) begin : g_tile
    imc_array #(.ROWS(ROWS), .COLS(COLS), .IN_W(1)) u_arr (
      .clk     (clk),
      .wr_en   (wr_en && (32'(wr_tile) == t)),
      .wr_row  (wr_row),
      .wr_data (wr_data),
      .op_en   (issuing && (32'(tile) == t)),
      .op_in   (arr_in[t % N_DB]),
      .op_out  (arr_out[t])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing      <= 1'b0;
      db           <= '0;
      cb           <= '0;
      pend_valid   <= 1'b0;
      pend_first   <= 1'b0;
      pend_blk_end <= 1'b0;
      pend_tile    <= '0;
      pend_cb      <= '0;
      blk_valid    <= 1'b0;
      blk_last     <= 1'b0;
      blk_idx      <= '0;
      blk_scores   <= '0;
    end else begin
      blk_valid    <= 1'b0;
      blk_last     <= 1'b0;
      pend_valid   <= issuing;
      pend_tile    <= tile;
      pend_cb      <= cb;
      pend_first   <= (db == '0);
      pend_blk_end <= (32'(db) == N_DB - 1);
      if (start && !busy) begin
        issuing <= 1'b1;
        db      <= '0;
        cb      <= '0;
      end else if (issuing) begin
        if (32'(db) == N_DB - 1) begin
          db <= '0;
          if (32'(cb) == N_CB - 1) begin
            cb      <= '0;
            issuing <= 1'b0;
          end else begin
            cb <= cb + 1'b1;
          end
        end else begin
          db <= db + 1'b1;
        end
      end
      // add up the dimension blocks of the current centroid block
      if (pend_valid) begin
        for (int c = 0; c < int'(COLS); c++) begin
          blk_scores[c] <= (pend_first ? S_W'(0) : blk_scores[c])
                         + S_W'(arr_out[pend_tile][c]);
        end
        if (pend_blk_end) begin
          blk_valid <= 1'b1;
          blk_idx   <= pend_cb;
          blk_last  <= (32'(pend_cb) == N_CB - 1);
        end
      end
    end
  end

endmodule
