// em_unit: binary random-projection encoding module (EM).
//
// Computes the query hypervector Q = M^T F, where F is the N_FEAT-feature
// input and M is the N_FEAT x DIM binary projection matrix whose column j is
// the base vector B_j. M is cut into tiles of ROWS features x COLS dimensions
// and every tile lives in its own imc_array: N_RB = ceil(N_FEAT/ROWS) row
// blocks times N_DB = ceil(DIM/COLS) dimension blocks. For the main
// configuration (784 features, D = 128, 128x128 arrays) that is 7 arrays, as
// in the paper's array count for the MEMHD encoder.
//
// One array operation is issued per cycle, tile t = db*N_RB + rb in order, so
// an encoding takes N_RB*N_DB operation cycles (7 for the main configuration,
// 20 for 617 features at D = 512), the cycle count the paper gives for a
// single-array schedule. The column sums of a tile arrive one cycle after
// its operation and are added into the accumulator of dimensions
// db*COLS .. db*COLS+COLS-1. The paper states that M is binary and that the
// encoding is an MVM on IMC arrays; the tile order, the one-operation-per-cycle
// schedule and the exact integer accumulation are this design's choices.
//
// Interface and timing:
//   wr_en/wr_tile/wr_row/wr_data  program row wr_row of tile wr_tile (bit c =
//                                 dimension db*COLS+c of feature rb*ROWS+wr_row).
//   start       one-cycle pulse; clears the accumulators. Operations are issued
//               in the N_TILE cycles after the start cycle.
//   feat_blk    must show the input-buffer block rd_blk in the same cycle.
//   done        one-cycle pulse; q is valid from then until the next start.
//   op_active   high in every cycle in which an array operation is issued.
module em_unit #(
  parameter int unsigned N_FEAT = 784,
  parameter int unsigned DIM    = 128,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned FEAT_W = 8,
  localparam int unsigned N_RB   = (N_FEAT + ROWS - 1) / ROWS,
  localparam int unsigned N_DB   = (DIM + COLS - 1) / COLS,
  localparam int unsigned N_TILE = N_RB * N_DB,
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned TW     = (N_TILE > 1) ? $clog2(N_TILE) : 1,
  localparam int unsigned BW     = (N_RB > 1) ? $clog2(N_RB) : 1,
  localparam int unsigned DBW    = (N_DB > 1) ? $clog2(N_DB) : 1,
  localparam int unsigned PS_W   = FEAT_W + RW,
  localparam int unsigned Q_W    = FEAT_W + $clog2(N_RB * ROWS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // projection matrix programming
  input  logic                        wr_en,
  input  logic [TW-1:0]               wr_tile,
  input  logic [RW-1:0]               wr_row,
  input  logic [COLS-1:0]             wr_data,
  // encoding
  input  logic                        start,
  output logic [BW-1:0]               rd_blk,
  input  logic [ROWS-1:0][FEAT_W-1:0] feat_blk,
  output logic                        busy,
  output logic                        done,
  output logic                        op_active,
  output logic [DIM-1:0][Q_W-1:0]     q
);

  // Issue side: one tile per cycle.
  logic            issuing;
  logic [BW-1:0]   rb;
  logic [DBW-1:0]  db;
  logic [TW-1:0]   tile;
  // Accumulate side: the tile issued in the previous cycle.
  logic            pend_valid, pend_last;
  logic [TW-1:0]   pend_tile;
  logic [DBW-1:0]  pend_db;

  logic [COLS-1:0][PS_W-1:0] arr_out [N_TILE];
  logic [Q_W-1:0]            acc [N_DB*COLS];

  assign tile      = TW'(32'(db) * N_RB + 32'(rb));
  assign rd_blk    = rb;
  assign op_active = issuing;

  for (genvar t = 0; t < int'(N_TILE); t++) begin : g_tile
    imc_array #(.ROWS(ROWS), .COLS(COLS), .IN_W(FEAT_W)) u_arr (
      .clk     (clk),
      .wr_en   (wr_en && (32'(wr_tile) == t)),
      .wr_row  (wr_row),
      .wr_data (wr_data),
      .op_en   (issuing && (32'(tile) == t)),
      .op_in   (feat_blk),
      .op_out  (arr_out[t])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing    <= 1'b0;
      rb         <= '0;
      db         <= '0;
      pend_valid <= 1'b0;
      pend_last  <= 1'b0;
      pend_tile  <= '0;
      pend_db    <= '0;
      done       <= 1'b0;
      for (int i = 0; i < int'(N_DB*COLS); i++) acc[i] <= '0;
    end else begin
      done <= 1'b0;
      // issue
      pend_valid <= issuing;
      pend_tile  <= tile;
      pend_db    <= db;
      pend_last  <= issuing && (32'(tile) == N_TILE - 1);
      if (start && !busy) begin
        issuing <= 1'b1;
        rb      <= '0;
        db      <= '0;
        for (int i = 0; i < int'(N_DB*COLS); i++) acc[i] <= '0;
      end else if (issuing) begin
        if (32'(rb) == N_RB - 1) begin
          rb <= '0;
          if (32'(db) == N_DB - 1) begin
            db      <= '0;
            issuing <= 1'b0;
          end else begin
            db <= db + 1'b1;
          end
        end else begin
          rb <= rb + 1'b1;
        end
      end
      // accumulate the column sums of the previous operation
      if (pend_valid) begin
        for (int c = 0; c < int'(COLS); c++) begin
          acc[32'(pend_db)*COLS + 32'(c)] <= acc[32'(pend_db)*COLS + 32'(c)]
                                           + Q_W'(arr_out[pend_tile][c]);
        end
        if (pend_last) done <= 1'b1;
      end
    end
  end

  assign busy = issuing || pend_valid;

  always_comb begin
    for (int j = 0; j < int'(DIM); j++) q[j] = acc[j];
  end

endmodule
