// imc_array: one binary-weight in-memory-computing (IMC) array.
//
// The array stores a ROWS x COLS matrix of single-bit cells. One operation
// applies an input vector of ROWS unsigned IN_W-bit values to the rows and
// returns, for every column c, the dot product sum_r in[r] * cell[r][c]. With
// IN_W = 1 this is the popcount of (input AND column) used for the dot
// similarity of two binary vectors; with IN_W = 8 it is one block of the
// projection-encoding matrix-vector product.
//
// This is a bit-exact digital equivalent of the SRAM compute array: the
// analog summation and the column converters of a real SRAM IMC macro are not
// modelled, and the column sums are exact (no converter saturation). That the
// array holds binary cells and does one matrix-vector product per operation
// follows the paper; the ports and timing are this design's own.
//
// Interface and timing:
//   wr_en/wr_row/wr_data  write one row of cells (bit c of wr_data = column c),
//                         taking effect at the clock edge.
//   op_en/op_in           start an operation; op_out holds the COLS column sums
//                         from the following cycle until the next operation.
// A write and an operation in the same cycle see the old cell contents.
module imc_array #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128,
  parameter int unsigned IN_W = 8,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned OUT_W = IN_W + RW
) (
  input  logic                            clk,
  input  logic                            wr_en,
  input  logic [RW-1:0]                   wr_row,
  input  logic [COLS-1:0]                 wr_data,
  input  logic                            op_en,
  input  logic [ROWS-1:0][IN_W-1:0]       op_in,
  output logic [COLS-1:0][OUT_W-1:0]      op_out
);

  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_row] <= wr_data;
  end

  // One accumulation per column (bit line); all columns in the same operation.
  for (genvar c = 0; c < int'(COLS); c++) begin : g_col
    always_ff @(posedge clk) begin
      if (op_en) begin
        logic [OUT_W-1:0] acc;
        acc = '0;
        for (int r = 0; r < int'(ROWS); r++) begin
          acc = acc + OUT_W'(op_in[r] & {IN_W{cells[r][c]}});
        end
        op_out[c] <= acc;
      end
    end
  end

  initial begin
    assert (ROWS >= 2 && COLS >= 1 && IN_W >= 1)
      else $error("imc_array: unsupported geometry");
  end

endmodule
