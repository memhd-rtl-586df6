// input_buffer: register file for the input feature vector F.
//
// The host writes the N_FEAT features one at a time (wr_en, wr_addr, wr_data).
// The encoder reads them a row-block at a time: rd_blk selects features
// rd_blk*ROWS .. rd_blk*ROWS+ROWS-1, which drive the ROWS word lines of one
// encoder array. The last block is padded: entries at or beyond N_FEAT are
// cleared by reset, can never be written and so always read as zero, which
// makes the unused rows of the last encoder array contribute nothing.
//
// Timing: writes take effect at the clock edge; the read is combinational.
// The paper only names the feature vector F that enters the encoder; the
// buffer, its write port and the zero padding are this design's own.
module input_buffer #(
  parameter int unsigned N_FEAT = 784,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned FEAT_W = 8,
  localparam int unsigned N_RB = (N_FEAT + ROWS - 1) / ROWS,
  localparam int unsigned AW   = (N_FEAT > 1) ? $clog2(N_FEAT) : 1,
  localparam int unsigned BW   = (N_RB > 1) ? $clog2(N_RB) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  logic [FEAT_W-1:0]           wr_data,
  input  logic [BW-1:0]               rd_blk,
  output logic [ROWS-1:0][FEAT_W-1:0] rd_data
);

  logic [FEAT_W-1:0] mem [N_RB*ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_RB*ROWS); i++) mem[i] <= '0;
    end else if (wr_en && (32'(wr_addr) < N_FEAT)) begin
      mem[wr_addr] <= wr_data;
    end
  end

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) begin
      rd_data[r] = mem[32'(rd_blk) * ROWS + 32'(r)];
    end
  end

  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  wr_en |-> (32'(wr_addr) < N_FEAT))
    else $error("input_buffer: feature address %0d out of range", wr_addr);

endmodule
