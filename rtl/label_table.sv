// label_table: class label of every centroid column of the associative memory.
//
// In the multi-centroid AM each class owns several columns, and how many
// each class gets is decided during training (clustering-based
// initialisation followed by allocation of the remaining columns to the
// classes that are mispredicted most), so the column-to-class mapping is not
// fixed: it is a small table written together with the AM contents. The
// prediction is the label of the winning column. The table itself, its
// write port and its reset value (all columns class 0) are this design's
// choices; the paper describes the mapping only through the class/sub-label
// indices of its argmax.
//
// Timing: writes take effect at the clock edge; rd_class follows rd_col
// combinationally.
module label_table #(
  parameter int unsigned N_COL   = 128,
  parameter int unsigned N_CLASS = 10,
  localparam int unsigned CW = (N_COL > 1) ? $clog2(N_COL) : 1,
  localparam int unsigned KW = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [CW-1:0] wr_col,
  input  logic [KW-1:0] wr_class,
  input  logic [CW-1:0] rd_col,
  output logic [KW-1:0] rd_class
);

  logic [KW-1:0] label [N_COL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_COL); i++) label[i] <= '0;
    end else if (wr_en && (32'(wr_col) < N_COL)) begin
      label[wr_col] <= wr_class;
    end
  end

  assign rd_class = (32'(rd_col) < N_COL) ? label[rd_col] : '0;

  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n)
                                wr_en |-> (32'(wr_class) < N_CLASS && 32'(wr_col) < N_COL))
    else $error("label_table: column %0d / class %0d out of range", wr_col, wr_class);

endmodule
