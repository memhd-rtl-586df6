// query_binarizer: 1-bit quantisation of the encoded query, Q -> Q^b.
//
// Bit j of the binary query is 1 when Q[j] is greater than the mean of all
// DIM elements of Q and 0 otherwise. The comparison is done exactly, without
// a division: Q[j] > sum(Q)/DIM  <=>  DIM*Q[j] > sum(Q).
// The paper binarises the associative memory with exactly this rule (values
// greater than the mean become 1, the rest 0); it does not say how the query
// hypervector is binarised, and using the same mean threshold for it is this
// design's choice.
//
// Interface and timing: q is sampled when in_valid is high; qb and out_valid
// (a one-cycle pulse) follow one clock later, and qb holds until the next
// in_valid.
module query_binarizer #(
  parameter int unsigned DIM = 128,
  parameter int unsigned Q_W = 18,
  localparam int unsigned S_W = Q_W + ((DIM > 1) ? $clog2(DIM) : 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [DIM-1:0][Q_W-1:0] q,
  output logic                    out_valid,
  output logic [DIM-1:0]          qb
);

  logic [S_W-1:0] sum;
  logic [DIM-1:0] qb_next;

  always_comb begin
    sum = '0;
    for (int j = 0; j < int'(DIM); j++) sum = sum + S_W'(q[j]);
    for (int j = 0; j < int'(DIM); j++) begin
      qb_next[j] = ((S_W+1)'(q[j]) * (S_W+1)'(DIM)) > (S_W+1)'(sum);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      qb        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) qb <= qb_next;
    end
  end

endmodule
