// adder_reduction: the AR unit of a bank.
//
// Adds the s-a products of the selected column groups of a row into one dot
// product. incl[s] chooses whether slot s takes part: the diagonal
// coefficient C_ii and the D slot are read through the array but left out
// of the sum, as in the source's example where AR forms C12*X2 + C13*X3.
// Combinational; the caller registers the result. The include mask is this
// design's way of leaving slots out.
module adder_reduction #(
  parameter int unsigned N   = spark_pkg::SLOTS,
  parameter int unsigned P_W = spark_pkg::PROD_W,
  parameter int unsigned S_W = spark_pkg::SUM_W
) (
  input  logic signed [P_W-1:0] prod [N],
  input  logic        [N-1:0]   incl,
  output logic signed [S_W-1:0] sum
);

  always_comb begin
    sum = '0;
    for (int s = 0; s < int'(N); s++)
      if (incl[s]) sum += S_W'(prod[s]);
  end

endmodule
