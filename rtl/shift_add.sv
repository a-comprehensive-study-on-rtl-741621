// shift_add: the s-a unit of one 16-bit column group.
//
// Bank b computes C AND X[b] for the coefficient C held in this column group,
// so its row buffer holds the partial product C*X[b]. The s-a unit weights
// each bank's partial product by 2^b and adds them, giving the full product
// C*X for an unsigned X of N_BITS bits and a signed C. Purely combinational;
// the caller registers the result (the "near-memory accumulation" stage).
// The shift-and-add across banks follows the source's figure of two banks
// feeding one s-a unit; the adder structure is this design's choice.
module shift_add #(
  parameter int unsigned N_BITS = spark_pkg::NUM_BANKS,
  parameter int unsigned C_W    = spark_pkg::DATA_W,
  parameter int unsigned P_W    = spark_pkg::PROD_W
) (
  input  logic signed [C_W-1:0] pp [N_BITS],   // partial product from bank b
  output logic signed [P_W-1:0] prod
);

  always_comb begin
    prod = '0;
    for (int b = 0; b < int'(N_BITS); b++)
      prod += P_W'(pp[b]) <<< b;
  end

endmodule
