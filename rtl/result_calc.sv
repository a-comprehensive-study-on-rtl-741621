// result_calc: the Sub;Div pair of a bank ("result calculator" stage).
//
// Computes q = (D * 2^X_FRAC - sum) / div, the Jacobi update
// X_i = (D_i - sum_j C_ij X_j) / C_ii, and also the potential-solution
// value of the sparsity-aware engine, which has the same form. The
// subtraction is exact; the division uses reg_divider on magnitudes with the
// sign restored afterwards. Two results are given: q_raw, signed and
// saturated to 32 bits, and q_x, q clamped to the X range [0, 2^X_W - 1]
// (variables are non-negative).
//
// Timing: one result per cycle, one cycle of latency (out_valid follows
// in_valid by one clock, out_tag returns in_tag). Sub and Div at one per
// bank and single-cycle division follow the source; the formats are this
// design's.
module result_calc
  import spark_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  coef_t       d,        // right-hand side, integer
  input  sum_t        sum,      // dot product, X scale
  input  coef_t       div,      // divisor, integer
  input  logic [7:0]  in_tag,
  output logic        out_valid,
  output logic signed [31:0] q_raw,
  output xval_t       q_x,
  output logic        lut_hit,  // divider applied a table correction
  output logic [7:0]  out_tag
);

  localparam int unsigned NW = SUM_W + 1;

  logic signed [NW-1:0] numer;
  logic        [NW-1:0] mag_n;
  logic        [DATA_W-1:0] mag_d;
  logic        [31:0]   mag_q;
  logic                 neg;
  logic                 hit;
  logic signed [32:0]   q_s;

  always_comb begin
    numer = (NW'(d) <<< X_FRAC) - NW'(sum);
    mag_n = numer[NW-1] ? NW'(-numer) : NW'(numer);
    mag_d = div[DATA_W-1] ? DATA_W'(-div) : DATA_W'(div);
    neg   = numer[NW-1] ^ div[DATA_W-1];
  end

  reg_divider #(.NUM_W(NW), .DEN_W(DATA_W), .Q_W(32), .M_BITS(8)) u_div (
    .num     (mag_n),
    .den     (mag_d),
    .quot    (mag_q),
    .lut_hit (hit)
  );

  always_comb begin
    logic [31:0] m31;
    m31 = mag_q[31] ? 32'h7FFF_FFFF : mag_q;
    q_s = neg ? -33'(signed'({1'b0, m31})) : 33'(signed'({1'b0, m31}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q_raw     <= '0;
      q_x       <= '0;
      lut_hit   <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      lut_hit   <= in_valid & hit;
      q_raw     <= q_s[31:0];
      if (q_s < 0)                            q_x <= '0;
      else if (q_s > 33'((1 << X_W) - 1))     q_x <= '1;
      else                                    q_x <= q_s[X_W-1:0];
    end
  end

endmodule
