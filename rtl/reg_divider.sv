// reg_divider: the "regularizing" approximate divider.
//
// Instead of a full divider, the quotient is formed in the log domain: each
// operand is written as 2^k * (1 + f), with k the position of its leading one
// and f its next M_BITS bits; the quotient's mantissa is 1 + (fa - fb) (or
// 2 + (fa - fb) one exponent lower when the difference is negative) and its
// exponent ka - kb. That is one M_BITS-bit subtraction. A 64-entry table of
// signed bytes (64 bytes), indexed by the top three bits of fa and of fb,
// holds a correction added to the mantissa; entries whose correction is
// below 1% of the mantissa are zero. Entry (i, j) is the exact quotient of
// the bucket mid-points, (17+2i)/(17+2j) (times two when i < j), minus the
// uncorrected mantissa, in units of 2^-8, computed at elaboration.
//
// Interface: unsigned numerator num (NUM_W bits) and divisor den (DEN_W
// bits); quot = num / den in the same units as num, saturated to Q_W bits;
// den = 0 saturates. lut_hit tells that a non-zero correction was applied.
// Timing: combinational, so a division takes one cycle (registered by the
// caller). The subtraction of leading mantissa bits and the 64-byte table
// follow the source; the table contents and the 1% cut-off rule of each
// entry are this design's reading of it.
module reg_divider #(
  parameter int unsigned NUM_W  = 40,
  parameter int unsigned DEN_W  = 16,
  parameter int unsigned Q_W    = 32,
  parameter int unsigned M_BITS = 8     // mantissa bits subtracted ("m")
) (
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic [Q_W-1:0]   quot,
  output logic             lut_hit
);

  typedef logic signed [7:0] corr_t;

  function automatic corr_t lut_entry(input int i, input int j);
    int exact, approx, c;
    if (i >= j) begin
      exact  = (256 * (17 + 2*i)) / (17 + 2*j);
      approx = 256 + 32 * (i - j);
    end else begin
      exact  = (512 * (17 + 2*i)) / (17 + 2*j);
      approx = 512 + 32 * (i - j);
    end
    c = exact - approx;
    // apply only where the uncorrected error exceeds 1 %
    if (c * 100 > 256 || c * 100 < -256) return corr_t'(c);
    return corr_t'(0);
  endfunction

  function automatic int msb_pos(input logic [NUM_W-1:0] v);
    int p = 0;
    for (int k = 0; k < int'(NUM_W); k++) if (v[k]) p = k;
    return p;
  endfunction

  // normalised mantissa bits below the leading one, M_BITS of them
  function automatic logic [M_BITS-1:0] mant(input logic [NUM_W-1:0] v, input int p);
    logic [NUM_W+M_BITS-1:0] w;
    w = {v, {M_BITS{1'b0}}} >> p;
    return w[M_BITS-1:0];
  endfunction

  localparam int unsigned MW = M_BITS + 2;   // mantissa with integer bits

  always_comb begin
    int                   ka, kb, e;
    logic [M_BITS-1:0]    fa, fb;
    logic signed [MW:0]   diff, m;
    corr_t                corr;
    logic [NUM_W+MW+1:0]  wide;
    ka = msb_pos(num);
    kb = msb_pos(NUM_W'(den));
    fa = mant(num, ka);
    fb = mant(NUM_W'(den), kb);
    diff = $signed({3'b000, fa}) - $signed({3'b000, fb});
    if (diff >= 0) begin
      m = (MW+1)'(1 << M_BITS) + diff;
      e = ka - kb;
    end else begin
      m = (MW+1)'(2 << M_BITS) + diff;
      e = ka - kb - 1;
    end
    corr = lut_entry(int'(fa[M_BITS-1 -: 3]), int'(fb[M_BITS-1 -: 3]));
    lut_hit = (corr != 0);
    // the table is in units of 2^-8 of the mantissa
    if (M_BITS >= 8) m = m + ((MW+1)'(corr) <<< (M_BITS - 8));
    else             m = m + ((MW+1)'(corr) >>> (8 - M_BITS));
    wide = (NUM_W+MW+2)'(unsigned'(m[MW-1:0]));
    if (e >= int'(M_BITS)) wide = wide << (e - int'(M_BITS));
    else                   wide = wide >> (int'(M_BITS) - e);
    if (den == '0)
      quot = '1;
    else if (num == '0)
      quot = '0;
    else if (|(wide >> Q_W))
      quot = '1;
    else
      quot = wide[Q_W-1:0];
    if (den == '0 || num == '0) lut_hit = 1'b0;
  end

endmodule
