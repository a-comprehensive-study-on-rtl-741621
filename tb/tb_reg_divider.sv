// tb_reg_divider: checks the regularizing (log-domain) divider.
// - Exact cases: num = den * 2^k must come out exact (both mantissas equal,
//   the table is not used).
// - Random cases: the relative error against exact division must stay
//   within MAX_ERR_PCT, and the mean error within MEAN_ERR_PCT.
// - The correction table must fire on some operands, and the error on those
//   operands must be lower than plain Mitchell division would give (the
//   uncorrected result is rebuilt in the testbench from the same mantissas).
// - Edge cases: den = 0 saturates, num = 0 gives 0, too-large quotient
//   saturates.
module tb_reg_divider;
  localparam real MAX_ERR_PCT  = 6.0;
  localparam real MEAN_ERR_PCT = 1.0;
  int checks = 0, failures = 0;
  logic [39:0] num;
  logic [15:0] den;
  logic [31:0] quot;
  logic lut_hit;

  reg_divider #(.NUM_W(40), .DEN_W(16), .Q_W(32), .M_BITS(8)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // plain Mitchell result (no table), as a real number
  function automatic real mitchell(input longint a, input longint b);
    int ka = 0, kb = 0;
    real fa, fb, d;
    for (int k = 0; k < 40; k++) if (a[k]) ka = k;
    for (int k = 0; k < 16; k++) if (b[k]) kb = k;
    fa = real'(a) / real'(longint'(1) << ka) - 1.0;
    fb = real'(b) / real'(longint'(1) << kb) - 1.0;
    d = fa - fb;
    if (d >= 0) return (1.0 + d) * (2.0 ** (ka - kb));
    return (2.0 + d) * (2.0 ** (ka - kb - 1));
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real err, sum_err, max_err, merr, sum_hit_err, sum_hit_mitchell;
    int n, hits;
    // exact powers of two
    for (int t = 0; t < 200; t++) begin
      int k;
      den = 16'($urandom_range(1, 65535));
      k = $urandom_range(0, 15);
      num = 40'(longint'(den) << k);
      #1;
      check(quot == 32'(longint'(1) << k), $sformatf("exact %0d/%0d got %0d", num, den, quot));
    end
    // random operands, quotient >= 1
    sum_err = 0.0; max_err = 0.0; n = 0; hits = 0; sum_hit_err = 0.0; sum_hit_mitchell = 0.0;
    for (int t = 0; t < 20000; t++) begin
      real q;
      den = 16'($urandom_range(1, 65535));
      num = 40'({$urandom, $urandom}) >> $urandom_range(8, 39);
      if (num < 40'(den)) num = 40'(den) + 40'($urandom_range(0, 1000));
      #1;
      q = real'(num) / real'(den);
      if (q < 64.0) continue;            // keep truncation of the result small
      err = (real'(quot) - q) / q * 100.0;
      if (err < 0) err = -err;
      merr = (mitchell(longint'(num), longint'(den)) - q) / q * 100.0;
      if (merr < 0) merr = -merr;
      sum_err += err; n++;
      if (err > max_err) max_err = err;
      if (lut_hit) begin
        hits++; sum_hit_err += err; sum_hit_mitchell += merr;
      end
      check(err <= MAX_ERR_PCT, $sformatf("%0d/%0d got %0d (%.2f%%)", num, den, quot, err));
    end
    $display("divider: %0d samples, mean err %.3f%%, max err %.3f%%, table hits %0d", n, sum_err / n, max_err, hits);
    $display("  on table hits: mean err %.3f%% (plain Mitchell %.3f%%)", sum_hit_err / hits, sum_hit_mitchell / hits);
    check(sum_err / n <= MEAN_ERR_PCT, "mean error");
    check(hits > 100, "correction table used");
    check(sum_hit_err < sum_hit_mitchell, "correction table reduces error");
    // edge cases
    num = 40'd12345; den = 16'd0; #1;
    check(quot == '1 && !lut_hit, "divide by zero saturates");
    num = 40'd0; den = 16'd77; #1;
    check(quot == '0, "zero numerator");
    num = 40'hFF_FFFF_FFFF; den = 16'd1; #1;
    check(quot == '1, "overflow saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
