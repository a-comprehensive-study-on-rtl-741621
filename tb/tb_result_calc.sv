// tb_result_calc: checks the result calculator X = (D - sum) / div with the
// regularizing divider. Random signed operands; the testbench computes the
// exact quotient in X scale and requires the output to be within the divider
// tolerance, with the sign right, one cycle after the input, and clamped to
// [0, max X] on q_x. Also checks divide-by-zero and zero numerator.
module tb_result_calc;
  import spark_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, out_valid, lut_hit;
  coef_t d, div;
  sum_t sum;
  logic [7:0] in_tag, out_tag;
  logic signed [31:0] q_raw;
  xval_t q_x;
  int hits = 0;

  result_calc dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; d = '0; div = '0; sum = '0; in_tag = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!out_valid, "no output after reset");
    for (int t = 0; t < 5000; t++) begin
      real q, tol, gotr;
      longint numer;
      d = coef_t'($urandom_range(0, 4000)) - coef_t'(1000);
      div = coef_t'($urandom_range(1, 300));
      if (t % 4 == 0) div = -div;
      sum = sum_t'(longint'($urandom_range(0, 2000000)) - longint'(600000));
      in_tag = 8'(t);
      in_valid = 1;
      numer = (longint'(d) <<< X_FRAC) - longint'(sum);
      q = real'(numer) / real'(div);
      @(negedge clk);
      in_valid = 0;
      check(out_valid && out_tag == 8'(t), "one-cycle latency and tag");
      gotr = real'(q_raw);
      tol = (q < 0 ? -q : q) * 0.06 + 2.0;
      check(gotr >= q - tol && gotr <= q + tol,
            $sformatf("(%0d*256-%0d)/%0d = %.1f got %0d", d, sum, div, q, q_raw));
      if (q_raw < 0) check(q_x == '0, "negative clamps to zero");
      else if (q_raw > 65535) check(q_x == '1, "large clamps to max");
      else check(int'(q_x) == q_raw, "q_x equals q_raw in range");
      if (lut_hit) hits++;
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk);
        check(!out_valid, "valid drops without input");
      end
    end
    check(hits > 0, "divider table used");
    // divide by zero saturates, zero numerator gives zero
    d = 16'sd10; sum = '0; div = '0; in_valid = 1;
    @(negedge clk);
    check(q_raw == 32'sh7FFF_FFFF && q_x == '1, "divide by zero saturates");
    d = 16'sd3; sum = sum_t'(3 * 256); div = 16'sd5;
    @(negedge clk);
    in_valid = 0;
    check(q_raw == 0 && q_x == 0, "zero numerator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
