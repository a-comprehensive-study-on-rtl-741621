// tb_shift_add: checks the s-a unit. With bank b holding C AND X[b] the
// output must equal C*X for signed C and unsigned X; with arbitrary partial
// products it must equal sum_b pp[b]*2^b.
module tb_shift_add;
  int checks = 0, failures = 0;
  logic signed [15:0] pp [16];
  logic signed [31:0] prod;

  shift_add #(.N_BITS(16), .C_W(16), .P_W(32)) dut (.pp(pp), .prod(prod));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic signed [15:0] c;
      logic [15:0] x;
      longint expv;
      c = 16'($urandom);
      x = 16'($urandom);
      if (t < 20) x = 16'hFFFF;
      if (t >= 20 && t < 40) c = -16'sd32768;
      expv = 0;
      for (int b = 0; b < 16; b++) begin
        pp[b] = x[b] ? c : 16'sd0;
      end
      expv = longint'(c) * longint'(x);
      #1;
      checks++;
      if (longint'(prod) != expv) begin
        failures++;
        $display("FAIL: C=%0d X=%0d got %0d expected %0d", c, x, prod, expv);
      end
      // arbitrary partial products
      expv = 0;
      for (int b = 0; b < 16; b++) begin
        pp[b] = 16'($urandom);
        expv += longint'(pp[b]) * (longint'(1) << b);
      end
      #1;
      checks++;
      if (longint'(prod) != expv) begin
        failures++;
        $display("FAIL: arbitrary pp got %0d expected %0d", prod, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
