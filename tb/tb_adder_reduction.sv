// tb_adder_reduction: checks the AR unit: the sum of the included products,
// with random signed products and random include masks.
module tb_adder_reduction;
  int checks = 0, failures = 0;
  logic signed [31:0] prod [16];
  logic [15:0] incl;
  logic signed [35:0] sum;

  adder_reduction #(.N(16), .P_W(32), .S_W(36)) dut (.prod(prod), .incl(incl), .sum(sum));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint expv;
      expv = 0;
      incl = (t < 10) ? 16'hFFFF : 16'($urandom);
      for (int s = 0; s < 16; s++) begin
        prod[s] = (t % 3 == 0) ? 32'sh8000_0000 : 32'($urandom);
        if (incl[s]) expv += longint'(prod[s]);
      end
      #1;
      checks++;
      if (longint'(sum) != expv) begin
        failures++;
        $display("FAIL: got %0d expected %0d", sum, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
