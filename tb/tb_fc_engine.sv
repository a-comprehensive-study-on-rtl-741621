// tb_fc_engine: checks sparsity detection on a full-size PIM array.
// - The investment example of the source (X1 <= D1, X2 <= D2,
//   C31 X1 + C32 X2 <= D3): sparse, CC count 2, CC values D1 and D2, one
//   general row in the C array.
// - Random problems (m up to 256 rows, n up to 15) mixing cardinality rows,
//   general rows and all-zero rows, some with every variable bounded by a
//   cardinality row (sparse) and some not: every output is compared with a
//   model in the testbench, including the order of the C array.
// - Timing: done must come m + PIM_LAT + 2 cycles after start.
module tb_fc_engine;
  import spark_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  logic wr_en; row_t wr_row; coef_t [SLOTS-1:0] wr_data;
  logic pim_req_valid, pim_rsp_valid; pim_req_t pim_req; pim_rsp_t pim_rsp;
  pim_array u_pim (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .req_valid(pim_req_valid),
                   .req(pim_req), .rsp_valid(pim_rsp_valid), .rsp(pim_rsp));

  logic start, busy, done, sparse, c_overflow;
  row_t base, carr_row; logic [ROW_AW:0] m; var_t n;
  logic [31:0] ccn; xval_t [NV-1:0] cc_val; logic [NV-1:0] cc_valid;
  logic [8:0] cn; logic [7:0] carr_idx;

  fc_engine dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  coef_t rows [ROWS][SLOTS];

  task automatic put_row(input int r);
    wr_en = 1; wr_row = row_t'(r);
    for (int k = 0; k < SLOTS; k++) wr_data[k] = rows[r][k];
    @(negedge clk);
    wr_en = 0;
  endtask

  // model of the detection, then run and compare
  task automatic run_and_check(input int rb, input int mm, input int nn, input string name);
    int e_ccn, e_cn, t0;
    xval_t e_val [NV];
    bit e_valid [NV];
    int e_carr [$];
    e_ccn = 0; e_cn = 0;
    for (int j = 0; j < NV; j++) begin e_val[j] = '0; e_valid[j] = 0; end
    for (int i = 0; i < mm; i++) begin
      int r, nz, k;
      coef_t dv;
      r = (rb + i) % ROWS;
      nz = 0; k = 0;
      for (int j = 0; j < nn; j++) if (rows[r][j] != 0) begin nz++; k = j; end
      dv = rows[r][D_SLOT];
      if (nz == 1 && dv != 0) begin
        e_ccn++;
        e_valid[k] = 1;
        e_val[k] = (dv < 0) ? '0 : (dv > 255) ? '1 : xval_t'(dv) << X_FRAC;
      end else if (!(nz == 0 && dv == 0)) begin
        e_cn++;
        e_carr.push_back(r);
      end
    end
    base = row_t'(rb); m = (ROW_AW+1)'(mm); n = var_t'(nn);
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    check(cyc - t0 == mm + PIM_LAT + 2, $sformatf("%s: done after %0d cycles for m=%0d", name, cyc - t0, mm));
    check(ccn == 32'(e_ccn), $sformatf("%s: ccn %0d expected %0d", name, ccn, e_ccn));
    check(sparse == (e_ccn == nn && nn != 0), $sformatf("%s: sparse flag", name));
    check(int'(cn) == e_cn, $sformatf("%s: cn %0d expected %0d", name, cn, e_cn));
    for (int j = 0; j < NV; j++) begin
      check(cc_valid[j] == e_valid[j], $sformatf("%s: cc_valid[%0d]", name, j));
      if (e_valid[j]) check(cc_val[j] == e_val[j], $sformatf("%s: cc_val[%0d]", name, j));
    end
    for (int i = 0; i < e_cn; i++) begin
      carr_idx = 8'(i);
      #1;
      check(int'(carr_row) == e_carr[i], $sformatf("%s: C array entry %0d", name, i));
    end
    @(negedge clk);
    check(!c_overflow, "no C array overflow");
  endtask

  initial begin
    rst_n = 0; start = 0; wr_en = 0; wr_row = '0; wr_data = '0; base = '0; m = '0; n = '0; carr_idx = '0;
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < SLOTS; k++) rows[r][k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // investment example: X1 <= 5, X2 <= 3, 2 X1 + 3 X2 <= 12
    rows[10][0] = 1; rows[10][D_SLOT] = 5;
    rows[11][1] = 1; rows[11][D_SLOT] = 3;
    rows[12][0] = 2; rows[12][1] = 3; rows[12][D_SLOT] = 12;
    for (int r = 10; r < 13; r++) put_row(r);
    run_and_check(10, 3, 2, "investment");
    check(sparse && ccn == 2 && cc_val[0] == xval_t'(5 * 256) && cc_val[1] == xval_t'(3 * 256)
          && cn == 1, "investment example result");
    // random problems
    for (int t = 0; t < 40; t++) begin
      int rb, mm, nn;
      bit want_sparse;
      nn = $urandom_range(1, 15);
      mm = $urandom_range(1, 256);
      if (t == 0) mm = 256;
      if (mm < nn) mm = nn;
      rb = $urandom_range(0, 255);
      want_sparse = $urandom_range(0, 1);
      for (int i = 0; i < mm; i++) begin
        int r, kind;
        r = (rb + i) % ROWS;
        for (int k = 0; k < SLOTS; k++) rows[r][k] = '0;
        kind = (want_sparse && i < nn) ? 0 : $urandom_range(0, 5);
        case (kind)
          0: begin   // cardinality row of variable i (or random when not forced)
            int k;
            k = (want_sparse && i < nn) ? i : $urandom_range(0, nn - 1);
            rows[r][k] = 1;
            rows[r][D_SLOT] = coef_t'($urandom_range(1, 300));
            if (want_sparse && i >= nn) rows[r][k] = 0;  // keep the count at n
          end
          1: ;       // all-zero row
          2: begin   // single coefficient with D = 0: not a cardinality row
            rows[r][$urandom_range(0, nn - 1)] = coef_t'($urandom_range(1, 9));
          end
          default: begin
            for (int k = 0; k < nn; k++) rows[r][k] = coef_t'($urandom_range(0, 8)) - coef_t'(2);
            rows[r][D_SLOT] = coef_t'($urandom_range(0, 500));
          end
        endcase
        // coefficients beyond n must be ignored
        if (nn < NV && $urandom_range(0, 3) == 0) rows[r][$urandom_range(nn, NV - 1)] = 7;
        put_row(r);
      end
      run_and_check(rb, mm, nn, $sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
