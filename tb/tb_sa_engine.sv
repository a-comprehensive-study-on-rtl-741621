// tb_sa_engine: checks the sparsity-aware engine on a full-size PIM array
// with the shared result calculator.
// - Investment example of the source: X1 <= 5, X2 <= 3, 2 X1 + 3 X2 <= 12,
//   maximise 4 X1 + 5 X2. The potential solutions are (1.5, 3) with cost 21
//   and (5, 0.67) with cost 23.3; the engine must return the second.
// - Random sparse problems: every potential solution cost in the PC array is
//   compared with a model using exact division (tolerance from the divider
//   error), the PS count must be the number of non-zero C_ik, the returned
//   cost must be R . X for the returned X, and no worse than the model's
//   best by more than the divider tolerance.
// - No general constraint: the CC vector is the answer.
module tb_sa_engine;
  import spark_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  logic wr_en; row_t wr_row; coef_t [SLOTS-1:0] wr_data;
  logic pim_req_valid, pim_rsp_valid; pim_req_t pim_req; pim_rsp_t pim_rsp;
  logic rc_valid, rc_out_valid, rc_lut_hit; coef_t rc_d, rc_div; sum_t rc_sum;
  logic [7:0] rc_tag, rc_out_tag; logic signed [31:0] rc_q_raw; xval_t rc_q_x;

  pim_array u_pim (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .req_valid(pim_req_valid),
                   .req(pim_req), .rsp_valid(pim_rsp_valid), .rsp(pim_rsp));
  result_calc u_rc (.clk, .rst_n, .in_valid(rc_valid), .d(rc_d), .sum(rc_sum), .div(rc_div),
                    .in_tag(rc_tag), .out_valid(rc_out_valid), .q_raw(rc_q_raw), .q_x(rc_q_x),
                    .lut_hit(rc_lut_hit), .out_tag(rc_out_tag));

  logic start, busy, done, ps_overflow;
  var_t n; row_t cost_row, carr_row; xval_t [NV-1:0] cc_val, x_out;
  logic [8:0] cn, ps_cnt; logic [7:0] carr_idx, pc_idx; sum_t cost, pc_rdata;

  sa_engine dut (.*);

  row_t carr [256];
  assign carr_row = carr[carr_idx];

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

  int C [8][NV];
  int D [8];
  int R [NV];

  task automatic put_row(input int r, input int coefs [NV], input int nn, input int dd);
    wr_en = 1; wr_row = row_t'(r); wr_data = '0;
    for (int j = 0; j < nn; j++) wr_data[j] = coef_t'(coefs[j]);
    wr_data[D_SLOT] = coef_t'(dd);
    @(negedge clk);
    wr_en = 0;
  endtask

  // load rows, run, compare against the exact model
  task automatic run_case(input int nn, input int ncon, input real ccr [NV], input string name);
    real ps_val [$], ps_cost [$], ps_mag [$];
    int ps_var [$];
    real best, best_mag;
    int rows_base;
    rows_base = $urandom_range(0, 200);
    put_row(rows_base + 20, R, nn, 0);
    for (int i = 0; i < ncon; i++) begin
      int row [NV];
      for (int j = 0; j < NV; j++) row[j] = C[i][j];
      put_row(rows_base + i, row, nn, D[i]);
      carr[i] = row_t'(rows_base + i);
    end
    // model
    for (int i = 0; i < ncon; i++) begin
      for (int k = 0; k < nn; k++) begin
        real s, v, c, mag;
        if (C[i][k] == 0) continue;
        s = 0.0;
        for (int j = 0; j < nn; j++) if (j != k) s += C[i][j] * ccr[j];
        v = (D[i] - s) / C[i][k];
        if (v < 0.0) v = 0.0;
        if (v > ccr[k]) v = ccr[k];
        c = 0.0; mag = 0.0;
        for (int j = 0; j < nn; j++) begin
          real xj;
          xj = (j == k) ? v : ccr[j];
          c += R[j] * xj;
          mag += ((R[j] < 0) ? -R[j] : R[j]) * xj;
        end
        ps_var.push_back(k); ps_val.push_back(v); ps_cost.push_back(c * 256.0);
        ps_mag.push_back(((R[k] < 0) ? -R[k] : R[k]) * v * 256.0);
      end
    end
    n = var_t'(nn); cost_row = row_t'(rows_base + 20); cn = 9'(ncon);
    for (int j = 0; j < NV; j++) cc_val[j] = (j < nn) ? xval_t'(int'(ccr[j] * 256.0)) : '0;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    check(int'(ps_cnt) == ps_var.size(), $sformatf("%s: ps_cnt %0d expected %0d", name, ps_cnt, ps_var.size()));
    best = -1.0e30; best_mag = 0.0;
    for (int p = 0; p < ps_var.size(); p++) begin
      real tol;
      pc_idx = 8'(p);
      #1;
      tol = ps_mag[p] * 0.06 + 8.0 * nn;
      check(real'(pc_rdata) >= ps_cost[p] - tol && real'(pc_rdata) <= ps_cost[p] + tol,
            $sformatf("%s: PC[%0d] = %0d expected %.1f", name, p, pc_rdata, ps_cost[p]));
      if (ps_cost[p] > best) begin best = ps_cost[p]; best_mag = ps_mag[p]; end
    end
    @(negedge clk);
    begin
      longint rc;
      real tol;
      rc = 0;
      for (int j = 0; j < nn; j++) rc += longint'(R[j]) * longint'(x_out[j]);
      check(longint'(cost) == rc, $sformatf("%s: cost %0d is R.X %0d", name, cost, rc));
      if (ps_var.size() == 0) begin
        for (int j = 0; j < nn; j++) check(x_out[j] == cc_val[j], $sformatf("%s: CC vector returned", name));
      end else begin
        tol = 0.06 * best_mag + 8.0 * nn;
        // every PS cost may be off by its own error; allow the largest
        for (int p = 0; p < ps_var.size(); p++) if (ps_mag[p] * 0.06 + 8.0 * nn > tol) tol = ps_mag[p] * 0.06 + 8.0 * nn;
        check(real'(cost) >= best - 2.0 * tol, $sformatf("%s: cost %0d vs best %.1f", name, cost, best));
      end
      for (int j = nn; j < NV; j++) check(x_out[j] == '0, "unused variables are zero");
    end
  endtask

  initial begin
    real ccr [NV];
    rst_n = 0; start = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    n = '0; cost_row = '0; cc_val = '0; cn = '0; pc_idx = '0;
    for (int i = 0; i < 256; i++) carr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // investment example
    for (int i = 0; i < 8; i++) for (int j = 0; j < NV; j++) C[i][j] = 0;
    for (int j = 0; j < NV; j++) begin R[j] = 0; ccr[j] = 0.0; end
    C[0][0] = 2; C[0][1] = 3; D[0] = 12; R[0] = 4; R[1] = 5; ccr[0] = 5.0; ccr[1] = 3.0;
    run_case(2, 1, ccr, "investment");
    check(x_out[0] == xval_t'(5 * 256) && x_out[1] > xval_t'(150) && x_out[1] < xval_t'(190),
          $sformatf("investment: X = (%0d, %0d)/256", x_out[0], x_out[1]));
    check(cost > sum_t'(5700) && cost < sum_t'(6250), $sformatf("investment: cost %0d", cost));
    // random sparse problems
    for (int t = 0; t < 30; t++) begin
      int nn, ncon;
      nn = $urandom_range(2, 8);
      ncon = (t == 0) ? 0 : $urandom_range(1, 8);
      for (int j = 0; j < NV; j++) begin
        R[j] = (j < nn) ? $urandom_range(0, 20) - 4 : 0;
        ccr[j] = (j < nn) ? real'($urandom_range(1, 40)) : 0.0;
      end
      for (int i = 0; i < ncon; i++) begin
        for (int j = 0; j < NV; j++) C[i][j] = (j < nn && $urandom_range(0, 3) != 0) ? $urandom_range(1, 9) : 0;
        D[i] = $urandom_range(10, 600);
      end
      run_case(nn, ncon, ccr, $sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
