// tb_sle_engine: checks the Jacobi solver running on a full-size PIM array
// and result calculator.
// - Random diagonally dominant systems (n = 2..8) with a known positive
//   solution: the engine must converge, and every X must be within the error
//   the approximate divider allows of the exact solution (the testbench
//   solves the system by Gaussian elimination).
// - Cycle count: start to done must be iters * (n + PIM_LAT + 3) + 1.
// - The convergence threshold is 48*n units of 2^-8 (0.19 per variable):
//   the piecewise-linear divider can leave Jacobi in a small limit cycle.
// - max_iter stop: with err = 0 and max_iter = 2 the solver must stop after
//   2 iterations and report not converged.
// - Fixed variables (as used by branch and bound): a fixed X keeps its value
//   and the others solve the reduced system.
module tb_sle_engine;
  import spark_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  // PIM array and Sub/Div
  logic wr_en; row_t wr_row; coef_t [SLOTS-1:0] wr_data;
  logic pim_req_valid, pim_rsp_valid; pim_req_t pim_req; pim_rsp_t pim_rsp;
  logic rc_valid, rc_out_valid, rc_lut_hit; coef_t rc_d, rc_div; sum_t rc_sum;
  logic [7:0] rc_tag, rc_out_tag; logic signed [31:0] rc_q_raw; xval_t rc_q_x;

  pim_array u_pim (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .req_valid(pim_req_valid),
                   .req(pim_req), .rsp_valid(pim_rsp_valid), .rsp(pim_rsp));
  result_calc u_rc (.clk, .rst_n, .in_valid(rc_valid), .d(rc_d), .sum(rc_sum), .div(rc_div),
                    .in_tag(rc_tag), .out_valid(rc_out_valid), .q_raw(rc_q_raw), .q_x(rc_q_x),
                    .lut_hit(rc_lut_hit), .out_tag(rc_out_tag));

  logic start, busy, done, converged;
  row_t base; var_t n; xval_t err; logic [15:0] max_iter, iters;
  xval_t [NV-1:0] x_init, fix_val, x_out; logic [NV-1:0] fix_mask;
  logic [X_W+3:0] l1;

  sle_engine dut (.*);

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

  real A [8][8];
  real bvec [8];
  real xs [8];
  int  C [8][8];
  int  D [8];

  task automatic write_row(input int r, input int nn, input int coefs [8], input int dd);
    wr_en = 1; wr_row = row_t'(r); wr_data = '0;
    for (int j = 0; j < nn; j++) wr_data[j] = coef_t'(coefs[j]);
    wr_data[D_SLOT] = coef_t'(dd);
    @(negedge clk);
    wr_en = 0;
  endtask

  // Gaussian elimination on A, bvec (size nn) into xs
  task automatic gauss(input int nn);
    for (int k = 0; k < nn; k++) begin
      for (int i = k + 1; i < nn; i++) begin
        real f;
        f = A[i][k] / A[k][k];
        for (int j = k; j < nn; j++) A[i][j] -= f * A[k][j];
        bvec[i] -= f * bvec[k];
      end
    end
    for (int i = nn - 1; i >= 0; i--) begin
      real s;
      s = bvec[i];
      for (int j = i + 1; j < nn; j++) s -= A[i][j] * xs[j];
      xs[i] = s / A[i][i];
    end
  endtask

  // build a random diagonally dominant system with solution near xt
  task automatic make_system(input int nn, input int rbase);
    for (int i = 0; i < nn; i++) begin
      int off, row [8];
      real xt [8];
      off = 0;
      for (int j = 0; j < nn; j++) begin
        C[i][j] = (i == j) ? 0 : $urandom_range(0, 6) - 3;
        if (i != j) off += (C[i][j] < 0) ? -C[i][j] : C[i][j];
      end
      C[i][i] = 2 * off + $urandom_range(2, 12);
    end
    begin
      real xt [8];
      for (int j = 0; j < nn; j++) xt[j] = real'($urandom_range(20, 4000)) / 100.0;
      for (int i = 0; i < nn; i++) begin
        real s;
        s = 0.0;
        for (int j = 0; j < nn; j++) s += C[i][j] * xt[j];
        D[i] = int'(s);
      end
    end
    for (int i = 0; i < nn; i++) begin
      int row [8];
      for (int j = 0; j < 8; j++) row[j] = (j < nn) ? C[i][j] : 0;
      write_row(rbase + i, nn, row, D[i]);
      for (int j = 0; j < nn; j++) A[i][j] = real'(C[i][j]);
      bvec[i] = real'(D[i]);
    end
    gauss(nn);
  endtask

  task automatic run(input int rbase, input int nn, input int e, input int mi,
                     input logic [NV-1:0] fm, input xval_t [NV-1:0] fv, output int cycles);
    int t0;
    base = row_t'(rbase); n = var_t'(nn); err = xval_t'(e); max_iter = 16'(mi);
    fix_mask = fm; fix_val = fv; x_init = '0;
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    int cycles, solved;
    rst_n = 0; start = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    base = '0; n = '0; err = '0; max_iter = '0; x_init = '0; fix_mask = '0; fix_val = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    solved = 0;
    for (int t = 0; t < 40; t++) begin
      int nn, rb;
      bit pos;
      nn = $urandom_range(2, 8);
      rb = $urandom_range(0, 200);
      make_system(nn, rb);
      pos = 1;
      for (int j = 0; j < nn; j++) if (xs[j] < 0.5 || xs[j] > 200.0) pos = 0;
      if (!pos) continue;
      solved++;
      run(rb, nn, 48 * nn, 200, '0, '0, cycles);
      check(converged, $sformatf("system %0d (n=%0d) converged, iters %0d l1 %0d", t, nn, iters, l1));
      check(cycles == int'(iters) * (nn + PIM_LAT + 3) + 1,
            $sformatf("cycles %0d for %0d iterations of n=%0d", cycles, iters, nn));
      for (int j = 0; j < nn; j++) begin
        real got, tol;
        got = real'(x_out[j]) / 256.0;
        tol = xs[j] * 0.08 + 0.3;
        check(got >= xs[j] - tol && got <= xs[j] + tol,
              $sformatf("system %0d x%0d = %.3f expected %.3f", t, j, got, xs[j]));
      end
      // max_iter stop on the same system
      run(rb, nn, 0, 2, '0, '0, cycles);
      check(iters == 2 && !converged, "max_iter stop");
      // fix variable 0 to its rounded solution, check the rest
      begin
        logic [NV-1:0] fm;
        xval_t [NV-1:0] fv;
        int fx;
        fx = int'(xs[0]) + 1;
        fm = '0; fm[0] = 1'b1; fv = '0; fv[0] = xval_t'(fx * 256);
        for (int i = 0; i < nn; i++) begin
          for (int j = 0; j < nn; j++) A[i][j] = real'(C[i][j]);
          bvec[i] = real'(D[i]);
        end
        // reduced system: rows 1..nn-1, variables 1..nn-1
        for (int i = 1; i < nn; i++) begin
          for (int j = 1; j < nn; j++) A[i-1][j-1] = real'(C[i][j]);
          bvec[i-1] = real'(D[i]) - real'(C[i][0]) * fx;
        end
        gauss(nn - 1);
        run(rb, nn, 48 * nn, 200, fm, fv, cycles);
        check(x_out[0] == xval_t'(fx * 256), "fixed variable keeps its value");
        check(converged, "fixed system converged");
        for (int j = 1; j < nn; j++) begin
          real got, tol, ex;
          ex = xs[j-1];
          if (ex < 0.0) ex = 0.0;
          got = real'(x_out[j]) / 256.0;
          tol = ex * 0.08 + 0.3;
          check(got >= ex - tol && got <= ex + tol,
                $sformatf("fixed system x%0d = %.3f expected %.3f", j, got, ex));
        end
      end
    end
    check(solved >= 10, "enough random systems");
    // n = 0 finishes at once
    n = '0; start = 1;
    @(negedge clk);
    start = 0;
    check(done && !busy, "n = 0 finishes in one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
