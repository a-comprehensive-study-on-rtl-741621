// tb_bb_engine: checks the branch-and-bound engine together with the SLE
// engine it reuses, on a full-size PIM array and result calculator.
// - Worked example: 3 X1 + X2 <= 10, X1 + 2 X2 <= 8, maximise X1 + X2. The
//   relaxed optimum is (2.4, 2.8); the floor gives the first incumbent
//   (2, 2), branching on X2 finds (2, 3) with cost 5, the integer optimum.
// - Integral root: X1 + X2 <= 5, 2 X1 + X2 <= 7 has root (2, 3); it must be
//   returned directly without any node.
// - Random dense problems (n = 2..4, m = n..n+3, maximise and minimise): a
//   returned solution must be integral, exactly feasible (checked row by row
//   in the testbench), its cost must equal R . X, and for maximisation it may
//   not beat the brute-force integer optimum. The search is a heuristic (the
//   children are solved as equalities by Jacobi), so how often it finds a
//   solution and the optimum is reported, and at least half the problems
//   must end with a solution. Over the run the engine must have branched,
//   pruned and rejected infeasible candidates.
module tb_bb_engine;
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

  // SLE engine shared by the testbench (root solve) and the B&B engine
  logic tb_sle_start, sle_start, sle_busy, sle_done, sle_conv;
  logic [NV-1:0] sle_fix_mask; xval_t [NV-1:0] sle_fix_val, sle_x;
  logic [15:0] sle_iters; logic [X_W+3:0] sle_l1;
  logic s_req_valid, b_req_valid; pim_req_t s_req, b_req;
  row_t base; var_t n; logic [ROW_AW:0] m;

  sle_engine u_sle (.clk, .rst_n, .start(tb_sle_start | sle_start), .base(base), .n(n),
                    .err(xval_t'(48 * int'(n))), .max_iter(16'd100), .x_init('0),
                    .fix_mask(sle_fix_mask), .fix_val(sle_fix_val), .busy(sle_busy), .done(sle_done),
                    .x_out(sle_x), .iters(sle_iters), .converged(sle_conv), .l1(sle_l1),
                    .pim_req_valid(s_req_valid), .pim_req(s_req), .pim_rsp_valid(pim_rsp_valid),
                    .pim_rsp(pim_rsp), .rc_valid(rc_valid), .rc_d(rc_d), .rc_sum(rc_sum),
                    .rc_div(rc_div), .rc_tag(rc_tag), .rc_out_valid(rc_out_valid),
                    .rc_q_x(rc_q_x), .rc_out_tag(rc_out_tag));

  logic start, busy, done, found, maximize;
  row_t cost_row; xval_t [NV-1:0] x_root, x_best; sum_t cost_best;
  logic [15:0] n_nodes, n_branched, n_pruned, n_infeasible, n_overflow;

  bb_engine dut (.clk, .rst_n, .start, .base, .m, .n, .cost_row, .maximize, .x_root,
                 .busy, .done, .found, .x_best, .cost_best, .n_nodes, .n_branched,
                 .n_pruned, .n_infeasible, .n_overflow, .sle_start, .sle_fix_mask,
                 .sle_fix_val, .sle_done, .sle_x, .pim_req_valid(b_req_valid),
                 .pim_req(b_req), .pim_rsp_valid(pim_rsp_valid), .pim_rsp(pim_rsp));

  assign pim_req_valid = s_req_valid | b_req_valid;
  assign pim_req       = s_req_valid ? s_req : b_req;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n && s_req_valid && b_req_valid) check(1'b0, "PIM requested by both engines");

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int C [8][NV];
  int D [8];
  int R [NV];
  int tot_branched = 0, tot_pruned = 0, tot_infeasible = 0, tot_found = 0, tot_opt = 0, tot_max = 0;

  task automatic put_row(input int r, input int coefs [NV], input int nn, input int dd);
    wr_en = 1; wr_row = row_t'(r); wr_data = '0;
    for (int j = 0; j < nn; j++) wr_data[j] = coef_t'(coefs[j]);
    wr_data[D_SLOT] = coef_t'(dd);
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic bit feasible(input int x [NV], input int nn, input int mm);
    for (int i = 0; i < mm; i++) begin
      int s;
      s = 0;
      for (int j = 0; j < nn; j++) s += C[i][j] * x[j];
      if (s > D[i]) return 0;
    end
    return 1;
  endfunction

  // brute-force integer optimum over the box 0..15
  function automatic int brute(input int nn, input int mm, input bit mx);
    int best, x [NV], total;
    best = mx ? -1 : 1 << 30;
    for (int j = 0; j < NV; j++) x[j] = 0;
    total = 1;
    for (int j = 0; j < nn; j++) total *= 16;
    for (int p = 0; p < total; p++) begin
      int q, c;
      q = p;
      for (int j = 0; j < nn; j++) begin x[j] = q % 16; q /= 16; end
      if (!feasible(x, nn, mm)) continue;
      c = 0;
      for (int j = 0; j < nn; j++) c += R[j] * x[j];
      if (mx ? (c > best) : (c < best)) best = c;
    end
    return best;
  endfunction

  task automatic run_bb(input int rb, input int nn, input int mm, input bit mx, input string name,
                       output int best_model);
    int xi [NV];
    for (int i = 0; i < mm; i++) begin
      int row [NV];
      for (int j = 0; j < NV; j++) row[j] = C[i][j];
      put_row(rb + i, row, nn, D[i]);
    end
    put_row(rb + 8, R, nn, 0);
    base = row_t'(rb); n = var_t'(nn); m = (ROW_AW+1)'(mm); cost_row = row_t'(rb + 8);
    maximize = mx;
    // root relaxation on the SLE engine
    tb_sle_start = 1;
    @(negedge clk);
    tb_sle_start = 0;
    while (!sle_done) @(negedge clk);
    x_root = sle_x;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    best_model = brute(nn, mm, mx);
    tot_branched += n_branched; tot_pruned += n_pruned; tot_infeasible += n_infeasible;
    check(n_overflow == 0, $sformatf("%s: no queue overflow", name));
    if (found) begin
      longint c;
      tot_found++;
      c = 0;
      for (int j = 0; j < NV; j++) begin
        check(x_best[j][X_FRAC-1:0] == '0, $sformatf("%s: x%0d integral", name, j));
        xi[j] = int'(x_best[j] >> X_FRAC);
        if (j >= nn) check(xi[j] == 0, $sformatf("%s: unused variable zero", name));
        c += longint'(R[j]) * longint'(x_best[j]);
      end
      check(feasible(xi, nn, mm), $sformatf("%s: solution feasible", name));
      check(longint'(cost_best) == c, $sformatf("%s: cost %0d equals R.X %0d", name, cost_best, c));
      if (mx) begin
        check(c <= longint'(best_model) * 256, $sformatf("%s: not above the optimum", name));
        tot_max++;
        if (c == longint'(best_model) * 256) tot_opt++;
      end
    end
  endtask

  initial begin
    int bm;
    rst_n = 0; start = 0; tb_sle_start = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    base = '0; n = '0; m = '0; cost_row = '0; maximize = 1; x_root = '0;
    for (int i = 0; i < 8; i++) begin for (int j = 0; j < NV; j++) C[i][j] = 0; D[i] = 0; end
    for (int j = 0; j < NV; j++) R[j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // worked example
    C[0][0] = 3; C[0][1] = 1; D[0] = 10;
    C[1][0] = 1; C[1][1] = 2; D[1] = 8;
    R[0] = 1; R[1] = 1;
    run_bb(16, 2, 2, 1'b1, "example", bm);
    check(found && x_best[0] == xval_t'(2 * 256) && x_best[1] == xval_t'(3 * 256) && cost_best == 5 * 256,
          $sformatf("example: X = (%0d, %0d)/256 cost %0d", x_best[0], x_best[1], cost_best));
    check(n_branched > 0 && n_nodes > 0, "example branched");
    // integral root
    C[0][0] = 1; C[0][1] = 1; D[0] = 5;
    C[1][0] = 2; C[1][1] = 1; D[1] = 7;
    R[0] = 2; R[1] = 3;
    run_bb(40, 2, 2, 1'b1, "integral root", bm);
    check(found && x_best[0] == xval_t'(2 * 256) && x_best[1] == xval_t'(3 * 256) && n_nodes == 0,
          $sformatf("integral root: X = (%0d, %0d)/256, nodes %0d", x_best[0], x_best[1], n_nodes));
    // random problems
    for (int t = 0; t < 30; t++) begin
      int nn, mm;
      nn = $urandom_range(2, 4);
      mm = nn + $urandom_range(0, 3);
      for (int i = 0; i < 8; i++) for (int j = 0; j < NV; j++) C[i][j] = 0;
      for (int i = 0; i < mm; i++) begin
        int off;
        off = 0;
        for (int j = 0; j < nn; j++) begin
          C[i][j] = (i < nn && i == j) ? 0 : $urandom_range(0, 3);
          off += C[i][j];
        end
        if (i < nn) C[i][i] = off + $urandom_range(2, 6);
        D[i] = $urandom_range(10, 12 * (off + 4));
      end
      for (int j = 0; j < NV; j++) R[j] = (j < nn) ? $urandom_range(1, 9) : 0;
      run_bb($urandom_range(60, 200), nn, mm, (t % 5 != 4), $sformatf("random %0d", t), bm);
    end
    $display("B&B: found %0d, optimal %0d of %0d maximisations, branched %0d, pruned %0d, infeasible %0d",
             tot_found, tot_opt, tot_max, tot_branched, tot_pruned, tot_infeasible);
    check(tot_branched > 0, "branching happened");
    check(tot_pruned > 0, "pruning happened");
    check(tot_infeasible > 0, "infeasible candidates rejected");
    check(tot_found >= 16, "solutions found for at least half the problems");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
