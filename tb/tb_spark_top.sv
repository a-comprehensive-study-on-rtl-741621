// tb_spark_top: end-to-end test of the accelerator at its default size
// (16 banks of 256 x 256, 1024-entry node queue, 256-entry PS and C arrays).
// A program of cache fills and VFC / VSASLE / VBB instructions is run:
//   - cache mode: rows written through the fill port read back unchanged,
//     and an instruction issued in cache mode is rejected;
//   - mode switch to compute mode through the control register;
//   - sparse ILP (the investment example): VFC sets VS, VSASLE runs the SA
//     engine (X = (5, 0.67), cost 23.3), VBB is a NOP;
//   - dense ILP: VFC clears VS, VSASLE runs Jacobi to convergence, VBB
//     branches to the integer optimum (2, 3);
//   - Jacobi stopped by its iteration cap instead of convergence;
//   - random ILPs through VFC, VSASLE and VBB: when VFC finds them dense the
//     integer solution must be exactly feasible and its cost R . X.
// Each mechanism is counted; one that never happened is a failure.
module tb_spark_top;
  import spark_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, cfg_we, cfg_compute, compute_mode;
  logic fill_we; row_t fill_row; coef_t [SLOTS-1:0] fill_data;
  logic rd_valid, rd_rvalid; row_t rd_row; coef_t [SLOTS-1:0] rd_data;
  logic vx_we; xval_t [NV-1:0] vx_wdata;
  logic instr_valid, instr_ready, instr_maximize, instr_done, instr_reject;
  op_e instr_op; row_t instr_base, instr_cost_row; logic [ROW_AW:0] instr_m; var_t instr_n;
  xval_t instr_err; logic [15:0] instr_max_iter;
  logic vs_sparse, vb_found, sle_converged, c_array_overflow, ps_array_overflow;
  xval_t [NV-1:0] vx, vb; sum_t vc;
  logic [31:0] ccn, div_lut_hits;
  logic [15:0] sle_iters, bb_nodes, bb_branched, bb_pruned, bb_infeasible, bb_overflow, ps_count;
  logic [X_W+3:0] sle_l1_norm;

  spark_top dut (.*);

  // mechanism counters
  int m_cache_read = 0, m_reject = 0, m_mode_switch = 0, m_sparse = 0, m_dense = 0;
  int m_sa = 0, m_sle_conv = 0, m_sle_cap = 0, m_vbb_nop = 0, m_bb_branch = 0;
  int m_bb_prune = 0, m_bb_infeasible = 0, m_bb_found = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int C [8][NV];
  int D [8];
  int R [NV];

  task automatic fill(input int r, input int coefs [NV], input int dd);
    fill_we = 1; fill_row = row_t'(r); fill_data = '0;
    for (int j = 0; j < NV; j++) fill_data[j] = coef_t'(coefs[j]);
    fill_data[D_SLOT] = coef_t'(dd);
    @(negedge clk);
    fill_we = 0;
  endtask

  task automatic load(input int rb, input int mm, input int nn);
    for (int i = 0; i < mm; i++) begin
      int row [NV];
      for (int j = 0; j < NV; j++) row[j] = (j < nn) ? C[i][j] : 0;
      fill(rb + i, row, D[i]);
    end
    fill(rb + 8, R, 0);
  endtask

  task automatic issue(input op_e op, input int rb, input int mm, input int nn,
                       input int err, input int maxit, output int cycles);
    int t;
    while (!instr_ready) @(negedge clk);
    instr_valid = 1; instr_op = op; instr_base = row_t'(rb); instr_m = (ROW_AW+1)'(mm);
    instr_n = var_t'(nn); instr_cost_row = row_t'(rb + 8); instr_err = xval_t'(err);
    instr_max_iter = 16'(maxit); instr_maximize = 1'b1;
    @(negedge clk);
    instr_valid = 0;
    t = 0;
    while (!instr_done) begin
      @(negedge clk);
      t++;
      check(instr_done || !instr_ready, "not ready while an instruction runs");
    end
    cycles = t;
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

  // dense flow: VFC, VSASLE (Jacobi), VBB; checks VB
  task automatic dense_flow(input int rb, input int mm, input int nn, input string name);
    int cyc, xi [NV];
    load(rb, mm, nn);
    issue(OP_VFC, rb, mm, nn, 0, 0, cyc);
    if (vs_sparse) begin
      // every variable happened to get a cardinality row: the SA path runs
      m_sparse++;
      issue(OP_VSASLE, rb, mm, nn, 0, 0, cyc);
      if (ps_count != 0) m_sa++;
      return;
    end
    m_dense++;
    issue(OP_VSASLE, rb, mm, nn, 48 * nn, 100, cyc);
    if (sle_converged) m_sle_conv++;
    issue(OP_VBB, rb, mm, nn, 48 * nn, 100, cyc);
    if (bb_branched != 0) m_bb_branch++;
    if (bb_pruned != 0) m_bb_prune++;
    if (bb_infeasible != 0) m_bb_infeasible++;
    if (vb_found) begin
      longint c;
      m_bb_found++;
      c = 0;
      for (int j = 0; j < NV; j++) begin
        xi[j] = int'(vb[j] >> X_FRAC);
        check(vb[j][X_FRAC-1:0] == '0, $sformatf("%s: VB integral", name));
        c += longint'(R[j]) * longint'(vb[j]);
      end
      check(feasible(xi, nn, mm), $sformatf("%s: VB feasible", name));
      check(longint'(vc) == c, $sformatf("%s: VC = R.VB", name));
    end
  endtask

  initial begin
    int cyc;
    rst_n = 0; cfg_we = 0; cfg_compute = 0; fill_we = 0; fill_row = '0; fill_data = '0;
    rd_valid = 0; rd_row = '0; vx_we = 0; vx_wdata = '0; instr_valid = 0; instr_op = OP_VFC;
    instr_base = '0; instr_m = '0; instr_n = '0; instr_cost_row = '0; instr_err = '0;
    instr_max_iter = '0; instr_maximize = 1'b1;
    for (int i = 0; i < 8; i++) begin for (int j = 0; j < NV; j++) C[i][j] = 0; D[i] = 0; end
    for (int j = 0; j < NV; j++) R[j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- cache mode: fill and read back
    check(!compute_mode && !instr_ready, "starts in cache mode");
    for (int t = 0; t < 8; t++) begin
      int row [NV], dd, r;
      r = 100 + t;
      for (int j = 0; j < NV; j++) row[j] = $urandom_range(0, 65535) - 32768;
      dd = $urandom_range(0, 65535) - 32768;
      fill(r, row, dd);
      rd_valid = 1; rd_row = row_t'(r);
      @(negedge clk);
      rd_valid = 0;
      repeat (PIM_LAT - 1) @(negedge clk);
      check(rd_rvalid, "cache read returns after PIM_LAT cycles");
      begin
        bit ok;
        ok = 1;
        for (int j = 0; j < NV; j++) if (rd_data[j] != coef_t'(row[j])) ok = 0;
        if (rd_data[D_SLOT] != coef_t'(dd)) ok = 0;
        check(ok, "cache read data");
        if (ok && rd_rvalid) m_cache_read++;
      end
    end
    // ---- instruction in cache mode is rejected
    instr_valid = 1; instr_op = OP_VFC;
    @(negedge clk);
    instr_valid = 0;
    check(instr_reject, "instruction rejected in cache mode");
    if (instr_reject) m_reject++;
    // ---- switch to compute mode
    cfg_we = 1; cfg_compute = 1;
    @(negedge clk);
    cfg_we = 0;
    check(compute_mode && instr_ready, "compute mode");
    if (compute_mode) m_mode_switch++;

    // ---- sparse ILP: X1 <= 5, X2 <= 3, 2 X1 + 3 X2 <= 12, max 4 X1 + 5 X2
    C[0][0] = 1; D[0] = 5;
    C[1][1] = 1; D[1] = 3;
    C[2][0] = 2; C[2][1] = 3; D[2] = 12;
    R[0] = 4; R[1] = 5;
    load(0, 3, 2);
    issue(OP_VFC, 0, 3, 2, 0, 0, cyc);
    check(vs_sparse && ccn == 2, "investment example is sparse");
    if (vs_sparse) m_sparse++;
    issue(OP_VSASLE, 0, 3, 2, 0, 0, cyc);
    check(vx[0] == xval_t'(5 * 256) && vx[1] > xval_t'(150) && vx[1] < xval_t'(190),
          $sformatf("SA result X = (%0d, %0d)/256", vx[0], vx[1]));
    check(vc > sum_t'(5700) && vc < sum_t'(6250), $sformatf("SA cost %0d", vc));
    check(ps_count == 2, "two potential solutions");
    if (ps_count != 0) m_sa++;
    begin
      xval_t [NV-1:0] vb_before;
      vb_before = vb;
      issue(OP_VBB, 0, 3, 2, 0, 0, cyc);
      check(cyc <= 2 && vb == vb_before, "VBB is a NOP on a sparse ILP");
      if (cyc <= 2) m_vbb_nop++;
    end

    // ---- dense ILP: 3 X1 + X2 <= 10, X1 + 2 X2 <= 8, max X1 + X2
    for (int i = 0; i < 8; i++) begin for (int j = 0; j < NV; j++) C[i][j] = 0; D[i] = 0; end
    for (int j = 0; j < NV; j++) R[j] = 0;
    C[0][0] = 3; C[0][1] = 1; D[0] = 10;
    C[1][0] = 1; C[1][1] = 2; D[1] = 8;
    R[0] = 1; R[1] = 1;
    vx_we = 1; vx_wdata = '0;
    @(negedge clk);
    vx_we = 0;
    dense_flow(20, 2, 2, "example");
    check(!vs_sparse, "dense example detected as dense");
    check(vb_found && vb[0] == xval_t'(2 * 256) && vb[1] == xval_t'(3 * 256) && vc == 5 * 256,
          $sformatf("dense example VB = (%0d, %0d)/256", vb[0], vb[1]));
    // Jacobi stopped by the iteration cap
    vx_we = 1; vx_wdata = '0;
    @(negedge clk);
    vx_we = 0;
    issue(OP_VSASLE, 20, 2, 2, 0, 2, cyc);
    check(sle_iters == 2 && !sle_converged, "Jacobi stopped at max_iter");
    if (sle_iters == 2 && !sle_converged) m_sle_cap++;

    // ---- random dense ILPs
    for (int t = 0; t < 12; t++) begin
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
      vx_we = 1; vx_wdata = '0;
      @(negedge clk);
      vx_we = 0;
      dense_flow(40 + 10 * t, mm, nn, $sformatf("random %0d", t));
    end
    check(c_array_overflow == 0 && ps_array_overflow == 0 && bb_overflow == 0, "no overflow");

    $display("mechanisms: cache read %0d, reject %0d, mode switch %0d, sparse %0d, dense %0d",
             m_cache_read, m_reject, m_mode_switch, m_sparse, m_dense);
    $display("  SA %0d, Jacobi converged %0d, Jacobi capped %0d, VBB NOP %0d", m_sa, m_sle_conv, m_sle_cap, m_vbb_nop);
    $display("  B&B branched %0d, pruned %0d, infeasible %0d, found %0d, divider table hits %0d",
             m_bb_branch, m_bb_prune, m_bb_infeasible, m_bb_found, div_lut_hits);
    check(m_cache_read > 0, "mechanism: cache-mode read");
    check(m_reject > 0, "mechanism: compute-mode reject");
    check(m_mode_switch > 0, "mechanism: mode switch");
    check(m_sparse > 0, "mechanism: sparse detection");
    check(m_dense > 0, "mechanism: dense detection");
    check(m_sa > 0, "mechanism: SA path");
    check(m_sle_conv > 0, "mechanism: Jacobi convergence");
    check(m_sle_cap > 0, "mechanism: Jacobi iteration cap");
    check(m_vbb_nop > 0, "mechanism: VBB NOP when sparse");
    check(m_bb_branch > 0, "mechanism: B&B branching");
    check(m_bb_prune > 0, "mechanism: B&B pruning");
    check(m_bb_infeasible > 0, "mechanism: B&B infeasible candidate");
    check(m_bb_found > 0, "mechanism: B&B integer solution");
    check(div_lut_hits > 0, "mechanism: divider table correction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
