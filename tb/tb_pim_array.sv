// tb_pim_array: checks the compute-mode L1 array at full size (16 banks of
// 256 x 256). Random signed rows are written, then random requests (random
// X per slot, random include mask) are issued back to back, one per cycle.
// Every response must arrive exactly PIM_LAT cycles after its request, in
// order, with its tag, with prod[s] = C[s]*X[s] for every slot and sum equal
// to the sum of the included products. Rows rewritten while requests are in
// flight must be seen by later requests.
module tb_pim_array;
  import spark_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic wr_en;
  row_t wr_row;
  coef_t [SLOTS-1:0] wr_data;
  logic req_valid;
  pim_req_t req;
  logic rsp_valid;
  pim_rsp_t rsp;

  pim_array dut (.*);

  coef_t model [ROWS][SLOTS];
  pim_req_t inflight [$];
  int issue_cyc [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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

  // response checker
  always @(negedge clk) begin
    if (rst_n && rsp_valid) begin
      pim_req_t q;
      int ic;
      longint s;
      bit ok;
      if (inflight.size() == 0) begin
        check(1'b0, "response without request");
      end else begin
        q = inflight.pop_front();
        ic = issue_cyc.pop_front();
        check(cyc - ic == PIM_LAT, $sformatf("latency %0d", cyc - ic));
        check(rsp.tag == q.tag, "tag");
        ok = 1; s = 0;
        for (int k = 0; k < SLOTS; k++) begin
          longint p;
          p = longint'(model[q.row][k]) * longint'(q.xv[k]);
          if (longint'(rsp.prod[k]) != p) ok = 0;
          if (q.incl[k]) s += p;
        end
        check(ok, $sformatf("products row %0d", q.row));
        check(longint'(rsp.sum) == s, $sformatf("sum row %0d got %0d expected %0d", q.row, rsp.sum, s));
      end
    end
  end

  function automatic coef_t rnd_coef();
    int r;
    r = $urandom_range(0, 9);
    if (r == 0) return coef_t'(0);
    if (r == 1) return -16'sd32768;
    if (r < 5) return coef_t'($urandom_range(0, 40)) - coef_t'(20);
    return coef_t'($urandom);
  endfunction

  initial begin
    rst_n = 0; wr_en = 0; wr_row = '0; wr_data = '0; req_valid = 0; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      wr_en = 1; wr_row = row_t'(r);
      for (int k = 0; k < SLOTS; k++) begin
        wr_data[k] = rnd_coef(); model[r][k] = wr_data[k];
      end
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      int r;
      r = $urandom_range(0, ROWS - 1);
      // the row written this cycle becomes visible to requests from the next cycle
      if (t % 7 == 3) begin
        wr_en = 1; wr_row = row_t'($urandom_range(0, ROWS - 1));
        for (int k = 0; k < SLOTS; k++) wr_data[k] = rnd_coef();
      end else wr_en = 0;
      req_valid = ($urandom_range(0, 3) != 0);
      req.row = row_t'(r);
      for (int k = 0; k < SLOTS; k++)
        req.xv[k] = (t < 50) ? X_RAW : (t < 100) ? xval_t'('1) : xval_t'($urandom);
      req.incl = (t < 100) ? '1 : 16'($urandom);
      req.tag = 8'(t);
      if (wr_en && wr_row == req.row) req_valid = 0;
      if (req_valid) begin
        inflight.push_back(req);
        issue_cyc.push_back(cyc);
      end
      @(negedge clk);
      if (wr_en) for (int k = 0; k < SLOTS; k++) model[wr_row][k] = wr_data[k];
    end
    req_valid = 0; wr_en = 0;
    repeat (PIM_LAT + 2) @(negedge clk);
    check(inflight.size() == 0, "all responses returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
