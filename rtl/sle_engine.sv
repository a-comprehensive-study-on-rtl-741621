// sle_engine: Jacobi iterative solver for C*X = D on the PIM array.
//
// Each iteration visits the n constraint rows base .. base+n-1. For row i it
// sends one PIM request with X_j (Iter1 queue) on every slot j != i, the
// integer 1 on slot i and on the D slot, and includes slots j < n, j != i in
// the adder reduction; the response therefore carries
// sum = sum_{j != i} C_ij*X_j, C_ii and D_i. result_calc then forms
// X_i = (D_i - sum) / C_ii and the result is written into the Iter2 queue.
// Rows are issued one per cycle, so the PIM, Sub/Div and queue-write stages
// overlap as a pipeline. When all n values are in Iter2, the copy stage
// copies Iter2 to Iter1 and forms the L1 norm sum_j |X2_j - X1_j| in the same
// cycle; the solver stops when the norm is at most err or after max_iter
// iterations.
//
// For reuse by the branch-and-bound engine, variables with fix_mask set are
// not solved: their value is fix_val (a branching constraint X_v = value kept
// near memory instead of being added to the array).
//
// Timing: start is a one-cycle pulse sampled in IDLE; done pulses for one
// cycle and x_out, iters, converged, l1 then hold until the next start. One
// iteration takes n + PIM_LAT + 3 cycles. The five stages and the Iter1/Iter2
// queues follow the source; the pipelining and the fixed-variable input are
// this design's.
module sle_engine
  import spark_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  row_t              base,
  input  var_t              n,
  input  xval_t             err,
  input  logic [15:0]       max_iter,
  input  xval_t [NV-1:0]    x_init,
  input  logic  [NV-1:0]    fix_mask,
  input  xval_t [NV-1:0]    fix_val,
  output logic              busy,
  output logic              done,
  output xval_t [NV-1:0]    x_out,
  output logic [15:0]       iters,
  output logic              converged,
  output logic [X_W+3:0]    l1,
  // shared PIM array
  output logic              pim_req_valid,
  output pim_req_t          pim_req,
  input  logic              pim_rsp_valid,
  input  pim_rsp_t          pim_rsp,
  // shared Sub/Div
  output logic              rc_valid,
  output coef_t             rc_d,
  output sum_t              rc_sum,
  output coef_t             rc_div,
  output logic [7:0]        rc_tag,
  input  logic              rc_out_valid,
  input  xval_t             rc_q_x,
  input  logic [7:0]        rc_out_tag
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_NORM} state_e;
  state_e state;

  xval_t [NV-1:0] x1, x2;
  logic  [NV-1:0] fmask;
  xval_t [NV-1:0] fval;
  row_t           base_r;
  var_t           n_r;
  xval_t          err_r;
  logic [15:0]    max_r;
  logic [VAR_W:0] issue_i, wr_cnt;
  logic           issue_fixed, issue_go;

  assign busy  = (state != S_IDLE);
  assign x_out = x1;

  // ---- stage 1 request
  always_comb begin
    issue_go    = (state == S_RUN) && (issue_i < (VAR_W+1)'(n_r));
    issue_fixed = issue_go && fmask[issue_i[VAR_W-1:0]];
    pim_req_valid = issue_go && !issue_fixed;
    pim_req.row  = base_r + row_t'(issue_i);
    pim_req.tag  = 8'(issue_i);
    for (int j = 0; j < int'(SLOTS); j++) begin
      if (j == int'(D_SLOT) || j == int'(issue_i)) pim_req.xv[j] = X_RAW;
      else if (j < int'(n_r))                      pim_req.xv[j] = x1[j];
      else                                         pim_req.xv[j] = '0;
      pim_req.incl[j] = (j < int'(n_r)) && (j != int'(issue_i));
    end
  end

  // ---- stage 3 Sub/Div request, straight from the PIM response
  always_comb begin
    rc_valid = (state == S_RUN) && pim_rsp_valid;
    rc_d     = coef_t'(pim_rsp.prod[D_SLOT]);
    rc_sum   = pim_rsp.sum;
    rc_div   = coef_t'(pim_rsp.prod[pim_rsp.tag[VAR_W-1:0]]);
    rc_tag   = pim_rsp.tag;
  end

  // ---- stage 5 L1 norm
  logic [X_W+3:0] norm_c;
  always_comb begin
    norm_c = '0;
    for (int j = 0; j < int'(NV); j++)
      if (j < int'(n_r))
        norm_c += (x2[j] > x1[j]) ? (X_W+4)'(x2[j] - x1[j]) : (X_W+4)'(x1[j] - x2[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      x1        <= '0;
      x2        <= '0;
      fmask     <= '0;
      fval      <= '0;
      base_r    <= '0;
      n_r       <= '0;
      err_r     <= '0;
      max_r     <= '0;
      issue_i   <= '0;
      wr_cnt    <= '0;
      iters     <= '0;
      converged <= 1'b0;
      l1        <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base_r  <= base;
          n_r     <= n;
          err_r   <= err;
          max_r   <= (max_iter == 0) ? 16'd1 : max_iter;
          fmask   <= fix_mask;
          fval    <= fix_val;
          for (int j = 0; j < int'(NV); j++) x1[j] <= fix_mask[j] ? fix_val[j] : x_init[j];
          issue_i <= '0;
          wr_cnt  <= '0;
          iters   <= '0;
          converged <= 1'b0;
          state   <= (n == 0) ? S_IDLE : S_RUN;
          done    <= (n == 0);
        end
        S_RUN: begin
          logic [VAR_W:0] inc;
          inc = '0;
          if (issue_go) issue_i <= issue_i + 1'b1;
          if (issue_fixed) begin
            x2[issue_i[VAR_W-1:0]] <= fval[issue_i[VAR_W-1:0]];
            inc = inc + 1'b1;
          end
          if (rc_out_valid) begin
            x2[rc_out_tag[VAR_W-1:0]] <= rc_q_x;
            inc = inc + 1'b1;
          end
          wr_cnt <= wr_cnt + inc;
          if (wr_cnt == (VAR_W+1)'(n_r)) state <= S_NORM;
        end
        S_NORM: begin
          // Copy Iter2 -> Iter1 and test the L1 norm
          x1    <= x2;
          l1    <= norm_c;
          iters <= iters + 1'b1;
          if (norm_c <= (X_W+4)'(err_r) || iters + 1'b1 >= max_r) begin
            converged <= (norm_c <= (X_W+4)'(err_r));
            state     <= S_IDLE;
            done      <= 1'b1;
          end else begin
            issue_i <= '0;
            wr_cnt  <= '0;
            state   <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
