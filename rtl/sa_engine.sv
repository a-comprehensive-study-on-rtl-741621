// sa_engine: sparsity-aware (SA) engine for sparse ILPs (VSASLE when sparse).
//
// Inputs are the CC array (an upper value CC_j for every variable) and the C
// array (row addresses of the general constraints) built by the FC engine.
// For every general constraint row i and every variable k with C_ik != 0 a
// potential solution (PS) is formed: all variables at their CC values except
// X_k = (D_i - sum_{j != k} C_ij*CC_j) / C_ik, i.e. the point where the
// constraint plane meets the n-1 cardinality planes (POT_SOLN). X_k is
// clamped to [0, CC_k] so a PS never breaks its own cardinality bound (this
// design's choice).
//   Stage 1, PIM + s-a: a plain read of row i (C_ik and D_i), then one PIM
//     MAC of row i with X = CC giving every product C_ij*CC_j and their sum.
//   Stage 2, Sub + Div: for each k, (D_i - (sum - C_ik*CC_k)) / C_ik on the
//     shared result_calc, one per cycle; (k, value) goes into the PS array.
//   Stage 3, PIM + s-a + AR: for each PS a PIM MAC of the cost row R with the
//     PS as X gives its cost into the PC array (POT_COSTS).
//   Stage 4, MAX: the largest cost and its PS are the answer (Cost = max PC).
// With no general constraint the CC vector itself is the only PS.
//
// Timing: start pulse in IDLE; done pulses once and x_out, cost, ps_cnt hold
// until the next start. Every PIM access waits for its response (PIM_LAT
// cycles). The algorithm and stage split follow the source; storing a PS as
// (k, value) instead of a full vector, and taking the maximum (the source's
// example maximises) are this design's choices. PS entries past PS_DEPTH are
// dropped and counted in ps_overflow. The PC array can be read through
// pc_idx / pc_rdata.
module sa_engine
  import spark_pkg::*;
#(
  parameter int unsigned PS_DEPTH = 256,
  parameter int unsigned CQ_DEPTH = 256
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  var_t                         n,
  input  row_t                         cost_row,
  input  xval_t [NV-1:0]               cc_val,
  input  logic [$clog2(CQ_DEPTH):0]    cn,
  output logic [$clog2(CQ_DEPTH)-1:0]  carr_idx,
  input  row_t                         carr_row,
  output logic                         busy,
  output logic                         done,
  output xval_t [NV-1:0]               x_out,
  output sum_t                         cost,
  output logic [$clog2(PS_DEPTH):0]    ps_cnt,
  output logic                         ps_overflow,
  input  logic [$clog2(PS_DEPTH)-1:0]  pc_idx,     // PC array read port
  output sum_t                         pc_rdata,
  // shared PIM array
  output logic                         pim_req_valid,
  output pim_req_t                     pim_req,
  input  logic                         pim_rsp_valid,
  input  pim_rsp_t                     pim_rsp,
  // shared Sub/Div
  output logic                         rc_valid,
  output coef_t                        rc_d,
  output sum_t                         rc_sum,
  output coef_t                        rc_div,
  output logic [7:0]                   rc_tag,
  input  logic                         rc_out_valid,
  input  xval_t                        rc_q_x,
  input  logic [7:0]                   rc_out_tag
);

  localparam int unsigned PW = $clog2(PS_DEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_RAW, S_RAW_W, S_MAC, S_MAC_W, S_DIV, S_DIV_W,
    S_COST, S_COST_W, S_DONE
  } state_e;
  state_e state;

  var_t            n_r;
  row_t            cost_r;
  xval_t [NV-1:0]  cc;
  logic [$clog2(CQ_DEPTH):0] cn_r, ci;
  coef_t [NV-1:0]  craw;
  coef_t           d_r;
  prod_t [NV-1:0]  p_r;
  sum_t            s_r;
  logic [VAR_W:0]  k;
  var_t            ps_k [PS_DEPTH];
  xval_t           ps_v [PS_DEPTH];
  sum_t            pc   [PS_DEPTH];
  logic [PW:0]     pi;
  logic [PW-1:0]   best_i;
  sum_t            best_c;

  assign busy     = (state != S_IDLE);
  assign pc_rdata = pc[pc_idx];
  assign carr_idx = ci[$clog2(CQ_DEPTH)-1:0];

  // PIM request for the current state
  always_comb begin
    pim_req_valid = (state == S_RAW) || (state == S_MAC) || (state == S_COST);
    pim_req.tag   = '0;
    pim_req.row   = (state == S_COST) ? cost_r : carr_row;
    for (int j = 0; j < int'(SLOTS); j++) begin
      pim_req.incl[j] = (state != S_RAW) && (j < int'(n_r));
      if (state == S_RAW)             pim_req.xv[j] = X_RAW;
      else if (j >= int'(n_r))        pim_req.xv[j] = '0;
      else if (state == S_COST && ps_k[pi[PW-1:0]] == var_t'(j) && ps_cnt != 0)
                                      pim_req.xv[j] = ps_v[pi[PW-1:0]];
      else                            pim_req.xv[j] = cc[j];
    end
  end

  // Stage 2 Sub/Div request
  always_comb begin
    rc_valid = (state == S_DIV) && (k < (VAR_W+1)'(n_r)) && (craw[k[VAR_W-1:0]] != '0);
    rc_d     = d_r;
    rc_sum   = s_r - SUM_W'(p_r[k[VAR_W-1:0]]);
    rc_div   = craw[k[VAR_W-1:0]];
    rc_tag   = 8'(k);
  end

  // PS array write (stage 2 result)
  always_ff @(posedge clk) begin
    if (rc_out_valid && busy && ps_cnt < (PW+1)'(PS_DEPTH)) begin
      ps_k[ps_cnt[PW-1:0]] <= var_t'(rc_out_tag);
      ps_v[ps_cnt[PW-1:0]] <= (rc_q_x > cc[rc_out_tag[VAR_W-1:0]]) ? cc[rc_out_tag[VAR_W-1:0]] : rc_q_x;
    end
    if (state == S_COST_W && pim_rsp_valid && pi < (PW+1)'(PS_DEPTH))
      pc[pi[PW-1:0]] <= pim_rsp.sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      n_r         <= '0;
      cost_r      <= '0;
      cc          <= '0;
      cn_r        <= '0;
      ci          <= '0;
      craw        <= '0;
      d_r         <= '0;
      p_r         <= '0;
      s_r         <= '0;
      k           <= '0;
      pi          <= '0;
      ps_cnt      <= '0;
      ps_overflow <= 1'b0;
      best_i      <= '0;
      best_c      <= '0;
      x_out       <= '0;
      cost        <= '0;
    end else begin
      done <= 1'b0;
      if (rc_out_valid && busy) begin
        if (ps_cnt < (PW+1)'(PS_DEPTH)) ps_cnt <= ps_cnt + 1'b1;
        else                            ps_overflow <= 1'b1;
      end
      case (state)
        S_IDLE: if (start) begin
          n_r         <= n;
          cost_r      <= cost_row;
          cc          <= cc_val;
          cn_r        <= cn;
          ci          <= '0;
          ps_cnt      <= '0;
          ps_overflow <= 1'b0;
          state       <= (cn == 0) ? S_COST : S_RAW;
          pi          <= '0;
        end
        // ---- stage 1: read row i, then MAC with CC
        S_RAW:   state <= S_RAW_W;
        S_RAW_W: if (pim_rsp_valid) begin
          for (int j = 0; j < int'(NV); j++) craw[j] <= coef_t'(pim_rsp.prod[j]);
          d_r   <= coef_t'(pim_rsp.prod[D_SLOT]);
          state <= S_MAC;
        end
        S_MAC:   state <= S_MAC_W;
        S_MAC_W: if (pim_rsp_valid) begin
          for (int j = 0; j < int'(NV); j++) p_r[j] <= pim_rsp.prod[j];
          s_r   <= pim_rsp.sum;
          k     <= '0;
          state <= S_DIV;
        end
        // ---- stage 2: one subtraction/division per cycle
        S_DIV: begin
          k <= k + 1'b1;
          if (k + 1'b1 >= (VAR_W+1)'(n_r)) state <= S_DIV_W;
        end
        S_DIV_W: begin
          // the last result lands this cycle
          if (ci + 1'b1 < cn_r) begin
            ci    <= ci + 1'b1;
            state <= S_RAW;
          end else begin
            pi    <= '0;
            state <= S_COST;
          end
        end
        // ---- stage 3: cost of each PS, stage 4: running maximum
        S_COST:   state <= S_COST_W;
        S_COST_W: if (pim_rsp_valid) begin
          if (pi == 0 || pim_rsp.sum > best_c) begin
            best_c <= pim_rsp.sum;
            best_i <= pi[PW-1:0];
          end
          if (pi + 1'b1 < ps_cnt) begin
            pi    <= pi + 1'b1;
            state <= S_COST;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE: begin
          for (int j = 0; j < int'(NV); j++)
            x_out[j] <= (ps_cnt != 0 && ps_k[best_i] == var_t'(j)) ? ps_v[best_i] : cc[j];
          cost  <= best_c;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
