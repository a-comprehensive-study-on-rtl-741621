// fc_engine: Fetch/Control engine, hardware sparsity detection (VFC).
//
// Reads the m constraint rows base .. base+m-1 through the PIM array as plain
// reads (X = 1 on every slot) at one row per cycle. For each returned row a
// cardinality checker counts the non-zero entries among the n coefficient
// slots and the D slot. A row with exactly two non-zero entries, one
// coefficient and D, is a cardinality constraint X_k <= D: D is placed in the
// CC array at variable k (in X format) and the 32-bit CC counter is
// incremented. Any other non-empty row goes to the C array, a queue of row
// addresses of general constraints; all-zero rows are dropped. After the last
// row the ILP is flagged sparse when the CC count equals n (SPARSE_DETECT).
//
// The C array is read by the SA engine through carr_idx / carr_row.
// Timing: start pulse in IDLE; rows are issued on m consecutive cycles and
// done pulses m + PIM_LAT + 2 cycles after start, with sparse, ccn, cc_val,
// cc_valid and cn valid from then until the next start.
// The count-and-sort rule, the 32-bit counter and the n == CCN test follow
// the source. Assumptions: the CC value is D itself (the source's
// cardinality rows have coefficient 1), a later CC row for the same variable
// overwrites an earlier one, and the C array has CQ_DEPTH entries (rows
// beyond it are counted in c_overflow).
module fc_engine
  import spark_pkg::*;
#(
  parameter int unsigned CQ_DEPTH = 256
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  row_t                         base,
  input  logic [ROW_AW:0]              m,
  input  var_t                         n,
  output logic                         busy,
  output logic                         done,
  output logic                         sparse,
  output logic [31:0]                  ccn,
  output xval_t [NV-1:0]               cc_val,
  output logic  [NV-1:0]               cc_valid,
  output logic [$clog2(CQ_DEPTH):0]    cn,
  output logic                         c_overflow,
  input  logic [$clog2(CQ_DEPTH)-1:0]  carr_idx,
  output row_t                         carr_row,
  // shared PIM array
  output logic                         pim_req_valid,
  output pim_req_t                     pim_req,
  input  logic                         pim_rsp_valid,
  input  pim_rsp_t                     pim_rsp
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_DRAIN} state_e;
  state_e state;

  row_t            carr [CQ_DEPTH];
  row_t            base_r;
  var_t            n_r;
  logic [ROW_AW:0] m_r, issue_i, rsp_cnt;

  assign busy     = (state != S_IDLE);
  assign carr_row = carr[carr_idx];

  always_comb begin
    pim_req_valid = (state == S_FETCH) && (issue_i < m_r);
    pim_req.row   = base_r + row_t'(issue_i);
    pim_req.tag   = 8'(issue_i);
    pim_req.incl  = '0;
    for (int j = 0; j < int'(SLOTS); j++) pim_req.xv[j] = X_RAW;
  end

  // cardinality checker on the returned row
  logic [VAR_W:0] nz_coef;
  var_t           k_nz;
  coef_t          d_val;
  logic           is_cc, is_empty;
  always_comb begin
    nz_coef = '0;
    k_nz    = '0;
    for (int j = 0; j < int'(NV); j++)
      if (j < int'(n_r) && pim_rsp.prod[j] != '0) begin
        nz_coef = nz_coef + 1'b1;
        k_nz    = var_t'(j);
      end
    d_val    = coef_t'(pim_rsp.prod[D_SLOT]);
    is_cc    = (nz_coef == 1) && (d_val != '0);
    is_empty = (nz_coef == 0) && (d_val == '0);
  end

  function automatic xval_t to_x(input coef_t d);
    if (d < 0) return '0;
    if (d > coef_t'((1 << (X_W - X_FRAC)) - 1)) return '1;
    return xval_t'(d) << X_FRAC;
  endfunction

  always_ff @(posedge clk) begin
    if (state != S_IDLE && pim_rsp_valid && !is_cc && !is_empty && cn < ($clog2(CQ_DEPTH)+1)'(CQ_DEPTH))
      carr[cn[$clog2(CQ_DEPTH)-1:0]] <= base_r + row_t'(pim_rsp.tag);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      sparse     <= 1'b0;
      ccn        <= '0;
      cc_val     <= '0;
      cc_valid   <= '0;
      cn         <= '0;
      c_overflow <= 1'b0;
      base_r     <= '0;
      n_r        <= '0;
      m_r        <= '0;
      issue_i    <= '0;
      rsp_cnt    <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base_r     <= base;
          n_r        <= n;
          m_r        <= m;
          issue_i    <= '0;
          rsp_cnt    <= '0;
          ccn        <= '0;
          cc_val     <= '0;
          cc_valid   <= '0;
          cn         <= '0;
          c_overflow <= 1'b0;
          sparse     <= 1'b0;
          state      <= (m == 0) ? S_DRAIN : S_FETCH;
        end
        S_FETCH, S_DRAIN: begin
          if (pim_req_valid) issue_i <= issue_i + 1'b1;
          if (state == S_FETCH && issue_i + 1'b1 >= m_r) state <= S_DRAIN;
          if (pim_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (is_cc) begin
              cc_val[k_nz]   <= to_x(d_val);
              cc_valid[k_nz] <= 1'b1;
              ccn            <= ccn + 1'b1;
            end else if (!is_empty) begin
              if (cn < ($clog2(CQ_DEPTH)+1)'(CQ_DEPTH)) cn <= cn + 1'b1;
              else                                       c_overflow <= 1'b1;
            end
          end
          if (state == S_DRAIN && rsp_cnt == m_r) begin
            sparse <= (ccn == 32'(n_r)) && (n_r != 0);
            done   <= 1'b1;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
