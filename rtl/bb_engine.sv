// bb_engine: reuse-aware branch-and-bound (B&B) engine (VBB on a dense ILP).
//
// Starting from the relaxed solution X of the SLE engine, the engine searches
// for the best integer solution. It has no solver of its own: every node is
// solved by the SLE engine, with the node's branching constraints kept near
// memory as fixed variables (X_v = value) instead of being written into the
// array as extra sparse rows (the reuse-aware approach).
//
// Evaluation of a candidate X (stages 1 and 4 of the source's B&B pipeline):
//   verification - one PIM MAC per constraint row, sum_j C_ij*X_j <= D_i,
//                  and X >= 0 by construction. Entries within INT_TOL of an
//                  integer are first snapped to it. An all-integer candidate
//                  must meet every row exactly, so a reported solution is
//                  exactly feasible. For a fractional candidate the rows the
//                  SLE engine solved as equalities are skipped and the others
//                  may exceed D_i by |D_i|/2^FEAS_SHIFT + FEAS_TOL (the
//                  divider's error);
//   bound        - one PIM MAC of the cost row R with X gives F(X).
// A feasible candidate whose entries all lie within INT_TOL of an integer is
// an integer solution: it replaces the incumbent when better. A feasible
// fractional candidate becomes a node in the node queue with bound F(X) and a
// branching variable, the not yet fixed variable with the largest fractional
// part (max + ceil stage). Infeasible candidates are dropped.
//
// Search loop:
//   prune  - in one cycle every queued node whose bound cannot beat the
//            incumbent is invalidated (parallel node invalidation);
//   select - the valid node with the best bound is dequeued;
//   walk   - the node's parent chain is followed to rebuild its fixed set;
//   branch - two children, X_v = floor(x_v) and X_v = floor(x_v) + 1, are
//            solved by the SLE engine and evaluated as above.
// The search ends when no valid node is left. At the root the floor of the
// relaxed X is also evaluated, giving the first incumbent (the initial bound
// taken from the floor of the relaxed solution). Each node stores its parent,
// its branching variable and value, and its bound, so children can be
// invalidated together with the parents' chain.
//
// maximize selects max or min problems. Timing: start pulse in IDLE; done
// pulses once; found, x_best, cost_best and the counters hold until the next
// start. The pipeline steps, queue/bound/variable arrays and reuse of the SLE
// engine follow the source; the choice of the largest fractional part follows
// its text (its pseudo-code writes min(frac, LB)); the tolerances, the
// floor/ceil child values and the best-bound selection order are this
// design's. Q_DEPTH nodes at most are kept; further nodes are dropped and
// counted in n_overflow.
module bb_engine
  import spark_pkg::*;
#(
  parameter int unsigned Q_DEPTH  = 1024,
  parameter int unsigned INT_TOL    = 4,   // in units of 2^-X_FRAC
  parameter int unsigned FEAS_TOL   = 32,  // in units of 2^-X_FRAC
  parameter int unsigned FEAS_SHIFT = 4    // relative tolerance |D| / 2^FEAS_SHIFT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  row_t              base,
  input  logic [ROW_AW:0]   m,
  input  var_t              n,
  input  row_t              cost_row,
  input  logic              maximize,
  input  xval_t [NV-1:0]    x_root,
  output logic              busy,
  output logic              done,
  output logic              found,
  output xval_t [NV-1:0]    x_best,
  output sum_t              cost_best,
  output logic [15:0]       n_nodes,       // nodes enqueued
  output logic [15:0]       n_branched,    // nodes dequeued and branched
  output logic [15:0]       n_pruned,      // nodes invalidated by the bound
  output logic [15:0]       n_infeasible,  // candidates failing verification
  output logic [15:0]       n_overflow,    // nodes dropped, queue full
  // SLE engine, reused
  output logic              sle_start,
  output logic  [NV-1:0]    sle_fix_mask,
  output xval_t [NV-1:0]    sle_fix_val,
  input  logic              sle_done,
  input  xval_t [NV-1:0]    sle_x,
  // shared PIM array
  output logic              pim_req_valid,
  output pim_req_t          pim_req,
  input  logic              pim_rsp_valid,
  input  pim_rsp_t          pim_rsp
);

  localparam int unsigned QW = $clog2(Q_DEPTH);
  localparam var_t VAR_NONE = var_t'(D_SLOT);
  localparam xval_t FRAC_MASK = xval_t'((1 << X_FRAC) - 1);

  typedef enum logic [3:0] {
    S_IDLE, S_VER, S_VER_W, S_COST, S_COST_W, S_DECIDE,
    S_PRUNE, S_SEL, S_WALK, S_CHILD, S_SLE_W, S_DONE
  } state_e;
  typedef enum logic [1:0] {K_ROOT, K_FLOOR, K_CHILD} kind_e;

  state_e state;
  kind_e  kind;

  // node queue
  logic [Q_DEPTH-1:0] nd_valid;
  sum_t               nd_ub     [Q_DEPTH];
  logic [QW:0]        nd_parent [Q_DEPTH];   // MSB set: no parent
  var_t               nd_var    [Q_DEPTH];
  xval_t              nd_val    [Q_DEPTH];
  var_t               nd_bvar   [Q_DEPTH];
  xval_t              nd_bx     [Q_DEPTH];
  logic [QW:0]        n_alloc;

  // problem
  row_t            base_r, cost_r;
  logic [ROW_AW:0] m_r;
  var_t            n_r;
  logic            max_r;
  xval_t [NV-1:0]  xroot_r;

  // candidate under evaluation
  xval_t [NV-1:0]  ev_x;
  logic  [NV-1:0]  ev_fix;
  logic [QW:0]     ev_parent;
  var_t            ev_var;
  xval_t           ev_val;
  logic            ev_feas;
  sum_t            ev_cost;
  logic [ROW_AW:0] vi, vr;

  // incumbent
  logic            have_inc;
  sum_t            inc_cost;

  // search
  logic [QW:0]     scan, sel, walk;
  logic            sel_ok;
  sum_t            sel_ub;
  logic  [NV-1:0]  fix;
  xval_t [NV-1:0]  fval;
  logic            side;

  assign busy         = (state != S_IDLE);
  assign found        = have_inc;
  assign cost_best    = inc_cost;

  function automatic logic better(input sum_t a, input sum_t b, input logic mx);
    return mx ? (a > b) : (a < b);
  endfunction

  function automatic xval_t frac(input xval_t x);
    return x & FRAC_MASK;
  endfunction

  function automatic logic near_int(input xval_t x);
    return (frac(x) <= xval_t'(INT_TOL)) || (frac(x) >= xval_t'((1 << X_FRAC) - INT_TOL));
  endfunction

  function automatic xval_t round_x(input xval_t x);
    if (x >= xval_t'('1) - FRAC_MASK) return x_floor(x);
    return x_floor(x + xval_t'(1 << (X_FRAC - 1)));
  endfunction

  // ---- PIM requests: verification rows and the cost row
  always_comb begin
    pim_req_valid = (state == S_VER && vi < m_r) || (state == S_COST);
    pim_req.row   = (state == S_COST) ? cost_r : base_r + row_t'(vi);
    pim_req.tag   = 8'(vi);
    for (int j = 0; j < int'(SLOTS); j++) begin
      pim_req.incl[j] = (j < int'(n_r));
      if (j == int'(D_SLOT))   pim_req.xv[j] = (state == S_COST) ? '0 : X_RAW;
      else if (j < int'(n_r))  pim_req.xv[j] = ev_x[j];
      else                     pim_req.xv[j] = '0;
    end
  end

  // ---- candidate classification
  logic  all_int;
  var_t  bvar_c;
  xval_t bfrac_c;
  always_comb begin
    all_int = 1'b1;
    bvar_c  = VAR_NONE;
    bfrac_c = '0;
    for (int j = 0; j < int'(NV); j++)
      if (j < int'(n_r)) begin
        if (!near_int(ev_x[j])) all_int = 1'b0;
        if (!ev_fix[j] && !near_int(ev_x[j]) && (bvar_c == VAR_NONE || frac(ev_x[j]) > bfrac_c)) begin
          bvar_c  = var_t'(j);
          bfrac_c = frac(ev_x[j]);
        end
      end
  end

  // ---- parallel invalidation against the incumbent
  logic [Q_DEPTH-1:0] kill;
  logic [15:0]        kill_cnt;
  always_comb begin
    kill     = '0;
    kill_cnt = '0;
    for (int q = 0; q < int'(Q_DEPTH); q++)
      if (nd_valid[q] && have_inc && !better(nd_ub[q], inc_cost, max_r)) begin
        kill[q]  = 1'b1;
        kill_cnt = kill_cnt + 1'b1;
      end
  end

  // ---- verification limit of the returned row. An integer candidate must
  // meet every row exactly. For a fractional candidate a row solved as an
  // equality by the SLE engine (row i of an unfixed X_i) holds by
  // construction and is skipped; the others get a tolerance of
  // |D| / 2^FEAS_SHIFT + FEAS_TOL for the divider error.
  logic  ver_check;
  sum_t  ver_limit;
  always_comb begin
    sum_t  dv, dabs;
    var_t  ti;
    dv   = SUM_W'(coef_t'(pim_rsp.prod[D_SLOT]));
    dabs = (dv < 0) ? -dv : dv;
    ti   = var_t'(pim_rsp.tag);
    ver_limit = dv <<< X_FRAC;
    ver_check = 1'b1;
    if (!all_int) begin
      ver_limit = ver_limit + (dabs <<< (X_FRAC - FEAS_SHIFT)) + SUM_W'(FEAS_TOL);
      if (kind != K_FLOOR && pim_rsp.tag < 8'(n_r) && !ev_fix[ti]) ver_check = 1'b0;
    end
  end

  // values within INT_TOL of an integer are snapped to it; unused variables
  // (j >= n) are cleared
  function automatic xval_t [NV-1:0] snap(input xval_t [NV-1:0] x, input var_t nn);
    xval_t [NV-1:0] r;
    for (int j = 0; j < int'(NV); j++)
      r[j] = (j >= int'(nn)) ? '0 : near_int(x[j]) ? round_x(x[j]) : x[j];
    return r;
  endfunction

  // ---- node arrays (no reset needed: guarded by nd_valid / n_alloc)
  logic node_wr;
  assign node_wr = (state == S_DECIDE) && ev_feas && !all_int && bvar_c != VAR_NONE
                   && n_alloc < (QW+1)'(Q_DEPTH);
  always_ff @(posedge clk) begin
    if (node_wr) begin
      nd_ub    [n_alloc[QW-1:0]] <= ev_cost;
      nd_parent[n_alloc[QW-1:0]] <= ev_parent;
      nd_var   [n_alloc[QW-1:0]] <= ev_var;
      nd_val   [n_alloc[QW-1:0]] <= ev_val;
      nd_bvar  [n_alloc[QW-1:0]] <= bvar_c;
      nd_bx    [n_alloc[QW-1:0]] <= ev_x[bvar_c];
    end
  end

  // ---- SLE launch for a child
  always_comb begin
    sle_start    = (state == S_CHILD);
    sle_fix_mask = fix;
    sle_fix_val  = fval;
    if (state == S_CHILD) begin
      sle_fix_mask[nd_bvar[sel[QW-1:0]]] = 1'b1;
      sle_fix_val [nd_bvar[sel[QW-1:0]]] = x_floor(nd_bx[sel[QW-1:0]]) + (side ? X_ONE : '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      kind         <= K_ROOT;
      done         <= 1'b0;
      nd_valid     <= '0;
      n_alloc      <= '0;
      base_r       <= '0;
      cost_r       <= '0;
      m_r          <= '0;
      n_r          <= '0;
      max_r        <= 1'b1;
      xroot_r      <= '0;
      ev_x         <= '0;
      ev_fix       <= '0;
      ev_parent    <= '0;
      ev_var       <= VAR_NONE;
      ev_val       <= '0;
      ev_feas      <= 1'b0;
      ev_cost      <= '0;
      vi           <= '0;
      vr           <= '0;
      have_inc     <= 1'b0;
      inc_cost     <= '0;
      x_best       <= '0;
      scan         <= '0;
      sel          <= '0;
      walk         <= '0;
      sel_ok       <= 1'b0;
      sel_ub       <= '0;
      fix          <= '0;
      fval         <= '0;
      side         <= 1'b0;
      n_nodes      <= '0;
      n_branched   <= '0;
      n_pruned     <= '0;
      n_infeasible <= '0;
      n_overflow   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base_r       <= base;
          cost_r       <= cost_row;
          m_r          <= m;
          n_r          <= n;
          max_r        <= maximize;
          xroot_r      <= x_root;
          nd_valid     <= '0;
          n_alloc      <= '0;
          have_inc     <= 1'b0;
          inc_cost     <= '0;
          x_best       <= '0;
          n_nodes      <= '0;
          n_branched   <= '0;
          n_pruned     <= '0;
          n_infeasible <= '0;
          n_overflow   <= '0;
          // evaluate the root: relaxed X, no fixed variables
          kind      <= K_ROOT;
          ev_x      <= snap(x_root, n);
          ev_fix    <= '0;
          ev_parent <= {1'b1, {QW{1'b0}}};
          ev_var    <= VAR_NONE;
          ev_val    <= '0;
          ev_feas   <= 1'b1;
          vi        <= '0;
          vr        <= '0;
          state     <= S_VER;
        end
        // ---- stage 4: verification of every constraint row
        S_VER, S_VER_W: begin
          if (pim_req_valid) vi <= vi + 1'b1;
          if (state == S_VER && vi + 1'b1 >= m_r) state <= S_VER_W;
          if (pim_rsp_valid) begin
            vr <= vr + 1'b1;
            if (ver_check && pim_rsp.sum > ver_limit) ev_feas <= 1'b0;
          end
          if (state == S_VER_W && vr == m_r) state <= S_COST;
        end
        // ---- stage 1: bound F(X) by a PIM MAC of the cost row
        S_COST:   state <= S_COST_W;
        S_COST_W: if (pim_rsp_valid) begin
          ev_cost <= pim_rsp.sum;
          state   <= S_DECIDE;
        end
        S_DECIDE: begin
          if (!ev_feas) begin
            n_infeasible <= n_infeasible + 1'b1;
          end else if (all_int) begin
            if (!have_inc || better(ev_cost, inc_cost, max_r)) begin
              have_inc <= 1'b1;
              inc_cost <= ev_cost;
              x_best   <= ev_x;
            end
          end else if (bvar_c != VAR_NONE) begin
            if (node_wr) begin
              nd_valid[n_alloc[QW-1:0]] <= 1'b1;
              n_alloc <= n_alloc + 1'b1;
              n_nodes <= n_nodes + 1'b1;
            end else begin
              n_overflow <= n_overflow + 1'b1;
            end
          end
          // next candidate
          vi      <= '0;
          vr      <= '0;
          ev_feas <= 1'b1;
          if (kind == K_ROOT && !(ev_feas && all_int)) begin
            kind   <= K_FLOOR;
            ev_fix <= '0;
            for (int j = 0; j < int'(NV); j++)
              ev_x[j] <= (j < int'(n_r)) ? x_floor(xroot_r[j]) : '0;
            state  <= S_VER;
          end else if (kind == K_CHILD && !side) begin
            side  <= 1'b1;
            state <= S_CHILD;
          end else begin
            state <= S_PRUNE;
          end
        end
        // ---- stage 2b: parallel invalidation
        S_PRUNE: begin
          nd_valid <= nd_valid & ~kill;
          n_pruned <= n_pruned + kill_cnt;
          scan     <= '0;
          sel_ok   <= 1'b0;
          state    <= S_SEL;
        end
        // ---- stage 2a: best-bound node selection
        S_SEL: begin
          if (scan < n_alloc) begin
            if (nd_valid[scan[QW-1:0]] && (!sel_ok || better(nd_ub[scan[QW-1:0]], sel_ub, max_r))) begin
              sel_ok <= 1'b1;
              sel    <= scan;
              sel_ub <= nd_ub[scan[QW-1:0]];
            end
            scan <= scan + 1'b1;
          end else if (!sel_ok) begin
            state <= S_DONE;
          end else begin
            nd_valid[sel[QW-1:0]] <= 1'b0;
            n_branched <= n_branched + 1'b1;
            walk  <= sel;
            fix   <= '0;
            fval  <= '0;
            state <= S_WALK;
          end
        end
        S_WALK: begin
          if (walk[QW]) begin
            side  <= 1'b0;
            state <= S_CHILD;
          end else begin
            if (nd_var[walk[QW-1:0]] != VAR_NONE) begin
              fix [nd_var[walk[QW-1:0]]] <= 1'b1;
              fval[nd_var[walk[QW-1:0]]] <= nd_val[walk[QW-1:0]];
            end
            walk <= nd_parent[walk[QW-1:0]];
          end
        end
        // ---- stage 3: solve the child on the SLE engine
        S_CHILD: begin
          kind      <= K_CHILD;
          ev_fix    <= sle_fix_mask;
          ev_parent <= sel;
          ev_var    <= nd_bvar[sel[QW-1:0]];
          ev_val    <= sle_fix_val[nd_bvar[sel[QW-1:0]]];
          state     <= S_SLE_W;
        end
        S_SLE_W: if (sle_done) begin
          ev_x    <= snap(sle_x, n_r);
          vi      <= '0;
          vr      <= '0;
          ev_feas <= 1'b1;
          state   <= S_VER;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
