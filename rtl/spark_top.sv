// spark_top: one CPU core's near-L1 ILP accelerator.
//
// The core's L1 data cache (pim_array, 16 banks of 256 x 256 8T cells) is
// used as a normal cache or, when the compute-mode control register is set,
// as a processing-in-memory array shared by four engines:
//   FC  engine - sparsity detection (instruction VFC), sets VS;
//   SA  engine - sparsity-aware solve of a sparse ILP (VSASLE when VS=1);
//   SLE engine - Jacobi solve of a dense system (VSASLE when VS=0);
//   B&B engine - branch and bound on VX (VBB), reusing the SLE engine;
//                a NOP when VS=1.
// The PIM array and one Sub/Div result calculator are shared: the engine that
// is running owns them. Results go to the architectural registers VS (sparse
// flag), VX (solution vector), VC (cost) and VB (B&B integer solution).
//
// Interface:
//   cfg_we / cfg_compute   write the compute-mode control register;
//   fill_*                 the cache fill/store port (C, D, R rows), usable
//                          in both modes through the decoupled write port;
//   rd_*                   plain row read in cache mode, PIM_LAT cycles;
//   vx_we / vx_wdata       load VX (initial approximation for Jacobi);
//   instr_*                one instruction: op, base row, m rows, n
//                          variables, cost row, Jacobi error limit and
//                          iteration cap, max/min; accepted when
//                          instr_ready (compute mode and idle); instr_done
//                          pulses when it has completed, instr_reject when
//                          it was issued outside compute mode.
// Instruction fields and register names follow the source's VFC / VSASLE /
// VBB instructions; the field encoding and the handshake are this design's.
// The CPU pipeline, tag array, L2 and prefetcher that would drive these ports
// are outside this block.
module spark_top
  import spark_pkg::*;
#(
  parameter int unsigned Q_DEPTH  = 1024,   // B&B node queue entries
  parameter int unsigned PS_DEPTH = 256,    // PS / PC array entries
  parameter int unsigned CQ_DEPTH = 256     // C array entries
) (
  input  logic              clk,
  input  logic              rst_n,
  // control register
  input  logic              cfg_we,
  input  logic              cfg_compute,
  output logic              compute_mode,
  // fill / store port
  input  logic              fill_we,
  input  row_t              fill_row,
  input  coef_t [SLOTS-1:0] fill_data,
  // cache-mode read port
  input  logic              rd_valid,
  input  row_t              rd_row,
  output logic              rd_rvalid,
  output coef_t [SLOTS-1:0] rd_data,
  // VX load
  input  logic              vx_we,
  input  xval_t [NV-1:0]    vx_wdata,
  // instruction port
  input  logic              instr_valid,
  output logic              instr_ready,
  input  op_e               instr_op,
  input  row_t              instr_base,
  input  logic [ROW_AW:0]   instr_m,
  input  var_t              instr_n,
  input  row_t              instr_cost_row,
  input  xval_t             instr_err,
  input  logic [15:0]       instr_max_iter,
  input  logic              instr_maximize,
  output logic              instr_done,
  output logic              instr_reject,
  // architectural results
  output logic              vs_sparse,
  output xval_t [NV-1:0]    vx,
  output sum_t              vc,
  output xval_t [NV-1:0]    vb,
  output logic              vb_found,
  // statistics
  output logic [31:0]       ccn,
  output logic [15:0]       sle_iters,
  output logic              sle_converged,
  output logic [15:0]       bb_nodes,
  output logic [15:0]       bb_branched,
  output logic [15:0]       bb_pruned,
  output logic [15:0]       bb_infeasible,
  output logic [15:0]       bb_overflow,
  output logic [15:0]       ps_count,
  output logic [31:0]       div_lut_hits,
  output logic [X_W+3:0]    sle_l1_norm,
  output logic              c_array_overflow,
  output logic              ps_array_overflow
);

  typedef enum logic [2:0] {T_IDLE, T_FC, T_SA, T_SLE, T_BB, T_NOP} tstate_e;
  tstate_e tstate;

  // ---------------- shared PIM array and Sub/Div
  logic      pim_req_valid, pim_rsp_valid;
  pim_req_t  pim_req;
  pim_rsp_t  pim_rsp;

  logic      rc_valid, rc_out_valid, rc_hit;
  coef_t     rc_d, rc_div;
  sum_t      rc_sum;
  logic [7:0] rc_tag, rc_out_tag;
  xval_t     rc_q_x;
  logic signed [31:0] rc_q_raw;

  pim_array u_pim (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_en     (fill_we),
    .wr_row    (fill_row),
    .wr_data   (fill_data),
    .req_valid (pim_req_valid),
    .req       (pim_req),
    .rsp_valid (pim_rsp_valid),
    .rsp       (pim_rsp)
  );

  result_calc u_rc (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (rc_valid),
    .d         (rc_d),
    .sum       (rc_sum),
    .div       (rc_div),
    .in_tag    (rc_tag),
    .out_valid (rc_out_valid),
    .q_raw     (rc_q_raw),
    .q_x       (rc_q_x),
    .lut_hit   (rc_hit),
    .out_tag   (rc_out_tag)
  );

  // ---------------- engines
  logic fc_start, fc_busy, fc_done, fc_sparse;
  logic fc_pv; pim_req_t fc_preq;
  xval_t [NV-1:0] cc_val;
  logic  [NV-1:0] cc_valid;
  logic [$clog2(CQ_DEPTH):0]   cn;
  logic [$clog2(CQ_DEPTH)-1:0] carr_idx;
  row_t carr_row;

  logic sa_start, sa_busy, sa_done;
  logic sa_pv; pim_req_t sa_preq;
  logic sa_rcv; coef_t sa_rcd, sa_rcdiv; sum_t sa_rcsum; logic [7:0] sa_rctag;
  xval_t [NV-1:0] sa_x;
  sum_t  sa_cost;
  logic [$clog2(PS_DEPTH):0] sa_pscnt;
  sum_t  sa_pc;

  logic sle_start, sle_busy, sle_done, sle_conv;
  logic sle_pv; pim_req_t sle_preq;
  logic sle_rcv; coef_t sle_rcd, sle_rcdiv; sum_t sle_rcsum; logic [7:0] sle_rctag;
  xval_t [NV-1:0] sle_x, sle_xinit, sle_fval;
  logic  [NV-1:0] sle_fmask;
  logic [15:0]    sle_it;

  logic bb_start, bb_busy, bb_done, bb_found;
  logic bb_pv; pim_req_t bb_preq;
  logic bb_sle_start;
  logic  [NV-1:0] bb_fmask;
  xval_t [NV-1:0] bb_fval, bb_x;
  sum_t  bb_cost;

  logic kick;      // first cycle of an instruction's state
  logic sle_kick;

  // latched instruction
  row_t            base_r, cost_r;
  logic [ROW_AW:0] m_r;
  var_t            n_r;
  xval_t           err_r;
  logic [15:0]     maxit_r;
  logic            max_r;

  fc_engine #(.CQ_DEPTH(CQ_DEPTH)) u_fc (
    .clk (clk), .rst_n (rst_n), .start (fc_start), .base (base_r), .m (m_r), .n (n_r),
    .busy (fc_busy), .done (fc_done), .sparse (fc_sparse), .ccn (ccn),
    .cc_val (cc_val), .cc_valid (cc_valid), .cn (cn), .c_overflow (c_array_overflow),
    .carr_idx (carr_idx), .carr_row (carr_row),
    .pim_req_valid (fc_pv), .pim_req (fc_preq), .pim_rsp_valid (pim_rsp_valid), .pim_rsp (pim_rsp)
  );

  sa_engine #(.PS_DEPTH(PS_DEPTH), .CQ_DEPTH(CQ_DEPTH)) u_sa (
    .clk (clk), .rst_n (rst_n), .start (sa_start), .n (n_r), .cost_row (cost_r),
    .cc_val (cc_val), .cn (cn), .carr_idx (carr_idx), .carr_row (carr_row),
    .busy (sa_busy), .done (sa_done), .x_out (sa_x), .cost (sa_cost),
    .ps_cnt (sa_pscnt), .ps_overflow (ps_array_overflow), .pc_idx ('0), .pc_rdata (sa_pc),
    .pim_req_valid (sa_pv), .pim_req (sa_preq), .pim_rsp_valid (pim_rsp_valid), .pim_rsp (pim_rsp),
    .rc_valid (sa_rcv), .rc_d (sa_rcd), .rc_sum (sa_rcsum), .rc_div (sa_rcdiv), .rc_tag (sa_rctag),
    .rc_out_valid (rc_out_valid), .rc_q_x (rc_q_x), .rc_out_tag (rc_out_tag)
  );

  // The SLE engine is started either by VSASLE or by the B&B engine.
  assign sle_start = (tstate == T_SLE && sle_kick) || bb_sle_start;
  assign sle_xinit = vx;   // Jacobi starts from VX, also for B&B children
  assign sle_fmask = (tstate == T_BB) ? bb_fmask : '0;
  assign sle_fval  = bb_fval;

  sle_engine u_sle (
    .clk (clk), .rst_n (rst_n), .start (sle_start), .base (base_r), .n (n_r),
    .err (err_r), .max_iter (maxit_r), .x_init (sle_xinit), .fix_mask (sle_fmask), .fix_val (sle_fval),
    .busy (sle_busy), .done (sle_done), .x_out (sle_x), .iters (sle_it), .converged (sle_conv), .l1 (sle_l1_norm),
    .pim_req_valid (sle_pv), .pim_req (sle_preq), .pim_rsp_valid (pim_rsp_valid), .pim_rsp (pim_rsp),
    .rc_valid (sle_rcv), .rc_d (sle_rcd), .rc_sum (sle_rcsum), .rc_div (sle_rcdiv), .rc_tag (sle_rctag),
    .rc_out_valid (rc_out_valid), .rc_q_x (rc_q_x), .rc_out_tag (rc_out_tag)
  );

  bb_engine #(.Q_DEPTH(Q_DEPTH)) u_bb (
    .clk (clk), .rst_n (rst_n), .start (bb_start), .base (base_r), .m (m_r), .n (n_r),
    .cost_row (cost_r), .maximize (max_r), .x_root (vx),
    .busy (bb_busy), .done (bb_done), .found (bb_found), .x_best (bb_x), .cost_best (bb_cost),
    .n_nodes (bb_nodes), .n_branched (bb_branched), .n_pruned (bb_pruned),
    .n_infeasible (bb_infeasible), .n_overflow (bb_overflow),
    .sle_start (bb_sle_start), .sle_fix_mask (bb_fmask), .sle_fix_val (bb_fval),
    .sle_done (sle_done), .sle_x (sle_x),
    .pim_req_valid (bb_pv), .pim_req (bb_preq), .pim_rsp_valid (pim_rsp_valid), .pim_rsp (pim_rsp)
  );

  // ---------------- arbitration: the running engine owns the array
  logic   cpu_rd;
  logic [PIM_LAT-1:0] cpu_pipe;
  assign cpu_rd = rd_valid && !compute_mode && (tstate == T_IDLE);

  always_comb begin
    pim_req_valid = fc_pv | sa_pv | sle_pv | bb_pv | cpu_rd;
    if      (fc_pv)  pim_req = fc_preq;
    else if (sa_pv)  pim_req = sa_preq;
    else if (sle_pv) pim_req = sle_preq;
    else if (bb_pv)  pim_req = bb_preq;
    else begin
      pim_req.row  = rd_row;
      pim_req.tag  = '0;
      pim_req.incl = '0;
      for (int s = 0; s < int'(SLOTS); s++) pim_req.xv[s] = X_RAW;
    end
    rc_valid = sa_rcv | sle_rcv;
    if (sa_rcv) begin
      rc_d = sa_rcd; rc_sum = sa_rcsum; rc_div = sa_rcdiv; rc_tag = sa_rctag;
    end else begin
      rc_d = sle_rcd; rc_sum = sle_rcsum; rc_div = sle_rcdiv; rc_tag = sle_rctag;
    end
  end

  // one owner at a time
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({fc_pv, sa_pv, sle_pv, bb_pv, cpu_rd}));
  assert property (@(posedge clk) disable iff (!rst_n) !(sa_rcv && sle_rcv));
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({fc_busy, sa_busy, bb_busy | sle_busy}));

  assign rd_rvalid = pim_rsp_valid && cpu_pipe[PIM_LAT-1];
  always_comb
    for (int s = 0; s < int'(SLOTS); s++) rd_data[s] = coef_t'(pim_rsp.prod[s]);

  // ---------------- instruction sequencing
  assign instr_ready = compute_mode && (tstate == T_IDLE);
  assign fc_start    = (tstate == T_FC)  && kick;
  assign sa_start    = (tstate == T_SA)  && kick;
  assign bb_start    = (tstate == T_BB)  && kick;
  assign sle_kick    = kick;

  assign ps_count = 16'(sa_pscnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate        <= T_IDLE;
      kick          <= 1'b0;
      compute_mode  <= 1'b0;
      cpu_pipe      <= '0;
      instr_done    <= 1'b0;
      instr_reject  <= 1'b0;
      vs_sparse     <= 1'b0;
      vx            <= '0;
      vc            <= '0;
      vb            <= '0;
      vb_found      <= 1'b0;
      sle_iters     <= '0;
      sle_converged <= 1'b0;
      div_lut_hits  <= '0;
      base_r        <= '0;
      cost_r        <= '0;
      m_r           <= '0;
      n_r           <= '0;
      err_r         <= '0;
      maxit_r       <= '0;
      max_r         <= 1'b1;
    end else begin
      kick         <= 1'b0;
      instr_done   <= 1'b0;
      instr_reject <= 1'b0;
      cpu_pipe     <= {cpu_pipe[PIM_LAT-2:0], cpu_rd};
      if (rc_hit) div_lut_hits <= div_lut_hits + 1'b1;
      if (cfg_we && tstate == T_IDLE) compute_mode <= cfg_compute;
      if (vx_we && tstate == T_IDLE) vx <= vx_wdata;
      case (tstate)
        T_IDLE: if (instr_valid) begin
          if (!compute_mode) begin
            instr_reject <= 1'b1;
          end else begin
            base_r  <= instr_base;
            m_r     <= instr_m;
            n_r     <= instr_n;
            cost_r  <= instr_cost_row;
            err_r   <= instr_err;
            maxit_r <= instr_max_iter;
            max_r   <= instr_maximize;
            kick    <= 1'b1;
            case (instr_op)
              OP_VFC:    tstate <= T_FC;
              OP_VSASLE: tstate <= vs_sparse ? T_SA : T_SLE;
              OP_VBB:    tstate <= vs_sparse ? T_NOP : T_BB;
              default:   instr_reject <= 1'b1;
            endcase
          end
        end
        T_FC: if (fc_done) begin
          vs_sparse  <= fc_sparse;
          instr_done <= 1'b1;
          tstate     <= T_IDLE;
        end
        T_SA: if (sa_done) begin
          vx         <= sa_x;
          vc         <= sa_cost;
          instr_done <= 1'b1;
          tstate     <= T_IDLE;
        end
        T_SLE: if (sle_done) begin
          vx            <= sle_x;
          sle_iters     <= sle_it;
          sle_converged <= sle_conv;
          instr_done    <= 1'b1;
          tstate        <= T_IDLE;
        end
        T_BB: if (bb_done) begin
          vb         <= bb_x;
          vc         <= bb_cost;
          vb_found   <= bb_found;
          instr_done <= 1'b1;
          tstate     <= T_IDLE;
        end
        T_NOP: begin
          // VBB on a sparse ILP: the B&B engine stays gated
          instr_done <= 1'b1;
          tstate     <= T_IDLE;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

endmodule
