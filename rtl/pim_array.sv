// pim_array: the L1 cache of one core in compute mode (in-L1 dot product,
// near-L1 shift-add and adder reduction).
//
// NUM_BANKS banks hold the same rows (every write goes to all banks, the
// replication of C and D across banks shown in the source). A request names a
// row and one X value per 16-bit slot; bank b receives bit b of every slot's
// X on the precharge of that slot's 16 columns, so its row buffer holds
// C AND X[b] per slot. One shift_add per slot combines the banks into C*X,
// and one adder_reduction sums the slots selected by incl.
//
// Pipeline (PIM_LAT = 3): cycle 1 row buffer, cycle 2 s-a outputs
// registered, cycle 3 AR sum registered; rsp_valid is req_valid delayed by
// three cycles and rsp.tag returns req.tag. One request per cycle.
// A slot given X = 1 (the integer 1, X_RAW) reads its stored value back
// unscaled; this is how D, C_ii and plain reads come out of the array.
// The write port is independent of the compute port (8T cell).
module pim_array
  import spark_pkg::*;
#(
  parameter int unsigned BANKS = NUM_BANKS,
  parameter int unsigned NROWS = ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // fill / store port
  input  logic                     wr_en,
  input  logic [$clog2(NROWS)-1:0] wr_row,
  input  coef_t [SLOTS-1:0]        wr_data,
  // compute port
  input  logic                     req_valid,
  input  pim_req_t                 req,
  output logic                     rsp_valid,
  output pim_rsp_t                 rsp
);

  localparam int unsigned CW = SLOTS * DATA_W;

  // one bank per X bit
  initial assert (BANKS == X_W) else $error("pim_array needs one bank per X bit");

  logic [CW-1:0]     rbuf  [BANKS];
  logic [1:0]        vpipe;
  logic [7:0]        tag1, tag2;
  logic [SLOTS-1:0]  incl1, incl2;
  prod_t             prod_c [SLOTS];
  prod_t             prod_r [SLOTS];
  sum_t              sum_c;

  for (genvar b = 0; b < int'(BANKS); b++) begin : g_bank
    logic [CW-1:0] col_x;
    always_comb
      for (int s = 0; s < int'(SLOTS); s++)
        col_x[s*DATA_W +: DATA_W] = {DATA_W{req.xv[s][b]}};
    pim_bank #(.ROWS(NROWS), .COLS(CW)) u_bank (
      .clk   (clk),
      .we    (wr_en),
      .waddr (wr_row),
      .wdata (wr_data),
      .re    (req_valid),
      .raddr (req.row[$clog2(NROWS)-1:0]),
      .col_x (col_x),
      .rbuf  (rbuf[b])
    );
  end

  for (genvar s = 0; s < int'(SLOTS); s++) begin : g_sa
    coef_t pp [BANKS];
    always_comb
      for (int b = 0; b < int'(BANKS); b++) pp[b] = rbuf[b][s*DATA_W +: DATA_W];
    shift_add #(.N_BITS(BANKS), .C_W(DATA_W), .P_W(PROD_W)) u_sa (
      .pp   (pp),
      .prod (prod_c[s])
    );
  end

  adder_reduction #(.N(SLOTS), .P_W(PROD_W), .S_W(SUM_W)) u_ar (
    .prod (prod_r),
    .incl (incl2),
    .sum  (sum_c)
  );

  always_ff @(posedge clk) begin
    tag1  <= req.tag;
    incl1 <= req.incl;
    tag2  <= tag1;
    incl2 <= incl1;
    for (int s = 0; s < int'(SLOTS); s++) prod_r[s] <= prod_c[s];
    for (int s = 0; s < int'(SLOTS); s++) rsp.prod[s] <= prod_r[s];
    rsp.sum <= sum_c;
    rsp.tag <= tag2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe     <= '0;
      rsp_valid <= 1'b0;
    end else begin
      vpipe     <= {vpipe[0], req_valid};
      rsp_valid <= vpipe[1];
    end
  end

endmodule
