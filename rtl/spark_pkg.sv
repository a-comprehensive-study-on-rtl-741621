// spark_pkg: types and constants shared by the near-L1 ILP accelerator.
//
// Number formats (a choice of this design; the source only says that C, D
// and R are 16-bit integers and that X is handled as a mantissa with a
// common exponent):
//   coefficients C, right-hand sides D, costs R : signed 16-bit integers
//   variables X : unsigned 16-bit fixed point, X_FRAC fraction bits (Q8.8)
//   one PIM product C*X : signed 32 bits, same scale as X
//   a dot product        : signed 36 bits
// One cache row of 256 columns holds SLOTS = 16 coefficients. Slot 15 of a
// constraint row holds D, slots 0..14 the coefficients of up to NV = 15
// variables. Every bank stores the same rows; bank b is given bit b of X.
package spark_pkg;

  localparam int unsigned DATA_W    = 16;               // C, D, R width
  localparam int unsigned X_W       = 16;               // X width, one bit per bank
  localparam int unsigned X_FRAC    = 8;                // fraction bits of X
  localparam int unsigned NUM_BANKS = 16;               // L1 banks per core
  localparam int unsigned ROWS      = 256;              // rows per bank
  localparam int unsigned COLS      = 256;              // columns per bank
  localparam int unsigned ROW_AW    = $clog2(ROWS);
  localparam int unsigned SLOTS     = COLS / DATA_W;    // 16-bit column groups per row
  localparam int unsigned NV        = SLOTS - 1;        // variables per constraint row
  localparam int unsigned D_SLOT    = SLOTS - 1;        // slot of D in a constraint row
  localparam int unsigned VAR_W     = $clog2(SLOTS);    // variable index width
  localparam int unsigned PROD_W    = DATA_W + X_W;     // one product
  localparam int unsigned SUM_W     = PROD_W + $clog2(SLOTS); // one dot product
  localparam int unsigned PIM_LAT   = 3;                // row buffer, s-a, AR registers

  typedef logic signed [DATA_W-1:0] coef_t;
  typedef logic        [X_W-1:0]    xval_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [SUM_W-1:0]  sum_t;
  typedef logic        [ROW_AW-1:0] row_t;
  typedef logic        [VAR_W-1:0]  var_t;

  localparam xval_t X_ONE = xval_t'(1) << X_FRAC;       // 1.0 in X format
  localparam xval_t X_RAW = xval_t'(1);                 // X value that reads a slot back unscaled

  // One request to the PIM array: a row, the X value applied to each slot
  // (through the data-dependent precharge) and the slots the adder
  // reduction includes in its sum.
  typedef struct packed {
    row_t                   row;
    xval_t [SLOTS-1:0]      xv;
    logic  [SLOTS-1:0]      incl;
    logic  [7:0]            tag;
  } pim_req_t;

  typedef struct packed {
    prod_t [SLOTS-1:0]      prod;   // s-a output per slot: C*X
    sum_t                   sum;    // adder reduction over incl slots
    logic  [7:0]            tag;
  } pim_rsp_t;

  typedef enum logic [1:0] {
    OP_VFC    = 2'd0,   // detect sparsity, set VS
    OP_VSASLE = 2'd1,   // SA engine if sparse, else SLE engine; writes VX (and VC)
    OP_VBB    = 2'd2    // branch and bound on VX; writes VB and VC; NOP if sparse
  } op_e;

  // Integer part of an X value, and its fraction bits.
  function automatic xval_t x_floor(input xval_t x);
    return x & ~xval_t'((1 << X_FRAC) - 1);
  endfunction

endpackage
