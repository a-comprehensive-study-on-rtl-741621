// pim_bank: one 8T SRAM bank of the L1 cache, reconfigured for in-memory
// dot products.
//
// The 8T cell has a write port (WWL/WBL) and a separate read port (RWL/RBL),
// so a row can be written while another row is read or computed. In compute
// mode the read bit line of each column is precharged to Vcc or Vcc/2
// according to one input bit X of that column; the bit line then falls below
// Vcc/2 only when both the stored bit and X are '1', so the sensed row is
// the bitwise AND of the stored row and the column X bits. A normal read is
// the same operation with every X bit at '1'. The sensed row is captured in
// the row buffer (sense-amplifier flops).
//
// Interface: we/waddr/wdata write a whole row; re/raddr/col_x read the row
// masked by col_x. Timing: the row buffer holds the result one clock after
// re. A read and a write in the same cycle to the same row return the old
// contents. The array has no reset; rows are read only after being written.
// Array size and the AND behaviour of the bit line follow the source; the
// analog precharge and sensing are modelled as their logical result.
module pim_bank #(
  parameter int unsigned ROWS = spark_pkg::ROWS,
  parameter int unsigned COLS = spark_pkg::COLS
) (
  input  logic                    clk,
  // write port (WWL / WBL)
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [COLS-1:0]         wdata,
  // read / compute port (RWL / RBL with data-dependent precharge)
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] raddr,
  input  logic [COLS-1:0]         col_x,
  output logic [COLS-1:0]         rbuf
);

  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rbuf <= mem[raddr] & col_x;
  end

endmodule
