// tb_pim_bank: self-checking test of one 8T PIM bank at its full size
// (256 x 256). Writes random rows, then reads them back with random column
// X masks and checks the row buffer against stored AND mask, one cycle after
// the read. Also checks a read and a write to different rows in the same
// cycle, and that a read of the row being written returns the old contents.
module tb_pim_bank;
  localparam int ROWS = 256, COLS = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [7:0] waddr, raddr;
  logic [COLS-1:0] wdata, col_x, rbuf;
  logic [COLS-1:0] model [ROWS];

  pim_bank #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0; col_x = '0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      we = 1; waddr = 8'(r); wdata = rnd(); model[r] = wdata;
      @(negedge clk);
    end
    we = 0;
    // plain reads (all X = 1) and compute reads (random X)
    for (int t = 0; t < 600; t++) begin
      int r;
      logic [COLS-1:0] m;
      r = $urandom_range(0, ROWS - 1);
      m = (t < 100) ? '1 : rnd();
      re = 1; raddr = 8'(r); col_x = m;
      @(negedge clk);
      re = 0;
      check(rbuf == (model[r] & m), $sformatf("row %0d read/compute", r));
    end
    // read one row while writing another; read the row being written
    for (int t = 0; t < 50; t++) begin
      int r, w;
      logic [COLS-1:0] old;
      r = $urandom_range(0, ROWS - 1);
      w = (t % 2 == 0) ? r : (r + 1) % ROWS;
      old = model[r];
      we = 1; waddr = 8'(w); wdata = rnd();
      re = 1; raddr = 8'(r); col_x = '1;
      @(negedge clk);
      model[w] = wdata;
      we = 0; re = 0;
      check(rbuf == old, "read during write returns the contents before the write");
      re = 1; raddr = 8'(w);
      @(negedge clk);
      re = 0;
      check(rbuf == model[w], "written row reads back");
    end
    // row buffer holds while re is low
    begin
      logic [COLS-1:0] hold;
      hold = rbuf;
      repeat (3) @(negedge clk);
      check(rbuf == hold, "row buffer holds without a read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
