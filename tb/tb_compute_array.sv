// tb_compute_array: self-checking test of one 256 x 256 compute array.
//
// Drives the per-cycle control word by hand: bus writes of whole rows and of
// single 32-bit chunks, two-row activation (checks the wired AND on DOUT),
// a bit-serial n-bit addition of 256 element pairs in n + 1 cycles (n sum
// cycles and a carry store), a predicated write and a move by k bit lines.
// Expected values come from a model of the stored rows kept in the bench.
module tb_compute_array;
  import nc_pkg::*;

  logic clk = 0, rst_n = 0;
  actl_t ctl;
  logic [COLS-1:0] din_ext, wps, dout, tag;
  int checks = 0, failures = 0;
  logic [COLS-1:0] model [ROWS];

  compute_array dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [COLS-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s\n got %h\n exp %h", what, got, exp);
    end
  endtask

  function automatic logic [COLS-1:0] rnd();
    for (int k = 0; k < COLS/32; k++) rnd[32*k +: 32] = $urandom;
  endfunction

  task automatic bus_write(input int row, input logic [COLS-1:0] data, input logic [COLS-1:0] mask);
    ctl = ACTL_IDLE; ctl.wen = 1; ctl.row_w = ROW_W'(row); ctl.wsel = WS_DIN;
    din_ext = data; wps = mask;
    @(posedge clk); #1;
    model[row] = (model[row] & ~mask) | (data & mask);
    ctl = ACTL_IDLE; wps = '1;
  endtask

  task automatic read_row(input int row, output logic [COLS-1:0] d);
    ctl = ACTL_IDLE; ctl.ren_a = 1; ctl.row_a = ROW_W'(row); #1;
    d = dout;
    ctl = ACTL_IDLE;
  endtask

  logic [COLS-1:0] r, a_row [8], b_row [8];
  int cyc;
  logic [8:0] ea, eb, es;

  initial begin
    ctl = ACTL_IDLE; din_ext = '0; wps = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // fill rows 0..31 with random data, then read back
    for (int rr = 0; rr < 32; rr++) bus_write(rr, rnd(), '1);
    for (int rr = 0; rr < 32; rr++) begin read_row(rr, r); check(r, model[rr], "row read"); end
    // chunk write: only columns 32*3 .. 32*3+31 change
    bus_write(5, rnd(), {{(COLS-32){1'b0}}, 32'hFFFF_FFFF} << 96);
    read_row(5, r); check(r, model[5], "chunk write");
    // two rows active: BL = A & B
    ctl.ren_a = 1; ctl.row_a = 3; ctl.ren_b = 1; ctl.row_b = 7; #1;
    check(dout, model[3] & model[7], "wired AND");
    ctl = ACTL_IDLE;
    // bit-serial add: A in rows 0..7, B in rows 8..15, sum -> rows 40..48
    cyc = 0;
    for (int i = 0; i < 8; i++) begin
      ctl = ACTL_IDLE;
      ctl.ren_a = 1; ctl.row_a = ROW_W'(i); ctl.ren_b = 1; ctl.row_b = ROW_W'(8 + i);
      ctl.c_en = 1; ctl.wen = 1; ctl.row_w = ROW_W'(40 + i); ctl.wsel = WS_SUM;
      @(posedge clk); #1; cyc++;
    end
    ctl = ACTL_IDLE; ctl.wen = 1; ctl.row_w = 48; ctl.wsel = WS_SUM; ctl.lat_rst = 1;
    @(posedge clk); #1; cyc++;
    ctl = ACTL_IDLE;
    checks++; if (cyc != 9) begin failures++; $display("FAIL add cycles %0d", cyc); end
    for (int c = 0; c < COLS; c++) begin
      ea = '0; eb = '0;
      for (int i = 0; i < 8; i++) begin ea[i] = model[i][c]; eb[i] = model[8+i][c]; end
      es = ea + eb;
      for (int i = 0; i < 9; i++) model[40+i][c] = es[i];
    end
    for (int i = 0; i < 9; i++) begin read_row(40 + i, r); check(r, model[40+i], "add result"); end
    // predicated write: tag <= row 2, then write ones (no row, Carry_out) to row 60 under tag
    bus_write(60, '0, '1);
    ctl = ACTL_IDLE; ctl.ren_a = 1; ctl.row_a = 2; ctl.t_en = 1; @(posedge clk); #1;
    check(tag, model[2], "tag load");
    ctl = ACTL_IDLE; ctl.wen = 1; ctl.row_w = 60; ctl.wsel = WS_COUT; ctl.pred = 1;
    @(posedge clk); #1;
    model[60] = model[2];
    read_row(60, r); check(r, model[60], "predicated write");
    // move row 4 by 16 bit lines toward bit line 0 into row 61
    ctl = ACTL_IDLE; ctl.ren_a = 1; ctl.row_a = 4; ctl.wen = 1; ctl.row_w = 61;
    ctl.wsel = WS_DIN; ctl.din_shift = 1; ctl.shift = 16;
    @(posedge clk); #1;
    model[61] = model[4] >> 16;
    read_row(61, r); check(r, model[61], "move");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
