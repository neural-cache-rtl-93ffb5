// tb_bank_ctrl: self-checking test of the bank control FSM driving one
// compute array.
//
// The bench loads random data through the array's write port, issues each
// instruction, counts the cycles the FSM stays busy and compares both the
// array contents (read back row by row) and the cycle count with values
// computed here: ZERO/ONES/COPY/MOVE n, ADD n+1, REDUCE 2n+1,
// MUL n*n+4n-1 (7 cycles after the 2n clearing cycles for n = 2, as in the
// paper's 2-bit multiplication example), MAX/MIN 3n+3, RELU n+1.
module tb_bank_ctrl;
  import nc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, busy;
  instr_t instr;
  actl_t fsm_ctl, tb_ctl, ctl;
  logic use_tb;
  logic [COLS-1:0] din_ext, wps, dout, tag;
  int checks = 0, failures = 0;

  bank_ctrl u_ctrl (.clk, .rst_n, .instr_valid, .instr, .instr_ready, .busy, .ctl(fsm_ctl));
  assign ctl = use_tb ? tb_ctl : fsm_ctl;
  compute_array u_arr (.clk, .rst_n, .ctl, .din_ext, .wps, .dout, .tag);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr_row(input int row, input logic [COLS-1:0] data);
    use_tb = 1; tb_ctl = ACTL_IDLE; tb_ctl.wen = 1; tb_ctl.row_w = ROW_W'(row);
    tb_ctl.wsel = WS_DIN; din_ext = data; wps = '1;
    @(posedge clk); #1; use_tb = 0; tb_ctl = ACTL_IDLE;
  endtask

  function automatic logic [COLS-1:0] rd_row(input int row);
    return u_arr.mem[row];
  endfunction

  // element c of an n-bit transposed operand at row r
  function automatic longint elem(input int r, input int n, input int c);
    longint v = 0;
    for (int i = 0; i < n; i++) v |= longint'(u_arr.mem[r+i][c]) << i;
    return v;
  endfunction

  task automatic wr_vec(input int r, input int n, input longint v [COLS]);
    logic [COLS-1:0] row;
    for (int i = 0; i < n; i++) begin
      for (int c = 0; c < COLS; c++) row[c] = v[c][i];
      wr_row(r + i, row);
    end
  endtask

  task automatic run(input op_e op, input int a, b, d, n, nb, sh, input int exp_cycles);
    int cyc;
    instr = '{op: op, a: ROW_W'(a), b: ROW_W'(b), d: ROW_W'(d), n: 6'(n), nb: 6'(nb), shift: ROW_W'(sh)};
    instr_valid = 1;
    @(posedge clk); #1;
    instr_valid = 0;
    cyc = 0;
    while (busy) begin @(posedge clk); #1; cyc++; end
    chk(cyc == exp_cycles, $sformatf("%s cycles %0d expected %0d", op.name(), cyc, exp_cycles));
  endtask

  longint va [COLS], vb [COLS], vx [COLS], e;
  bit ok;

  initial begin
    use_tb = 0; tb_ctl = ACTL_IDLE; din_ext = '0; wps = '1; instr_valid = 0; instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // constant rows
    run(OP_ZERO, 0, 0, ZERO_ROW, 1, 0, 0, 1);
    run(OP_ONES, 0, 0, ONES_ROW, 1, 0, 0, 1);
    chk(rd_row(ZERO_ROW) == '0 && rd_row(ONES_ROW) == '1, "constant rows");

    // ADD 8-bit a + 4-bit b (zero-extended) -> 9 bits
    for (int c = 0; c < COLS; c++) begin va[c] = $urandom % 256; vb[c] = $urandom % 16; end
    wr_vec(0, 8, va); wr_vec(8, 4, vb);
    run(OP_ADD, 0, 8, 20, 8, 4, 0, 9);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(20, 9, c) != va[c] + vb[c]) ok = 0;
    chk(ok, "ADD result");

    // MUL 2-bit (the paper's example size) and 8-bit
    for (int c = 0; c < COLS; c++) begin va[c] = $urandom % 4; vb[c] = $urandom % 4; end
    wr_vec(0, 2, va); wr_vec(8, 2, vb);
    run(OP_MUL, 0, 8, 40, 2, 0, 0, 2*2 + 4*2 - 1);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(40, 4, c) != va[c] * vb[c]) ok = 0;
    chk(ok, "MUL 2-bit result");
    for (int c = 0; c < COLS; c++) begin va[c] = $urandom % 256; vb[c] = $urandom % 256; end
    va[0] = 255; vb[0] = 255; va[1] = 0; vb[2] = 0;
    wr_vec(0, 8, va); wr_vec(8, 8, vb);
    run(OP_MUL, 0, 8, 40, 8, 0, 0, 64 + 32 - 1);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(40, 16, c) != va[c] * vb[c]) ok = 0;
    chk(ok, "MUL 8-bit result");

    // MAC: accumulate the 16-bit product into a 24-bit partial sum (in place)
    for (int c = 0; c < COLS; c++) vx[c] = $urandom % (1 << 22);
    wr_vec(100, 24, vx);
    run(OP_ADD, 100, 40, 100, 24, 16, 0, 25);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(100, 24, c) != (vx[c] + va[c] * vb[c]) % (1 << 24)) ok = 0;
    chk(ok, "accumulate result");

    // COPY and MOVE
    run(OP_COPY, 0, 0, 60, 8, 0, 0, 8);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(60, 8, c) != va[c]) ok = 0;
    chk(ok, "COPY result");
    run(OP_MOVE, 0, 0, 60, 8, 0, 32, 8);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(60, 8, c) != (c + 32 < COLS ? va[c+32] : 0)) ok = 0;
    chk(ok, "MOVE result");

    // REDUCE: two steps fold 4 groups of 64 bit lines into the first 64
    for (int c = 0; c < COLS; c++) va[c] = $urandom % 256;
    wr_vec(0, 8, va);
    run(OP_REDUCE, 0, 0, 60, 8, 0, 128, 17);
    run(OP_REDUCE, 0, 0, 60, 9, 0, 64, 19);
    ok = 1;
    for (int c = 0; c < 64; c++) if (elem(0, 10, c) != va[c] + va[c+64] + va[c+128] + va[c+192]) ok = 0;
    chk(ok, "REDUCE result");

    // MAX and MIN (unsigned 8-bit), scratch at 200
    for (int c = 0; c < COLS; c++) begin va[c] = $urandom % 256; vb[c] = $urandom % 256; end
    va[3] = vb[3];
    wr_vec(0, 8, va); wr_vec(8, 8, vb);
    run(OP_MAX, 0, 8, 200, 8, 0, 0, 27);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(0, 8, c) != (va[c] > vb[c] ? va[c] : vb[c])) ok = 0;
    chk(ok, "MAX result");
    wr_vec(0, 8, va);
    run(OP_MIN, 0, 8, 200, 8, 0, 0, 27);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(0, 8, c) != (va[c] < vb[c] ? va[c] : vb[c])) ok = 0;
    chk(ok, "MIN result");

    // RELU on 8-bit two's complement
    for (int c = 0; c < COLS; c++) va[c] = $urandom % 256;
    wr_vec(0, 8, va);
    run(OP_RELU, 0, 0, 0, 8, 0, 0, 9);
    ok = 1; for (int c = 0; c < COLS; c++) if (elem(0, 8, c) != (va[c] >= 128 ? 0 : va[c])) ok = 0;
    chk(ok, "RELU result");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
