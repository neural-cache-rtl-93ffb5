// tb_cbox: self-checking test of the C-BOX with a small slice behind it.
//
// 1. Transposition on the way in: 256 regular 256-bit words are written as
//    rows of TMU 0, then C_WRITE_T sends columns to the slice; reading the
//    slice must return bit slices (column c = bit c of all 256 words).
// 2. Transposition on the way out: bit slices written as TMU 1 columns are
//    read back as regular rows (C_TMU_RD replies).
// 3. Queueing: an instruction followed at once by reads; the reads wait in
//    the FIFO until the instruction ends and the replies come back in order.
module tb_cbox;
  import nc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, fifo_full, fifo_empty, s_valid, s_ready, s_rsp_valid, rsp_valid, tmu_op, busy, rep;
  cmd_t in_cmd, s_cmd;
  logic [BUS_W-1:0] s_rsp_data, rsp_data;
  int checks = 0, failures = 0, tmu_ops = 0;

  cbox dut (.*);
  llc_slice #(.NWAYS(2)) u_slice (.clk, .rst_n, .cmd_valid(s_valid), .cmd(s_cmd), .cmd_ready(s_ready),
    .rsp_valid(s_rsp_valid), .rsp_data(s_rsp_data), .busy, .rep_replay(rep));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && tmu_op) tmu_ops++;
  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic logic [BUS_W-1:0] rnd();
    for (int k = 0; k < BUS_W/32; k++) rnd[32*k +: 32] = $urandom;
  endfunction

  logic [BUS_W-1:0] rsp_q [$];
  always @(posedge clk) if (rst_n && rsp_valid) rsp_q.push_back(rsp_data);

  task automatic push(input cmd_t c);
    while (fifo_full) @(posedge clk);
    #1; in_cmd = c; in_valid = 1; @(posedge clk); #1; in_valid = 0;
  endtask

  logic [BUS_W-1:0] words [BUS_W];
  logic [BUS_W-1:0] e;

  initial begin
    cmd_t c;
    in_valid = 0; in_cmd = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // 1. regular words into TMU 0
    for (int r = 0; r < BUS_W; r++) begin
      words[r] = rnd();
      c = '0; c.kind = C_TMU_WR; c.tmu = 0; c.row = ROW_W'(r); c.data = words[r]; push(c);
    end
    // columns 0..15 to way 1, rows 0..15 (chunk 0, sel 0)
    for (int k = 0; k < 16; k++) begin
      c = '0; c.kind = C_WRITE_T; c.tmu = 0; c.row2 = ROW_W'(k); c.way_mask = 20'b10;
      c.row = ROW_W'(k); push(c);
    end
    for (int k = 0; k < 16; k++) begin
      c = '0; c.kind = C_READ; c.way = 1; c.row = ROW_W'(k); push(c);
    end
    repeat (60) @(posedge clk); #1;
    chk(rsp_q.size() == 16, $sformatf("16 replies (%0d)", rsp_q.size()));
    for (int k = 0; k < 16 && rsp_q.size() > 0; k++) begin
      // bus word = bank q gets bits 64q..; within a bank the low 32 bits go to
      // pair 0 chunk 0, so a read of (row k, chunk 0, sel 0) returns exactly
      // the bus word bits that were written there
      for (int r = 0; r < BUS_W; r++) e[r] = words[r][k];
      chk(rsp_q.pop_front() == e, $sformatf("transposed slice %0d", k));
    end
    // 2. bit slices as TMU 1 columns, regular rows back
    for (int k = 0; k < 8; k++) begin
      c = '0; c.kind = C_TMU_WRCOL; c.tmu = 1; c.row = ROW_W'(k); c.data = words[k]; push(c);
    end
    for (int r = 0; r < 4; r++) begin
      c = '0; c.kind = C_TMU_RD; c.tmu = 1; c.row = ROW_W'(r); push(c);
    end
    repeat (10) @(posedge clk); #1;
    chk(rsp_q.size() == 4, "4 TMU replies");
    for (int r = 0; r < 4 && rsp_q.size() > 0; r++) begin
      logic [BUS_W-1:0] got;
      got = rsp_q.pop_front();
      for (int k = 0; k < 8; k++) chk(got[k] == words[k][r], $sformatf("untranspose r%0d k%0d", r, k));
    end
    // 3. instruction, then reads queued behind it
    c = '0; c.kind = C_INSTR; c.way_mask = 20'b11; c.instr = '{op: OP_MUL, a: 0, b: 8, d: 40, n: 8, nb: 0, shift: 0};
    push(c);
    for (int k = 0; k < 3; k++) begin
      c = '0; c.kind = C_READ; c.way = 1; c.row = ROW_W'(k); push(c);
    end
    chk(!fifo_empty, "reads wait in the FIFO while the slice computes");
    repeat (150) @(posedge clk); #1;
    chk(rsp_q.size() == 3, "3 queued replies");
    chk(tmu_ops == 256 + 16 + 8 + 4, $sformatf("TMU operations %0d", tmu_ops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
