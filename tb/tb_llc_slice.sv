// tb_llc_slice: self-checking test of one LLC slice (20 ways x 4 banks).
//
// 1. Broadcast: one C_WRITE per bus word fills the same rows of the compute
//    ways 0..17 at once (the filter-replication path); reads from several
//    ways return the same data.
// 2. Different data into the reserved way (way 18) and a C_INSTR limited to
//    ways 0..17: the way outside the mask must keep its data.
// 3. An 8-bit ADD runs in all compute ways (n + 1 cycles, slice busy and not
//    ready meanwhile); the results are read back.
// 4. C_XFER moves a result word from way 5 to way 18 and it is read there.
module tb_llc_slice;
  import nc_pkg::*;
  localparam int NW = 20;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rsp_valid, busy, rep_replay;
  cmd_t cmd;
  logic [BUS_W-1:0] rsp_data;
  int checks = 0, failures = 0;

  llc_slice dut (.*);

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

  function automatic logic [BUS_W-1:0] rnd();
    for (int k = 0; k < BUS_W/32; k++) rnd[32*k +: 32] = $urandom;
  endfunction

  task automatic send(input cmd_t c);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1; cmd_valid = 0;
  endtask

  task automatic rd(input int way, row, ch, sl, output logic [BUS_W-1:0] d);
    cmd_t c = '0;
    c.kind = C_READ; c.way = 5'(way); c.row = ROW_W'(row); c.chunk = 3'(ch); c.sel = 1'(sl);
    send(c);
    while (!rsp_valid) @(posedge clk);
    #1; d = rsp_data;
  endtask

  // bus-word model: way x row x chunk x sel
  logic [BUS_W-1:0] m [NW][32][8][2];
  logic [NW-1:0] cmask;
  logic [BUS_W-1:0] d;
  int cyc;

  initial begin
    cmd_t c;
    cmd_valid = 0; cmd = '0;
    cmask = 20'h3FFFF;   // ways 1-18 of the paper = indices 0..17
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // 1. broadcast rows 0..15 of both arrays of each pair
    for (int r = 0; r < 16; r++) for (int ch = 0; ch < 8; ch++) for (int sl = 0; sl < 2; sl++) begin
      c = '0; c.kind = C_WRITE; c.way_mask = cmask; c.row = ROW_W'(r); c.chunk = 3'(ch);
      c.sel = 1'(sl); c.data = rnd();
      for (int w = 0; w < NW; w++) if (cmask[w]) m[w][r][ch][sl] = c.data;
      send(c);
    end
    // 2. reserved way 18 gets its own data in the same rows
    for (int r = 0; r < 16; r++) for (int ch = 0; ch < 8; ch++) for (int sl = 0; sl < 2; sl++) begin
      c = '0; c.kind = C_WRITE; c.way_mask = 20'(1) << 18; c.row = ROW_W'(r); c.chunk = 3'(ch);
      c.sel = 1'(sl); c.data = rnd(); m[18][r][ch][sl] = c.data;
      send(c);
    end
    for (int w = 0; w < 19; w += 6) begin
      rd(w, 3, 5, 1, d); chk(d == m[w][3][5][1], $sformatf("broadcast read way %0d", w));
    end
    // 3. ADD rows 0..7 + 8..15 -> 20..28 on compute ways only
    c = '0; c.kind = C_INSTR; c.way_mask = cmask;
    c.instr = '{op: OP_ADD, a: 0, b: 8, d: 20, n: 8, nb: 8, shift: 0};
    send(c);
    cyc = 0; while (busy) begin chk(!cmd_ready, "not ready while busy"); @(posedge clk); #1; cyc++; end
    chk(cyc == 9, $sformatf("slice add cycles %0d", cyc));
    for (int w = 0; w < NW; w++) if (cmask[w])
      for (int ch = 0; ch < 8; ch++) for (int sl = 0; sl < 2; sl++)
        for (int col = 0; col < BUS_W; col++) begin
          logic [8:0] s; logic [7:0] a, b;
          for (int i = 0; i < 8; i++) begin a[i] = m[w][i][ch][sl][col]; b[i] = m[w][8+i][ch][sl][col]; end
          s = a + b;
          for (int i = 0; i < 9; i++) m[w][20+i][ch][sl][col] = s[i];
        end
    for (int r = 20; r < 29; r++) begin
      rd(5, r, r % 8, r % 2, d); chk(d == m[5][r][r%8][r%2], $sformatf("sum way 5 row %0d", r));
      rd(17, r, 7 - r % 8, 1 - r % 2, d); chk(d == m[17][r][7-r%8][1-r%2], $sformatf("sum way 17 row %0d", r));
    end
    rd(18, 3, 5, 1, d); chk(d == m[18][3][5][1], "reserved way untouched by the instruction");
    // 4. transfer a result word from way 5 to way 18
    c = '0; c.kind = C_XFER; c.way = 5; c.row = 24; c.chunk = 2; c.sel = 0;
    c.way_mask = 20'(1) << 18; c.row2 = 100; c.chunk2 = 6; c.sel2 = 1;
    send(c);
    rd(18, 100, 6, 1, d); chk(d == m[5][24][2][0], "transfer to reserved way");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
