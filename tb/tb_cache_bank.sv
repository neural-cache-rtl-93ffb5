// tb_cache_bank: self-checking test of one 32 KB bank (four compute arrays).
//
// 1. Plain bus writes: 64-bit words, 32 bits to the selected array of each
//    sense-amp pair, read back through the bus read port (one-cycle latency).
// 2. Replicated writes: the 64-bit latch replays every word into the other
//    array of each pair one cycle later, so filling all four arrays with the
//    same rows takes N + 1 bus cycles instead of 2N; checked by reading all
//    four arrays and by counting replay cycles.
// 3. An 8-bit ADD instruction runs on all four arrays at once (n + 1 cycles)
//    and the sums are read back over the bus.
module tb_cache_bank;
  import nc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, busy;
  instr_t instr;
  logic wr_en, wr_sel, wr_rep, rd_en, rd_sel, rd_valid, rep_replay;
  logic [ROW_W-1:0] wr_row, rd_row;
  logic [2:0] wr_chunk, rd_chunk;
  logic [BANK_W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0, replays = 0;

  cache_bank dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rep_replay) replays++;
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // model: 4 arrays x rows x 8 chunks x 32 bits
  logic [31:0] m [4][ROWS][8];

  task automatic bus_wr(input int row, ch, sel, rep, input logic [63:0] d);
    wr_en = 1; wr_row = ROW_W'(row); wr_chunk = 3'(ch); wr_sel = 1'(sel); wr_rep = 1'(rep); wr_data = d;
    m[sel][row][ch] = d[31:0]; m[2+sel][row][ch] = d[63:32];
    if (rep) begin m[1-sel][row][ch] = d[31:0]; m[3-sel][row][ch] = d[63:32]; end
    @(posedge clk); #1;
    wr_en = 0; wr_rep = 0;
  endtask

  task automatic bus_rd(input int row, ch, sel, output logic [63:0] d);
    rd_en = 1; rd_row = ROW_W'(row); rd_chunk = 3'(ch); rd_sel = 1'(sel);
    @(posedge clk); #1;
    rd_en = 0;
    chk(rd_valid, "read valid");
    d = rd_data;
  endtask

  logic [63:0] d;
  int cyc;
  logic [8:0] s;

  initial begin
    instr_valid = 0; instr = '0; wr_en = 0; wr_rep = 0; rd_en = 0;
    wr_row = '0; wr_chunk = '0; wr_sel = 0; wr_data = '0; rd_row = '0; rd_chunk = '0; rd_sel = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // 1. plain writes to a few rows of both arrays of each pair
    for (int r = 0; r < 4; r++)
      for (int ch = 0; ch < 8; ch++)
        for (int sl = 0; sl < 2; sl++) bus_wr(r, ch, sl, 0, {$urandom, $urandom});
    for (int r = 0; r < 4; r++)
      for (int ch = 0; ch < 8; ch++)
        for (int sl = 0; sl < 2; sl++) begin
          bus_rd(r, ch, sl, d);
          chk(d == {m[2+sl][r][ch], m[sl][r][ch]}, $sformatf("plain r%0d c%0d s%0d", r, ch, sl));
        end
    // 2. replicated writes of 16 rows (operands A rows 0..7, B rows 8..15)
    replays = 0; cyc = 0;
    for (int r = 0; r < 16; r++)
      for (int ch = 0; ch < 8; ch++) begin bus_wr(r, ch, 0, 1, {$urandom, $urandom}); cyc++; end
    @(posedge clk); #1; cyc++;   // last replay
    chk(replays == 16 * 8, $sformatf("replay count %0d", replays));
    chk(cyc == 16 * 8 + 1, "replicated fill takes N+1 bus cycles");
    for (int r = 0; r < 16; r++)
      for (int ch = 0; ch < 8; ch++)
        for (int sl = 0; sl < 2; sl++) begin
          bus_rd(r, ch, sl, d);
          chk(d == {m[2+sl][r][ch], m[sl][r][ch]}, $sformatf("rep r%0d c%0d s%0d", r, ch, sl));
        end
    chk(m[0][3][2] == m[1][3][2] && m[2][9][7] == m[3][9][7], "replica equal");
    // 3. ADD a(rows 0..7) + b(rows 8..15) -> rows 20..28, in all four arrays
    instr = '{op: OP_ADD, a: 0, b: 8, d: 20, n: 8, nb: 8, shift: 0};
    instr_valid = 1; @(posedge clk); #1; instr_valid = 0;
    cyc = 0; while (busy) begin @(posedge clk); #1; cyc++; end
    chk(cyc == 9, $sformatf("add cycles %0d", cyc));
    for (int k = 0; k < 4; k++)
      for (int col = 0; col < COLS; col++) begin
        logic [7:0] a, b;
        for (int i = 0; i < 8; i++) begin
          a[i] = m[k][i][col/32][col%32]; b[i] = m[k][8+i][col/32][col%32];
        end
        s = a + b;
        for (int i = 0; i < 9; i++) m[k][20+i][col/32][col%32] = s[i];
      end
    for (int r = 20; r < 29; r++)
      for (int ch = 0; ch < 8; ch++)
        for (int sl = 0; sl < 2; sl++) begin
          bus_rd(r, ch, sl, d);
          chk(d == {m[2+sl][r][ch], m[sl][r][ch]}, $sformatf("sum r%0d c%0d s%0d", r, ch, sl));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
