// tb_neural_cache: end-to-end test of the whole accelerator at reduced size
// (2 slices, 3 ways per slice; way 2 is the reserved output way).
//
// The test runs one small convolution layer the way the accelerator maps it:
// every bit line holds one input channel of one output pixel, a group of 8
// adjacent bit lines holds the 8 channels of one pixel, and each pixel has
// a 2x2 filter window (K = 4 products per channel).
//   1. filters (K bytes per bit line, rows 0..31) and a per-pixel bias
//      (27-bit two's complement, rows 140..166) are broadcast over the ring
//      to both slices and written through the replication latch so that both
//      arrays of each pair get them;
//   2. inputs (rows 32..63) go to slice 0 as regular words through the
//      transpose unit (C_TMU_WR then C_WRITE_T) and to slice 1 as ready
//      bit slices (unicast C_WRITE);
//   3. broadcast instructions: ZERO/ONES of the constant rows, K x (MUL,
//      ADD accumulate), three REDUCE steps (shift 4, 2, 1) that sum the 8
//      channels into the first bit line of each group, ADD bias, RELU, then
//      MOVE by 8 bit lines and MAX as a 2:1 pooling of neighbouring pixels;
//   4. the results are copied by C_XFER into the reserved way and read back
//      through the reply ring, and compared with a model computed here from
//      the same random data.
// Each mechanism (broadcast, unicast, transpose, replication latch,
// predicated writes, FIFO queueing behind a busy slice, reduction,
// RELU clamping, MAX choosing either operand, transfer, replies from the far
// slice) is counted and must happen at least once. The busy time of one
// 8-bit MUL is checked against its cycle count (n*n + 4n - 1 plus the 2n
// zeroing cycles of the product rows, 95 cycles).
module tb_neural_cache;
  import nc_pkg::*;
  localparam int NS = 2, NW = 3, K = 4, NE = NBANKS * 2 * COLS;  // elements per way
  localparam logic [NWAYS_MAX-1:0] COMP = 20'b011, RSV = 20'b100;

  logic clk = 0, rst_n = 0;
  logic host_req_valid, host_rsp_valid;
  req_t host_req;
  rsp_t host_rsp;
  logic [NS-1:0] slice_busy, cbox_full;
  int checks = 0, failures = 0;

  neural_cache #(.NSLICES(NS), .NWAYS(NW)) dut (.*);

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

  // ------------------------------------------------------ mechanism counters
  int n_dlv [NS];
  int n_tmu, n_rep, n_pred, n_queue, n_xfer, n_far_rsp, n_reduce_cyc;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_slice[0].dlv_v) n_dlv[0]++;
    if (dut.g_slice[1].dlv_v) n_dlv[1]++;
    if (dut.g_slice[0].tmu_op) n_tmu++;
    if (dut.g_slice[0].rep_replay) n_rep++;
    if (dut.g_slice[1].rep_replay) n_rep++;
    if (dut.g_slice[0].u_slice.g_way[0].g_bank[0].u_bank.fsm_ctl.pred &&
        dut.g_slice[0].u_slice.g_way[0].g_bank[0].u_bank.fsm_ctl.wen) n_pred++;
    if (dut.g_slice[0].u_slice.g_way[0].g_bank[0].u_bank.fsm_ctl.din_shift &&
        dut.g_slice[0].u_slice.g_way[0].g_bank[0].u_bank.fsm_ctl.wen) n_reduce_cyc++;
    if (!dut.g_slice[0].fifo_empty && slice_busy[0]) n_queue++;
    if (dut.g_slice[0].u_slice.xf_v) n_xfer++;
    if (host_rsp_valid && host_rsp.src == 4'd1) n_far_rsp++;
  end

  logic [BUS_W-1:0] rsp_q [$];
  always @(posedge clk) if (rst_n && host_rsp_valid) rsp_q.push_back(host_rsp.data);

  int n_bcast_sent, n_uni_sent [NS];
  task automatic send(input logic bc, input int dst, input cmd_t c);
    req_t r;
    while (cbox_full != '0) @(posedge clk);
    r = '0; r.bcast = bc; r.dst = 4'(dst); r.hops = bc ? 4'(NS - 1) : 4'(dst); r.cmd = c;
    #1; host_req = r; host_req_valid = 1; @(posedge clk); #1; host_req_valid = 0;
    if (bc) n_bcast_sent++; else n_uni_sent[dst]++;
  endtask

  // wait until both slices are idle, queues empty and the ring quiet
  task automatic drain();
    int quiet = 0;
    while (quiet < 8) begin
      @(posedge clk);
      if (slice_busy == '0 && dut.g_slice[0].fifo_empty && dut.g_slice[1].fifo_empty
          && dut.rq_v == '0 && dut.rs_v == '0) quiet++;
      else quiet = 0;
    end
    #1;
  endtask

  task automatic instr(input op_e op, input int a, input int b, input int d, input int n,
                       input int nb, input int sh);
    cmd_t c = '0;
    c.kind = C_INSTR; c.way_mask = COMP;
    c.instr.op = op; c.instr.a = ROW_W'(a); c.instr.b = ROW_W'(b); c.instr.d = ROW_W'(d);
    c.instr.n = 6'(n); c.instr.nb = 6'(nb); c.instr.shift = ROW_W'(sh);
    send(1, 0, c);
  endtask

  // ------------------------------------------------------------ the data
  // element e = (bank*2 + pair)*256 + bit line; same in both arrays of a pair
  logic [7:0]  W [K][NE];
  logic [7:0]  X [NS][K][NE];
  logic [26:0] B [NE];
  logic [26:0] R [NS][NE];

  // bus word for row 'row' of a field, chunk ch: bank q, pair p, bit j
  function automatic logic [BUS_W-1:0] word_of(input int s, input int field, input int bitpos,
                                               input int ch);
    logic [BUS_W-1:0] wd = '0;
    for (int q = 0; q < NBANKS; q++)
      for (int p = 0; p < 2; p++)
        for (int j = 0; j < CHUNK_W; j++) begin
          automatic int e = (q*2 + p)*COLS + ch*CHUNK_W + j;
          automatic int kk = bitpos / 8, bb = bitpos % 8;
          case (field)
            0: wd[64*q + 32*p + j] = W[kk][e][bb];
            1: wd[64*q + 32*p + j] = X[s][kk][e][bb];
            default: wd[64*q + 32*p + j] = B[e][bitpos];
          endcase
        end
    return wd;
  endfunction

  int n_relu_clamp, n_max_a, n_max_b;

  initial begin
    cmd_t c;
    int mul_cycles;
    host_req_valid = 0; host_req = '0;
    for (int e = 0; e < NE; e++) begin
      for (int k = 0; k < K; k++) begin
        W[k][e] = 8'($urandom);
        for (int s = 0; s < NS; s++) X[s][k][e] = 8'($urandom);
      end
      B[e] = 27'(int'($urandom_range(0, 4_000_000)) - 2_600_000);
    end
    // reference model
    for (int s = 0; s < NS; s++) begin
      logic [26:0] act [NE];
      for (int e = 0; e < NE; e += 8) begin
        logic [26:0] acc;
        acc = '0;
        for (int c2 = 0; c2 < 8; c2++)
          for (int k = 0; k < K; k++) acc += 27'(W[k][e+c2]) * 27'(X[s][k][e+c2]);
        acc += B[e];
        if (acc[26]) begin acc = '0; n_relu_clamp++; end
        act[e] = acc;
      end
      for (int e = 0; e < NE; e += 8) begin
        logic [26:0] nb2;
        nb2 = ((e % COLS) + 8 < COLS) ? act[e+8] : '0;
        if (act[e] >= nb2) n_max_a++; else n_max_b++;
        R[s][e] = (act[e] >= nb2) ? act[e] : nb2;
      end
    end

    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;

    // 1. filters and bias, broadcast, replicated into both arrays of a pair
    for (int r = 0; r < 8*K; r++)
      for (int ch = 0; ch < NCHUNK; ch++) begin
        c = '0; c.kind = C_WRITE; c.way_mask = COMP; c.row = ROW_W'(r); c.chunk = 3'(ch);
        c.rep = 1; c.data = word_of(0, 0, r, ch); send(1, 0, c);
      end
    for (int r = 0; r < 27; r++)
      for (int ch = 0; ch < NCHUNK; ch++) begin
        c = '0; c.kind = C_WRITE; c.way_mask = COMP; c.row = ROW_W'(140 + r); c.chunk = 3'(ch);
        c.rep = 1; c.data = word_of(0, 2, r, ch); send(1, 0, c);
      end
    // 2a. slice 0 inputs through TMU 0: TMU column t = row*8 + chunk holds
    //     the bus word of (row 32 + t/8, chunk t%8); regular word i is row i
    for (int i = 0; i < BUS_W; i++) begin
      logic [BUS_W-1:0] reg_word;
      for (int t = 0; t < BUS_W; t++) reg_word[t] = word_of(0, 1, t / 8, t % 8)[i];
      c = '0; c.kind = C_TMU_WR; c.tmu = 0; c.row = ROW_W'(i); c.data = reg_word; send(0, 0, c);
    end
    for (int t = 0; t < BUS_W; t++) begin
      c = '0; c.kind = C_WRITE_T; c.tmu = 0; c.row2 = ROW_W'(t); c.way_mask = COMP;
      c.row = ROW_W'(32 + t / 8); c.chunk = 3'(t % 8); c.rep = 1; send(0, 0, c);
    end
    // 2b. slice 1 inputs as bit slices
    for (int r = 0; r < 8*K; r++)
      for (int ch = 0; ch < NCHUNK; ch++) begin
        c = '0; c.kind = C_WRITE; c.way_mask = COMP; c.row = ROW_W'(32 + r); c.chunk = 3'(ch);
        c.rep = 1; c.data = word_of(1, 1, r, ch); send(0, 1, c);
      end
    drain();

    // 3. compute
    instr(OP_ZERO, 0, 0, ZERO_ROW, 1, 0, 0);
    instr(OP_ONES, 0, 0, ONES_ROW, 1, 0, 0);
    instr(OP_ZERO, 0, 0, 80, 24, 0, 0);
    drain();
    mul_cycles = 0;
    instr(OP_MUL, 0, 32, 64, 8, 0, 0);
    while (!slice_busy[0]) @(posedge clk);
    while (slice_busy[0]) begin @(posedge clk); mul_cycles++; end
    chk(mul_cycles == 95, $sformatf("MUL 8-bit busy for %0d cycles (95 expected)", mul_cycles));
    instr(OP_ADD, 80, 64, 80, 24, 16, 0);
    for (int k = 1; k < K; k++) begin
      instr(OP_MUL, 8*k, 32 + 8*k, 64, 8, 0, 0);
      instr(OP_ADD, 80, 64, 80, 24, 16, 0);
    end
    instr(OP_REDUCE, 80, 0, 110, 24, 0, 4);
    instr(OP_REDUCE, 80, 0, 110, 25, 0, 2);
    instr(OP_REDUCE, 80, 0, 110, 26, 0, 1);
    instr(OP_ADD, 80, 140, 80, 27, 27, 0);
    instr(OP_RELU, 80, 0, 0, 27, 0, 0);
    instr(OP_MOVE, 80, 0, 170, 27, 0, 8);
    instr(OP_MAX, 80, 170, 200, 27, 0, 0);
    drain();

    // 4. copy the results of way 0 into the reserved way, both slices at once
    for (int r = 0; r < 27; r++)
      for (int ch = 0; ch < NCHUNK; ch++) begin
        c = '0; c.kind = C_XFER; c.way = 0; c.row = ROW_W'(80 + r); c.chunk = 3'(ch);
        c.way_mask = RSV; c.row2 = ROW_W'(r); c.chunk2 = 3'(ch); send(1, 0, c);
      end
    drain();
    for (int s = 0; s < NS; s++) begin
      rsp_q.delete();
      for (int r = 0; r < 27; r++)
        for (int ch = 0; ch < NCHUNK; ch++) begin
          c = '0; c.kind = C_READ; c.way = 2; c.row = ROW_W'(r); c.chunk = 3'(ch); send(0, s, c);
        end
      drain();
      chk(rsp_q.size() == 27*NCHUNK, $sformatf("slice %0d: %0d replies", s, rsp_q.size()));
      for (int r = 0; r < 27 && rsp_q.size() > 0; r++)
        for (int ch = 0; ch < NCHUNK; ch++) begin
          logic [BUS_W-1:0] got, exp;
          got = rsp_q.pop_front(); exp = '0;
          for (int q = 0; q < NBANKS; q++)
            for (int p = 0; p < 2; p++)
              for (int j = 0; j < CHUNK_W; j += 8)
                exp[64*q + 32*p + j] = R[s][(q*2 + p)*COLS + ch*CHUNK_W + j][r];
          for (int q = 0; q < NBANKS; q++)
            for (int p = 0; p < 2; p++)
              for (int j = 0; j < CHUNK_W; j += 8)
                chk(got[64*q + 32*p + j] == exp[64*q + 32*p + j],
                    $sformatf("slice %0d result bit %0d, elem %0d", s, r, (q*2+p)*COLS + ch*CHUNK_W + j));
        end
    end
    // the replicated array (sel 1) of way 1 in slice 1 computed the same thing
    rsp_q.delete();
    for (int r = 0; r < 27; r++) begin
      c = '0; c.kind = C_READ; c.way = 1; c.sel = 1; c.row = ROW_W'(80 + r); c.chunk = 0; send(0, 1, c);
    end
    drain();
    chk(rsp_q.size() == 27, "27 replies from the replicated arrays");
    for (int r = 0; r < 27 && rsp_q.size() > 0; r++) begin
      logic [BUS_W-1:0] got;
      got = rsp_q.pop_front();
      for (int q = 0; q < NBANKS; q++)
        for (int p = 0; p < 2; p++)
          chk(got[64*q + 32*p] == R[1][(q*2 + p)*COLS][r], $sformatf("sel-1 array bit %0d q%0d p%0d", r, q, p));
    end

    // ------------------------------------------------- mechanism report
    $display("broadcasts %0d, unicasts %0d/%0d, deliveries %0d/%0d", n_bcast_sent,
             n_uni_sent[0], n_uni_sent[1], n_dlv[0], n_dlv[1]);
    $display("TMU ops %0d, latch replays %0d, predicated writes %0d, shifted writes %0d",
             n_tmu, n_rep, n_pred, n_reduce_cyc);
    $display("queued cycles %0d, transfers %0d, far replies %0d, RELU clamps %0d, MAX a/b %0d/%0d",
             n_queue, n_xfer, n_far_rsp, n_relu_clamp, n_max_a, n_max_b);
    chk(n_dlv[0] == n_bcast_sent + n_uni_sent[0], "slice 0 got every broadcast and its unicasts");
    chk(n_dlv[1] == n_bcast_sent + n_uni_sent[1], "slice 1 got every broadcast and its unicasts");
    chk(n_bcast_sent > 0, "broadcast happened");
    chk(n_uni_sent[0] > 0 && n_uni_sent[1] > 0, "unicast happened");
    chk(n_tmu == 2 * BUS_W, $sformatf("TMU operations %0d", n_tmu));
    chk(n_rep > 0, "replication latch replayed");
    chk(n_pred > 0, "predicated writes happened");
    chk(n_reduce_cyc > 0, "shifted (move/reduce) writes happened");
    chk(n_queue > 0, "commands queued behind a busy slice");
    chk(n_xfer == 27 * NCHUNK, "transfers");
    chk(n_far_rsp > 0, "replies travelled the ring from slice 1");
    chk(n_relu_clamp > 0, "RELU clamped a negative value");
    chk(n_max_a > 0 && n_max_b > 0, "MAX chose each operand");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
