// llc_slice: one 2.5 MB last-level-cache slice used as a SIMD compute unit.
//
// NWAYS ways of 4 banks each (80 banks, 320 compute arrays by default).
// Ways 1-18 hold filters and compute, way 19 holds a layer's inputs and
// outputs and way 20 stays with the CPU; which ways run an instruction or
// receive a write is set per command by way_mask, so this module treats all
// ways alike.
//
// Interconnect inside the slice:
//  * address bus: a C_INSTR command is broadcast to the bank control FSM of
//    every bank in the ways of way_mask;
//  * data bus: 256 bits made of four 64-bit quadrant buses; quadrant bus q
//    reaches bank q of every way. A C_WRITE puts bits 64q+63:64q on bank q of
//    all ways in way_mask (broadcast);
//  * C_READ reads bank q of way 'way' for q = 0..3 and returns the 256 bits
//    on rsp_data two cycles after the command (bank read + output register);
//  * C_XFER reads way 'way' at (row, chunk, sel) and, one cycle later, writes
//    the word into the ways of way_mask at (row2, chunk2, sel2): this moves
//    results from compute ways to the reserved way.
//
// Handshake: cmd_ready is low while any bank computes or while a transfer
// occupies the bus in its write cycle. The command kinds that concern the
// TMUs are handled by the cbox and never reach this module.
module llc_slice
  import nc_pkg::*;
#(
  parameter int NWAYS = NWAYS_MAX
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  output logic              cmd_ready,
  output logic              rsp_valid,
  output logic [BUS_W-1:0]  rsp_data,
  output logic              busy,
  output logic              rep_replay   // some bank replayed its latch this cycle
);

  logic [NWAYS-1:0][NBANKS-1:0]              b_busy, b_rdy, b_rdv, b_rep;
  logic [NWAYS-1:0][NBANKS-1:0][BANK_W-1:0]  b_rdata;

  // transfer pipeline: read in cycle t, write in cycle t+1
  logic             xf_v;
  cmd_t             xf_cmd;
  logic             rd_pend;   // a C_READ (not a transfer) is in flight
  logic [BUS_W-1:0] rd_word;
  logic [4:0]       rd_way_q;  // way read in the previous cycle

  logic take;
  assign busy      = |b_busy;
  assign cmd_ready = (&b_rdy) && !xf_v;
  assign take      = cmd_valid && cmd_ready;
  assign rep_replay = |b_rep;

  always_comb begin
    rd_word = '0;
    for (int w = 0; w < NWAYS; w++)
      if (5'(w) == rd_way_q)
        for (int q = 0; q < NBANKS; q++) rd_word[BANK_W*q +: BANK_W] |= b_rdata[w][q];
  end

  for (genvar w = 0; w < NWAYS; w++) begin : g_way
    for (genvar q = 0; q < NBANKS; q++) begin : g_bank
      logic             wr_en, rd_en, iv;
      logic [ROW_W-1:0] wr_row;
      logic [2:0]       wr_chunk;
      logic             wr_sel, wr_rep;
      logic [BANK_W-1:0] wr_data;
      always_comb begin
        iv       = take && cmd.kind == C_INSTR && cmd.way_mask[w];
        wr_en    = 1'b0;
        wr_row   = cmd.row;
        wr_chunk = cmd.chunk;
        wr_sel   = cmd.sel;
        wr_rep   = cmd.rep;
        wr_data  = cmd.data[BANK_W*q +: BANK_W];
        if (xf_v) begin
          wr_en    = xf_cmd.way_mask[w];
          wr_row   = xf_cmd.row2;
          wr_chunk = xf_cmd.chunk2;
          wr_sel   = xf_cmd.sel2;
          wr_rep   = 1'b0;
          wr_data  = rd_word[BANK_W*q +: BANK_W];
        end else if (take && cmd.kind == C_WRITE) begin
          wr_en    = cmd.way_mask[w];
        end
        rd_en = take && (cmd.kind == C_READ || cmd.kind == C_XFER) && (5'(w) == cmd.way);
      end
      cache_bank u_bank (
        .clk, .rst_n,
        .instr_valid(iv), .instr(cmd.instr), .instr_ready(b_rdy[w][q]), .busy(b_busy[w][q]),
        .wr_en, .wr_row, .wr_chunk, .wr_sel, .wr_rep, .wr_data,
        .rd_en, .rd_row(cmd.row), .rd_chunk(cmd.chunk), .rd_sel(cmd.sel),
        .rd_data(b_rdata[w][q]), .rd_valid(b_rdv[w][q]), .rep_replay(b_rep[w][q])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xf_v      <= 1'b0;
      xf_cmd    <= '0;
      rd_pend   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      rd_way_q  <= '0;
    end else begin
      if (take && (cmd.kind == C_READ || cmd.kind == C_XFER)) rd_way_q <= cmd.way;
      xf_v    <= take && cmd.kind == C_XFER;
      if (take && cmd.kind == C_XFER) xf_cmd <= cmd;
      rd_pend <= take && cmd.kind == C_READ;
      rsp_valid <= rd_pend;
      if (rd_pend) rsp_data <= rd_word;
    end
  end

endmodule
