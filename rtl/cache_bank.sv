// cache_bank: one 32 KB data bank of an LLC slice used as a compute bank.
//
// Four 8 KB compute arrays form two pairs; the two arrays of a pair share
// sense amplifiers and together receive 32 bits per bus cycle. The 64-bit
// quadrant bus therefore carries 32 bits for pair 0 (bits 31:0) and 32 bits
// for pair 1 (bits 63:32). A bus word is written into the array of each pair
// chosen by 'sel', at word line 'row' and 32-column chunk 'chunk'.
//
// Replication latch: when 'rep' is set the bank also captures the 64-bit
// word, with its row and chunk, in a 64-bit latch and writes it into the
// other array of each pair in the next cycle, while the bus already
// delivers the next word. Data that all four arrays need thus costs one bus
// cycle per word instead of two (the "total input transfer time can be
// halved" of the design description; the exact replay timing is this
// design's choice).
//
// Compute: one bank_ctrl drives all four arrays with the same control word,
// so an instruction runs on 4 x 256 bit lines at once. While the FSM is busy
// the bus port must stay idle (checked by an assertion); software orders bus
// traffic and instructions.
//
// Read: 'rd_en' senses row 'rd_row' of the selected array in each pair;
// rd_data returns chunk 'rd_chunk' of both one cycle later (rd_valid).
module cache_bank
  import nc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // address bus: instruction broadcast
  input  logic               instr_valid,
  input  instr_t             instr,
  output logic               instr_ready,
  output logic               busy,
  // data bus write
  input  logic               wr_en,
  input  logic [ROW_W-1:0]   wr_row,
  input  logic [2:0]         wr_chunk,
  input  logic               wr_sel,
  input  logic               wr_rep,
  input  logic [BANK_W-1:0]  wr_data,
  // data bus read
  input  logic               rd_en,
  input  logic [ROW_W-1:0]   rd_row,
  input  logic [2:0]         rd_chunk,
  input  logic               rd_sel,
  output logic [BANK_W-1:0]  rd_data,
  output logic               rd_valid,
  // replication latch activity, for performance counters
  output logic               rep_replay
);

  actl_t fsm_ctl;
  actl_t            actl  [4];
  logic [COLS-1:0]  adin  [4];
  logic [COLS-1:0]  awps  [4];
  logic [COLS-1:0]  adout [4];

  // 64-bit replication latch
  logic              lat_v;
  logic [ROW_W-1:0]  lat_row;
  logic [2:0]        lat_chunk;
  logic              lat_sel;
  logic [BANK_W-1:0] lat_data;

  logic [BANK_W-1:0] rd_word;

  bank_ctrl u_ctrl (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .busy, .ctl(fsm_ctl)
  );

  assign rep_replay = lat_v;

  function automatic logic [COLS-1:0] chunk_mask(input logic [2:0] ch);
    return {{(COLS-CHUNK_W){1'b0}}, {CHUNK_W{1'b1}}} << (CHUNK_W * ch);
  endfunction

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      automatic int  p = k / 2;          // pair (sub-array)
      automatic logic s = 1'(k % 2);     // array within the pair
      actl[k] = fsm_ctl;
      adin[k] = '0;
      awps[k] = '1;
      if (wr_en && wr_sel == s) begin
        actl[k]       = ACTL_IDLE;
        actl[k].wen   = 1'b1;
        actl[k].row_w = wr_row;
        actl[k].wsel  = WS_DIN;
        adin[k]       = {NCHUNK{wr_data[CHUNK_W*p +: CHUNK_W]}};
        awps[k]       = chunk_mask(wr_chunk);
      end else if (lat_v && lat_sel == s) begin
        actl[k]       = ACTL_IDLE;
        actl[k].wen   = 1'b1;
        actl[k].row_w = lat_row;
        actl[k].wsel  = WS_DIN;
        adin[k]       = {NCHUNK{lat_data[CHUNK_W*p +: CHUNK_W]}};
        awps[k]       = chunk_mask(lat_chunk);
      end else if (rd_en && rd_sel == s) begin
        actl[k]       = ACTL_IDLE;
        actl[k].ren_a = 1'b1;
        actl[k].row_a = rd_row;
      end
    end
  end

  for (genvar k = 0; k < 4; k++) begin : g_arr
    logic [COLS-1:0] tag_unused;
    compute_array u_arr (
      .clk, .rst_n, .ctl(actl[k]), .din_ext(adin[k]), .wps(awps[k]),
      .dout(adout[k]), .tag(tag_unused)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lat_v      <= 1'b0;
      lat_row    <= '0;
      lat_chunk  <= '0;
      lat_sel    <= 1'b0;
      lat_data   <= '0;
      rd_valid   <= 1'b0;
      rd_data    <= '0;
    end else begin
      lat_v <= wr_en && wr_rep;
      if (wr_en && wr_rep) begin
        lat_row   <= wr_row;
        lat_chunk <= wr_chunk;
        lat_sel   <= ~wr_sel;
        lat_data  <= wr_data;
      end
      rd_valid   <= rd_en;
      if (rd_en) rd_data <= rd_word;
    end
  end

  always_comb begin
    logic [COLS-1:0] r0, r1;
    r0 = rd_sel ? adout[1] : adout[0];
    r1 = rd_sel ? adout[3] : adout[2];
    rd_word = {r1[CHUNK_W*rd_chunk +: CHUNK_W], r0[CHUNK_W*rd_chunk +: CHUNK_W]};
  end

  // The bus must not touch the arrays while an instruction runs, and a bus
  // write must not hit the array the latch is replaying into.
  a_no_bus_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(wr_en || rd_en));
  a_no_latch_clash: assert property (@(posedge clk) disable iff (!rst_n)
    (lat_v && wr_en) |-> (wr_sel != lat_sel));

endmodule
