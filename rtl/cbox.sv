// cbox: cache control box of one slice, with its transpose memory units.
//
// Commands delivered by the ring stop are queued in a FIFO (DEPTH entries)
// and issued in order:
//  * C_TMU_WR / C_TMU_WRCOL write a row / a column of TMU 'tmu' (one cycle);
//  * C_TMU_RD returns TMU row 'row' as a reply;
//  * C_WRITE_T becomes a C_WRITE whose data is column 'row2' of TMU 'tmu',
//    i.e. the transposed view of regular words written earlier;
//  * all other kinds go to the slice as they are, when it is ready.
// Replies (slice reads and TMU reads) leave on rsp_valid/rsp_data; a reply
// appears two cycles after its command issues, whichever kind it is, so
// two replies never meet (one command issues per cycle at most).
//
// The paper places "a few" TMUs in the C-BOX and says the C-BOX transposes
// first-layer inputs; the queue, the command set and NTMU = 2 are this
// design's choices. The ring cannot be stalled, so a full queue is a
// software error: fifo_full is exported and an assertion checks that no
// command is lost.
module cbox
  import nc_pkg::*;
#(
  parameter int NTMU  = 2,
  parameter int DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the ring stop
  input  logic              in_valid,
  input  cmd_t              in_cmd,
  output logic              fifo_full,
  output logic              fifo_empty,
  // to the slice
  output logic              s_valid,
  output cmd_t              s_cmd,
  input  logic              s_ready,
  input  logic              s_rsp_valid,
  input  logic [BUS_W-1:0]  s_rsp_data,
  // replies towards the ring
  output logic              rsp_valid,
  output logic [BUS_W-1:0]  rsp_data,
  // TMU activity, for performance counters
  output logic              tmu_op
);

  localparam int AW = $clog2(DEPTH);

  cmd_t          q [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  cmd_t          head;
  logic          pop, is_tmu;

  assign head       = q[rp];
  assign fifo_full  = (cnt == (AW+1)'(DEPTH));
  assign fifo_empty = (cnt == '0);
  assign is_tmu     = head.kind inside {C_TMU_WR, C_TMU_WRCOL, C_TMU_RD};

  // TMUs
  logic [NTMU-1:0]        t_wr_row, t_wr_col;
  logic [BUS_W-1:0]       t_row [NTMU];
  logic [BUS_W-1:0]       t_col [NTMU];
  for (genvar t = 0; t < NTMU; t++) begin : g_tmu
    tmu #(.N(BUS_W)) u_tmu (
      .clk,
      .wr_row_en(t_wr_row[t]), .wr_col_en(t_wr_col[t]),
      .wr_addr(head.row), .wr_data(head.data),
      .rd_row_addr(head.row), .rd_row_data(t_row[t]),
      .rd_col_addr(head.row2), .rd_col_data(t_col[t])
    );
  end

  always_comb begin
    pop      = 1'b0;
    s_valid  = 1'b0;
    s_cmd    = head;
    t_wr_row = '0;
    t_wr_col = '0;
    if (!fifo_empty) begin
      if (is_tmu) begin
        pop = 1'b1;
        if (head.kind == C_TMU_WR)    t_wr_row[head.tmu] = 1'b1;
        if (head.kind == C_TMU_WRCOL) t_wr_col[head.tmu] = 1'b1;
      end else begin
        s_valid = 1'b1;
        if (head.kind == C_WRITE_T) begin
          s_cmd.kind = C_WRITE;
          s_cmd.data = t_col[head.tmu];
        end
        pop = s_ready;
      end
    end
  end

  assign tmu_op = pop && (is_tmu || head.kind == C_WRITE_T);

  // TMU read reply, delayed to the same two cycles as a slice read
  logic             trd_v1, trd_v2;
  logic [BUS_W-1:0] trd_d1, trd_d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
      trd_v1 <= 1'b0; trd_v2 <= 1'b0;
      trd_d1 <= '0;   trd_d2 <= '0;
    end else begin
      if (in_valid && !fifo_full) begin
        q[wp] <= in_cmd;
        wp    <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(in_valid && !fifo_full) - (AW+1)'(pop);
      trd_v1 <= pop && head.kind == C_TMU_RD;
      if (pop && head.kind == C_TMU_RD) trd_d1 <= t_row[head.tmu];
      trd_v2 <= trd_v1;
      trd_d2 <= trd_d1;
    end
  end

  assign rsp_valid = s_rsp_valid | trd_v2;
  assign rsp_data  = trd_v2 ? trd_d2 : s_rsp_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> !fifo_full);
  a_one_reply: assert property (@(posedge clk) disable iff (!rst_n)
    !(s_rsp_valid && trd_v2));

endmodule
