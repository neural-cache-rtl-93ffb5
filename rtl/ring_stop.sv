// ring_stop: one stop of the inter-slice ring.
//
// The ring is bidirectional. Requests (commands from the memory side, which
// injects them at stop 0) travel in one direction: a packet arriving at a
// stop is delivered to the local C-BOX if it is a broadcast or addressed to
// this stop, and is forwarded to the next stop (one register per hop) while
// its hop count is not exhausted and it was not a unicast for this stop.
// Broadcast is how filter weights reach every slice. Replies travel the other
// way towards stop 0: traffic already on the ring has priority, and the
// local reply waits in a small queue (RQ entries) for a free slot.
//
// The paper gives the ring and its broadcast ability; the packet format,
// the hop counter and the fixed split of the two directions (requests one
// way, replies the other) are this design's choices.
module ring_stop
  import nc_pkg::*;
#(
  parameter logic [3:0] ID = 4'd0,
  parameter int         RQ = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // request direction
  input  logic  req_in_valid,
  input  req_t  req_in,
  output logic  req_out_valid,
  output req_t  req_out,
  output logic  dlv_valid,       // to the local C-BOX
  output cmd_t  dlv_cmd,
  // reply direction
  input  logic  rsp_in_valid,
  input  rsp_t  rsp_in,
  output logic  rsp_out_valid,
  output rsp_t  rsp_out,
  input  logic  loc_rsp_valid,   // from the local C-BOX
  input  logic [BUS_W-1:0] loc_rsp_data,
  output logic  rq_full
);

  localparam int AW = $clog2(RQ);

  logic mine, fwd;
  assign mine      = req_in.bcast || (req_in.dst == ID);
  assign dlv_valid = req_in_valid && mine;
  assign dlv_cmd   = req_in.cmd;
  assign fwd       = req_in_valid && (req_in.hops != 0) && (req_in.bcast || req_in.dst != ID);

  logic [BUS_W-1:0] rq [RQ];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;
  logic             send_loc;

  assign rq_full  = (cnt == (AW+1)'(RQ));
  assign send_loc = !rsp_in_valid && (cnt != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_out_valid <= 1'b0;
      req_out       <= '0;
      rsp_out_valid <= 1'b0;
      rsp_out       <= '0;
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      req_out_valid <= fwd;
      if (fwd) begin
        req_out      <= req_in;
        req_out.hops <= req_in.hops - 1'b1;
      end
      if (loc_rsp_valid && !rq_full) begin
        rq[wp] <= loc_rsp_data;
        wp     <= wp + 1'b1;
      end
      if (send_loc) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(loc_rsp_valid && !rq_full) - (AW+1)'(send_loc);
      rsp_out_valid <= rsp_in_valid || send_loc;
      if (rsp_in_valid)  rsp_out <= rsp_in;
      else if (send_loc) rsp_out <= '{src: ID, data: rq[rp]};
    end
  end

  a_rq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    loc_rsp_valid |-> !rq_full);

endmodule
