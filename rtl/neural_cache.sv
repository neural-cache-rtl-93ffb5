// neural_cache: the last-level cache of a 14-slice server processor turned
// into a bit-serial SIMD accelerator.
//
// NSLICES slices sit on a ring. Each slice is an llc_slice (20 ways x 4
// banks x 4 compute arrays of 256 x 256 bits, with its buses and one control
// FSM per bank), a cbox (command queue and two transpose units) and a
// ring_stop. The memory side (DRAM controller and host cores, not part of
// this RTL) injects request packets at stop 0 and receives replies there:
//   host_req_valid/host_req : one packet per cycle, unicast to a slice or
//                             broadcast to all (hop count set by the sender:
//                             destination index for unicast, NSLICES-1 for
//                             broadcast);
//   host_rsp_valid/host_rsp : read data with the number of the slice;
//   slice_busy, cbox_full   : status per slice, so that software can wait
//                             for an instruction to finish and pace packets.
// The request that leaves the last stop is fed back into stop 0 when the
// host is not injecting (a well-formed packet never gets that far).
module neural_cache
  import nc_pkg::*;
#(
  parameter int NSLICES = 14,
  parameter int NWAYS   = NWAYS_MAX
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_req_valid,
  input  req_t               host_req,
  output logic               host_rsp_valid,
  output rsp_t               host_rsp,
  output logic [NSLICES-1:0] slice_busy,
  output logic [NSLICES-1:0] cbox_full
);

  logic [NSLICES-1:0] rq_v, rs_v;   // request / reply ring outputs per stop
  req_t               rq   [NSLICES];
  rsp_t               rs   [NSLICES];

  for (genvar k = 0; k < NSLICES; k++) begin : g_slice
    logic             in_v, dlv_v, s_v, s_rdy, s_rsp_v, c_rsp_v, rsp_in_v;
    logic             rq_full, fifo_empty, tmu_op, rep_replay;
    req_t             in_p;
    rsp_t             rsp_in;
    cmd_t             dlv_c, s_c;
    logic [BUS_W-1:0] s_rsp_d, c_rsp_d;

    if (k == 0) begin : g_head
      assign in_v = host_req_valid | rq_v[NSLICES-1];
      assign in_p = host_req_valid ? host_req : rq[NSLICES-1];
    end else begin : g_body
      assign in_v = rq_v[k-1];
      assign in_p = rq[k-1];
    end
    if (k == NSLICES - 1) begin : g_tail
      assign rsp_in_v = 1'b0;
      assign rsp_in   = '0;
    end else begin : g_mid
      assign rsp_in_v = rs_v[k+1];
      assign rsp_in   = rs[k+1];
    end

    ring_stop #(.ID(4'(k))) u_stop (
      .clk, .rst_n,
      .req_in_valid(in_v), .req_in(in_p),
      .req_out_valid(rq_v[k]), .req_out(rq[k]),
      .dlv_valid(dlv_v), .dlv_cmd(dlv_c),
      .rsp_in_valid(rsp_in_v), .rsp_in(rsp_in),
      .rsp_out_valid(rs_v[k]), .rsp_out(rs[k]),
      .loc_rsp_valid(c_rsp_v), .loc_rsp_data(c_rsp_d),
      .rq_full(rq_full)
    );

    cbox u_cbox (
      .clk, .rst_n,
      .in_valid(dlv_v), .in_cmd(dlv_c),
      .fifo_full(cbox_full[k]), .fifo_empty(fifo_empty),
      .s_valid(s_v), .s_cmd(s_c), .s_ready(s_rdy),
      .s_rsp_valid(s_rsp_v), .s_rsp_data(s_rsp_d),
      .rsp_valid(c_rsp_v), .rsp_data(c_rsp_d),
      .tmu_op
    );

    llc_slice #(.NWAYS(NWAYS)) u_slice (
      .clk, .rst_n,
      .cmd_valid(s_v), .cmd(s_c), .cmd_ready(s_rdy),
      .rsp_valid(s_rsp_v), .rsp_data(s_rsp_d),
      .busy(slice_busy[k]), .rep_replay
    );
  end

  assign host_rsp_valid = rs_v[0];
  assign host_rsp       = rs[0];

  a_no_wrap: assert property (@(posedge clk) disable iff (!rst_n)
    !(host_req_valid && rq_v[NSLICES-1]));

endmodule
