// tb_ring_stop: self-checking test of a chain of ring stops.
//
// Builds a 4-stop ring, injects broadcast and unicast packets at stop 0 and
// checks that a broadcast is delivered once at every stop, a unicast only
// at its destination, one hop per cycle; then makes every stop produce a
// reply in the same cycle and checks all replies reach stop 0 in order of
// distance, the local queues absorbing the contention.
module tb_ring_stop;
  import nc_pkg::*;
  localparam int NS = 4;
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] rq_v, rs_v, dlv_v, loc_v, full;
  req_t rq [NS];
  rsp_t rs [NS];
  cmd_t dlv_c [NS];
  logic [BUS_W-1:0] loc_d [NS];
  logic host_v;
  req_t host_p;
  int checks = 0, failures = 0;
  int dcount [NS], dtime [NS];
  int cyc = 0;

  for (genvar k = 0; k < NS; k++) begin : g
    logic in_v; req_t in_p; logic ri_v; rsp_t ri;
    if (k == 0) begin : h assign in_v = host_v; assign in_p = host_p; end
    else begin : b assign in_v = rq_v[k-1]; assign in_p = rq[k-1]; end
    if (k == NS-1) begin : t assign ri_v = 0; assign ri = '0; end
    else begin : m assign ri_v = rs_v[k+1]; assign ri = rs[k+1]; end
    ring_stop #(.ID(4'(k))) u (.clk, .rst_n, .req_in_valid(in_v), .req_in(in_p),
      .req_out_valid(rq_v[k]), .req_out(rq[k]), .dlv_valid(dlv_v[k]), .dlv_cmd(dlv_c[k]),
      .rsp_in_valid(ri_v), .rsp_in(ri), .rsp_out_valid(rs_v[k]), .rsp_out(rs[k]),
      .loc_rsp_valid(loc_v[k]), .loc_rsp_data(loc_d[k]), .rq_full(full[k]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    for (int k = 0; k < NS; k++) if (dlv_v[k]) begin dcount[k]++; dtime[k] = cyc; end
  end
  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int got [$];
  always @(posedge clk) if (rst_n && rs_v[0]) got.push_back(int'(rs[0].src));

  initial begin
    int t0;
    host_v = 0; host_p = '0; loc_v = '0;
    for (int k = 0; k < NS; k++) begin dcount[k] = 0; loc_d[k] = '0; end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // broadcast
    host_v = 1; host_p = '0; host_p.bcast = 1; host_p.hops = 4'(NS - 1); host_p.cmd.row = 8'h5A;
    t0 = cyc + 1;
    @(posedge clk); #1; host_v = 0;
    repeat (NS + 2) @(posedge clk); #1;
    for (int k = 0; k < NS; k++) begin
      chk(dcount[k] == 1, $sformatf("bcast delivered once at %0d", k));
      chk(dtime[k] == t0 + k, $sformatf("bcast hop timing at %0d", k));
    end
    // unicast to stop 2
    for (int k = 0; k < NS; k++) dcount[k] = 0;
    host_v = 1; host_p = '0; host_p.dst = 2; host_p.hops = 2;
    @(posedge clk); #1; host_v = 0;
    repeat (NS + 2) @(posedge clk); #1;
    for (int k = 0; k < NS; k++) chk(dcount[k] == (k == 2), $sformatf("unicast at %0d", k));
    // replies from all stops at once
    loc_v = '1;
    for (int k = 0; k < NS; k++) loc_d[k] = BUS_W'(k * 17);
    @(posedge clk); #1; loc_v = '0;
    repeat (3 * NS) @(posedge clk); #1;
    chk(got.size() == NS, $sformatf("all replies arrived (%0d)", got.size()));
    for (int k = 0; k < got.size(); k++) chk(got[k] == k, $sformatf("reply order %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
