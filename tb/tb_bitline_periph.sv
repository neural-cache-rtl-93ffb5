// tb_bitline_periph: self-checking test of the bit-line peripheral.
//
// Drives random operand pairs as they appear on the bit lines (bl = A&B,
// blb = ~A&~B) and checks, against a reference model kept here, the full
// adder outputs through each write-back mux input, the carry and tag
// latches with their enables and clear, and the predicated driver enable.
module tb_bitline_periph;
  import nc_pkg::*;
  localparam int W = 64;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] bl, blb, din, wps, wdata, wcol, dout, tag, carry;
  wsel_e wsel;
  logic c_en, t_en, pred, lat_rst;
  int checks = 0, failures = 0;

  bitline_periph #(.NCOL(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  logic [W-1:0] A, B, m_c, m_t, e_sum, e_cout;

  initial begin
    {c_en, t_en, pred, lat_rst} = '0;
    wsel = WS_SUM; din = '0; wps = '1; bl = '0; blb = '0;
    m_c = '0; m_t = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      A = {$urandom, $urandom}; B = {$urandom, $urandom};
      din = {$urandom, $urandom}; wps = {$urandom, $urandom};
      bl  = A & B; blb = ~A & ~B;
      c_en = 1'($urandom); t_en = 1'($urandom); pred = 1'($urandom);
      lat_rst = ($urandom % 8) == 0;
      wsel = wsel_e'($urandom % 4);
      #1;
      e_sum  = A ^ B ^ m_c;
      e_cout = (A & B) | (m_c & (A ^ B));
      case (wsel)
        WS_SUM:  check(wdata, e_sum,  "sum");
        WS_COUT: check(wdata, e_cout, "cout");
        WS_DIN:  check(wdata, din,    "din");
        default: check(wdata, m_t,    "tag mux");
      endcase
      check(wcol, pred ? (wps & m_t) : wps, "driver enable");
      check(dout, A & B, "dout");
      @(posedge clk);
      if (lat_rst) begin m_c = '0; m_t = '0; end
      else begin
        if (c_en) m_c = e_cout;
        if (t_en) m_t = A & B;
      end
      #1;
      check(carry, m_c, "carry latch");
      check(tag, m_t, "tag latch");
    end
    // No row active: both bit lines stay high -> Sum = Cin, Carry_out = 1.
    bl = '1; blb = '1; wsel = WS_SUM; c_en = 0; t_en = 0; lat_rst = 0; #1;
    check(wdata, m_c, "no-row sum = carry");
    wsel = WS_COUT; #1;
    check(wdata, '1, "no-row cout = 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
