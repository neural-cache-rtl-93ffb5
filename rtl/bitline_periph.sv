// bitline_periph: the compute logic under every bit line of a compute array.
//
// For each column the two single-ended sense amplifiers deliver bl = A&B
// (the wired-AND of the activated cells on BL) and blb = ~A&~B (on BLB).
// Following the column-peripheral description, A^B is the NOR of the two,
// Sum = A^B^Cin and Carry_out = A&B | (A^B)&Cin. The carry latch C and the
// tag latch T are flip-flops here; C loads Carry_out when c_en is high and
// T loads the sensed bit (bl) when t_en is high. A 4:1 mux picks the value
// to write back (Sum, Carry_out, Data_in or Tag). The bit-line driver of a
// column is enabled by its write select wps, and under predication only
// where the tag is 1.
//
// This design's own choices: the latches are edge-triggered and reset to
// 0; lat_rst clears both at the clock edge (the paper shows the carry as 0
// before an addition but not how it is cleared); the enable equation
// wps & (~pred | tag) is an assumption, the paper only says "The Tag bit is
// used as the enable signal for the bit line driver".
//
// Timing: everything except the two latches is combinational, so a
// read-compute-write happens in one clock cycle (the paper's two half
// cycles: sense, then write).
module bitline_periph
  import nc_pkg::*;
#(
  parameter int NCOL = COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NCOL-1:0] bl,       // A & B  from the BL sense amp
  input  logic [NCOL-1:0] blb,      // ~A & ~B from the BLB sense amp
  input  logic [NCOL-1:0] din,      // Data_in
  input  logic [NCOL-1:0] wps,      // per-column write select (WPS)
  input  wsel_e           wsel,
  input  logic            c_en,
  input  logic            t_en,
  input  logic            pred,
  input  logic            lat_rst,
  output logic [NCOL-1:0] wdata,    // value driven on the bit lines
  output logic [NCOL-1:0] wcol,     // bit-line driver enable per column
  output logic [NCOL-1:0] dout,     // sensed data (DOUT)
  output logic [NCOL-1:0] tag,
  output logic [NCOL-1:0] carry
);

  logic [NCOL-1:0] axb, sum, cout;

  always_comb begin
    axb  = ~(bl | blb);
    sum  = axb ^ carry;
    cout = bl | (axb & carry);
    unique case (wsel)
      WS_SUM:  wdata = sum;
      WS_COUT: wdata = cout;
      WS_DIN:  wdata = din;
      default: wdata = tag;
    endcase
    wcol = wps & (~{NCOL{pred}} | tag);
    dout = bl;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry <= '0;
      tag   <= '0;
    end else if (lat_rst) begin
      carry <= '0;
      tag   <= '0;
    end else begin
      if (c_en) carry <= cout;
      if (t_en) tag   <= bl;
    end
  end

endmodule
