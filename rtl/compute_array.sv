// compute_array: one 8 KB compute SRAM array (256 word lines x 256 bit lines).
//
// Data is stored transposed: each bit line holds whole elements, one bit per
// word line, so one access operates on the same bit of 256 elements at once.
// In a compute cycle up to two read word lines (row_a, row_b) are active
// together. The bit lines then carry the wired-AND of the selected cells:
// BL senses A&B and BLB senses ~A&~B. With a single active row this is the
// plain read (A, ~A); with no active row both bit lines stay precharged (1,1),
// so the peripheral sees A^B = 0, Sum = Cin and Carry_out = 1, which the
// controller uses to store the carry latch or a row of ones. In the second
// half of the cycle one write word line (row_w) is written through the
// bit-line peripherals (bitline_periph); a row may be read and written in
// the same cycle.
//
// Data_in is either the external bus data (normal SRAM write, with wps
// selecting the written columns) or, for moves between bit lines, the
// sensed row shifted by 'shift' columns toward column 0. The shifter is this
// design's own choice: the paper describes moves between bit lines for
// reduction but not the circuit that performs them.
//
// The wired-AND is the logic behaviour of the analog sensing (reduced
// word-line voltage, single-ended sense amps); the analog circuit itself is
// not modelled. The storage is not reset, as in an SRAM.
//
// Timing: sensing and the peripheral logic are combinational; the row write
// and the carry/tag latches update at the rising clock edge, so one clock
// cycle is one compute step.
module compute_array
  import nc_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  actl_t           ctl,
  input  logic [COLS-1:0] din_ext,   // bus write data
  input  logic [COLS-1:0] wps,       // per-column write select
  output logic [COLS-1:0] dout,      // sensed row (A&B)
  output logic [COLS-1:0] tag        // tag latches, for observation
);

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] bl, blb, din, wdata, wcol, carry;

  always_comb begin
    bl  = (ctl.ren_a ? mem[ctl.row_a] : '1) & (ctl.ren_b ?  mem[ctl.row_b] : '1);
    blb = (ctl.ren_a ? ~mem[ctl.row_a] : '1) & (ctl.ren_b ? ~mem[ctl.row_b] : '1);
    din = ctl.din_shift ? (bl >> ctl.shift) : din_ext;
  end

  bitline_periph #(.NCOL(COLS)) u_periph (
    .clk, .rst_n, .bl, .blb, .din, .wps,
    .wsel(ctl.wsel), .c_en(ctl.c_en), .t_en(ctl.t_en), .pred(ctl.pred),
    .lat_rst(ctl.lat_rst),
    .wdata, .wcol, .dout, .tag, .carry
  );

  // Write: the bit-line drivers of the enabled columns (wcol) overwrite
  // their cell in word line row_w; the other cells of the row keep their
  // value. Written as one masked row write (a bit-write-enable SRAM).
  always_ff @(posedge clk) begin
    if (ctl.wen)
      mem[ctl.row_w] <= (mem[ctl.row_w] & ~wcol) | (wdata & wcol);
  end

endmodule
