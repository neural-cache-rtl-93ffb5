// tmu: transpose memory unit.
//
// A square N x N bit array that can be accessed both horizontally (a row,
// the regular bit-parallel layout) and vertically (a column, the transposed
// layout), as a transposable 8T SRAM with sense amplifiers and drivers on
// both edges would be. Writing N regular words as rows and reading columns
// turns them into bit slices for the compute arrays; writing bit slices as
// columns and reading rows turns results back into regular words.
//
// Interface: one write per cycle, by row (wr_row_en) or by column
// (wr_col_en; if both are set the row write wins); row and column reads are
// combinational on their address, like an SRAM read ahead of its output
// register, which the user (cbox) provides.
//
// The paper gives the function and the bit-cell, not the size; N = 256 is
// this design's choice so that one row or column matches the 256-bit
// intra-slice bus and the 256 bit lines of a compute array.
module tmu
  import nc_pkg::*;
#(
  parameter int N = BUS_W
) (
  input  logic                 clk,
  input  logic                 wr_row_en,
  input  logic                 wr_col_en,
  input  logic [$clog2(N)-1:0] wr_addr,
  input  logic [N-1:0]         wr_data,
  input  logic [$clog2(N)-1:0] rd_row_addr,
  output logic [N-1:0]         rd_row_data,
  input  logic [$clog2(N)-1:0] rd_col_addr,
  output logic [N-1:0]         rd_col_data
);

  logic [N-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (wr_row_en) begin
      mem[wr_addr] <= wr_data;
    end else if (wr_col_en) begin
      for (int r = 0; r < N; r++) mem[r][wr_addr] <= wr_data[r];
    end
  end

  always_comb begin
    rd_row_data = mem[rd_row_addr];
    for (int r = 0; r < N; r++) rd_col_data[r] = mem[r][rd_col_addr];
  end

endmodule
