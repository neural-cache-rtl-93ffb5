// tb_tmu: self-checking test of the transpose memory unit (default 256 x 256).
//
// Writes 256 regular words as rows and checks that every column read returns
// the transposed bit slice; then writes bit slices as columns and checks the
// regular words read back by rows. Reference: a bit matrix kept in the bench.
module tb_tmu;
  localparam int N = 256;
  logic clk = 0;
  logic wr_row_en, wr_col_en;
  logic [7:0] wr_addr, rd_row_addr, rd_col_addr;
  logic [N-1:0] wr_data, rd_row_data, rd_col_data, e;
  int checks = 0, failures = 0;
  logic [N-1:0] m [N];

  tmu #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] rnd();
    for (int k = 0; k < N/32; k++) rnd[32*k +: 32] = $urandom;
  endfunction

  initial begin
    wr_row_en = 0; wr_col_en = 0; wr_addr = 0; wr_data = 0; rd_row_addr = 0; rd_col_addr = 0;
    @(posedge clk); #1;
    for (int r = 0; r < N; r++) begin
      wr_row_en = 1; wr_addr = 8'(r); wr_data = rnd(); m[r] = wr_data;
      @(posedge clk); #1;
    end
    wr_row_en = 0;
    for (int c = 0; c < N; c++) begin
      rd_col_addr = 8'(c); #1;
      for (int r = 0; r < N; r++) e[r] = m[r][c];
      checks++; if (rd_col_data !== e) begin failures++; $display("FAIL column %0d", c); end
    end
    for (int c = 0; c < N; c += 3) begin
      wr_col_en = 1; wr_addr = 8'(c); wr_data = rnd();
      for (int r = 0; r < N; r++) m[r][c] = wr_data[r];
      @(posedge clk); #1;
    end
    wr_col_en = 0;
    for (int r = 0; r < N; r++) begin
      rd_row_addr = 8'(r); #1;
      checks++; if (rd_row_data !== m[r]) begin failures++; $display("FAIL row %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
