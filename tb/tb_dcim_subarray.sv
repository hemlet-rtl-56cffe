// tb_dcim_subarray: writes random signed INT8 weights (rows and, for some
// columns, column writes), applies random signed INT8 inputs bit-serially and
// compares the 8 accumulated outputs with reference dot products.
module tb_dcim_subarray;
  import hemlet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_row_en = 0; logic [5:0] wr_row = 0; logic [63:0] wr_row_data = 0;
  logic wr_col_en = 0; logic [2:0] wr_col = 0; logic [511:0] wr_col_data = 0;
  logic conv_en = 0, first = 0; logic [63:0] in_bits = 0; logic [2:0] bit_idx = 0;
  logic signed [7:0][DACC_BITS-1:0] acc;
  logic signed [7:0] w [64][8];
  logic signed [7:0] x [64];
  int checks = 0, failures = 0;
  dcim_subarray dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 64; r++) begin
      @(negedge clk); wr_row_en = 1; wr_row = 6'(r);
      for (int k = 0; k < 8; k++) begin w[r][k] = 8'($urandom); wr_row_data[8*k +: 8] = w[r][k]; end
    end
    @(negedge clk); wr_row_en = 0;
    // overwrite column 3 through the column port
    @(negedge clk); wr_col_en = 1; wr_col = 3'd3;
    for (int r = 0; r < 64; r++) begin w[r][3] = 8'($urandom); wr_col_data[8*r +: 8] = w[r][3]; end
    @(negedge clk); wr_col_en = 0;
    for (int t = 0; t < 8; t++) begin
      for (int r = 0; r < 64; r++) x[r] = (t == 0) ? -8'sd128 : 8'($urandom);
      for (int b = 0; b < 8; b++) begin
        @(negedge clk); conv_en = 1; first = (b == 0); bit_idx = 3'(b);
        for (int r = 0; r < 64; r++) in_bits[r] = x[r][b];
      end
      @(negedge clk); conv_en = 0;
      for (int k = 0; k < 8; k++) begin
        int e; e = 0;
        for (int r = 0; r < 64; r++) e += int'(x[r]) * int'(w[r][k]);
        checks++;
        if (int'(signed'(acc[k])) != e) begin failures++; $display("FAIL t%0d k%0d %0d %0d", t, k, signed'(acc[k]), e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
