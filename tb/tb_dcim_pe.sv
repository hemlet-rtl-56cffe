// tb_dcim_pe: loads a 64x32 signed INT8 weight matrix into a DCIM PE (half
// by row writes, half by column writes), runs VMMs with random INT8 inputs and
// checks the 32 outputs and the 9-cycle start-to-done latency.
module tb_dcim_pe;
  import hemlet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_row_en = 0; logic [5:0] wr_row = 0; logic [255:0] wr_row_data = 0;
  logic wr_col_en = 0; logic [4:0] wr_col = 0; logic [511:0] wr_col_data = 0;
  logic start = 0; logic [511:0] x = 0; logic busy, done;
  logic signed [31:0][DACC_BITS-1:0] y;
  logic signed [7:0] w [64][32];
  logic signed [7:0] xv [64];
  int checks = 0, failures = 0;
  dcim_pe dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 64; r++) begin
      @(negedge clk); wr_row_en = 1; wr_row = 6'(r);
      for (int k = 0; k < 32; k++) begin w[r][k] = 8'($urandom); wr_row_data[8*k +: 8] = w[r][k]; end
    end
    @(negedge clk); wr_row_en = 0;
    for (int c = 16; c < 32; c++) begin
      @(negedge clk); wr_col_en = 1; wr_col = 5'(c);
      for (int r = 0; r < 64; r++) begin w[r][c] = 8'($urandom); wr_col_data[8*r +: 8] = w[r][c]; end
    end
    @(negedge clk); wr_col_en = 0;
    for (int t = 0; t < 6; t++) begin
      int cyc;
      for (int r = 0; r < 64; r++) begin xv[r] = 8'($urandom); x[8*r +: 8] = xv[r]; end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 10) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int k = 0; k < 32; k++) begin
        int e; e = 0;
        for (int r = 0; r < 64; r++) e += int'(xv[r]) * int'(w[r][k]);
        checks++;
        if (int'(signed'(y[k])) != e) begin failures++; if (failures < 5) $display("FAIL t%0d k%0d %0d %0d", t, k, signed'(y[k]), e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
