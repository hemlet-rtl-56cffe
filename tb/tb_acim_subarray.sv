// tb_acim_subarray: self-checking test of one ACIM subarray.
// Programs random 2-bit cells, applies random signed INT8 input vectors bit by
// bit for a chosen MUX position and compares each group's shift-add result
// with an independently computed dot product sum_r x[r]*cell[r][g*8+p]. Also
// checks a single ADC code against the column sum of one bit-plane.
module tb_acim_subarray;
  import hemlet_pkg::*;
  localparam int ROWS = 128, COLS = 128, GRP = 8, NG = COLS/GRP;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic prog_en = 0; logic [6:0] prog_row = 0; logic [COLS*2-1:0] prog_data = 0;
  logic conv_en = 0, first = 0; logic [ROWS-1:0] in_bits = 0; logic [2:0] bit_idx = 0;
  logic [2:0] mux_sel = 0;
  logic [NG-1:0][ADC_BITS-1:0] adc_code;
  logic signed [NG-1:0][SA_ACC_BITS-1:0] acc;
  int checks = 0, failures = 0;
  logic [1:0] cellm [ROWS][COLS];
  logic signed [7:0] x [ROWS];

  acim_subarray dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        cellm[r][c] = 2'($urandom);
        if (r == 5) cellm[r][c] = 2'd3;
        prog_data[2*c +: 2] = cellm[r][c];
      end
      prog_en = 1; prog_row = 7'(r);
    end
    @(negedge clk); prog_en = 0;
    for (int trial = 0; trial < 10; trial++) begin
      int p;
      p = (trial < 8) ? trial : int'($urandom % 8);
      for (int r = 0; r < ROWS; r++) x[r] = (trial == 9) ? -8'sd128 : 8'($urandom);
      for (int b = 0; b < 8; b++) begin
        @(negedge clk);
        conv_en = 1; first = (b == 0); bit_idx = 3'(b); mux_sel = 3'(p);
        for (int r = 0; r < ROWS; r++) in_bits[r] = x[r][b];
      end
      @(negedge clk); conv_en = 0;
      for (int g = 0; g < NG; g++) begin
        int exp_v;
        exp_v = 0;
        for (int r = 0; r < ROWS; r++) exp_v += int'(x[r]) * int'(cellm[r][g*GRP+p]);
        checks++;
        if (int'(signed'(acc[g])) != exp_v) begin
          failures++;
          if (failures < 5) $display("FAIL trial %0d g %0d: got %0d exp %0d", trial, g, signed'(acc[g]), exp_v);
        end
      end
      // last bit-plane ADC code
      for (int g = 0; g < NG; g++) begin
        int s;
        s = 0;
        for (int r = 0; r < ROWS; r++) if (x[r][7]) s += int'(cellm[r][g*GRP+p]);
        checks++;
        if (int'(adc_code[g]) != s) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
