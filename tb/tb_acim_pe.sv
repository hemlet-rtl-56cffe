// tb_acim_pe: self-checking test of the ACIM PE with 8 subarrays (2 row
// tiles of 128 rows, 4 weight slices each). Random signed INT8 weights are
// split into 2-bit slices of (w+128) and programmed; random INT8 inputs are
// loaded. A layer-wise job (all 8 MUX positions) and a GLP job (one MUX
// position) are run; every output is compared with a reference dot product
// and the job latency (done 8*mux_cnt+2 cycles after the cycle that samples
// start).
module tb_acim_pe;
  import hemlet_pkg::*;
  localparam int N_SA = 8, NT = N_SA/4, ROWS = 128, COLS = 128, NG = 16;
  localparam int IN_LEN = NT*ROWS, NLINES = IN_LEN/64;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_wr_en = 0; logic [$clog2(NLINES)-1:0] in_wr_line = 0; logic [FLIT_W-1:0] in_wr_data = 0;
  logic prog_en = 0; logic [$clog2(N_SA)-1:0] prog_sa = 0; logic [6:0] prog_row = 0;
  logic [COLS*2-1:0] prog_data = 0;
  logic start = 0; logic [$clog2(NT+1)-1:0] n_tiles = NT[$clog2(NT+1)-1:0];
  logic [2:0] mux_start = 0; logic [3:0] mux_cnt = 0;
  logic busy, done;
  logic signed [7:0][NG-1:0][PSUM_BITS-1:0] out;
  int checks = 0, failures = 0;
  logic signed [7:0] w [IN_LEN][COLS];
  logic signed [7:0] x [IN_LEN];

  acim_pe #(.N_SA(N_SA)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_job(input int ms, input int mc, input int tiles);
    int cyc;
    @(negedge clk); start = 1; mux_start = 3'(ms); mux_cnt = 4'(mc); n_tiles = 2'(tiles);
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 8*mc + 3) begin failures++; $display("FAIL latency %0d exp %0d", cyc, 8*mc+3); end
    for (int p = ms; p < ms + mc; p++)
      for (int g = 0; g < NG; g++) begin
        int e;
        e = 0;
        for (int i = 0; i < tiles*ROWS; i++) e += int'(x[i]) * int'(w[i][g*8+p]);
        checks++;
        if (int'(signed'(out[p][g])) != e) begin
          failures++;
          if (failures < 6) $display("FAIL p %0d g %0d got %0d exp %0d", p, g, signed'(out[p][g]), e);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < IN_LEN; i++) for (int c = 0; c < COLS; c++) w[i][c] = 8'($urandom);
    w[0][0] = -8'sd128; w[1][0] = 8'sd127;
    for (int s = 0; s < N_SA; s++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        prog_en = 1; prog_sa = 3'(s); prog_row = 7'(r);
        for (int c = 0; c < COLS; c++) begin
          logic [7:0] u;
          u = 8'(int'(w[(s/4)*ROWS + r][c]) + 128);
          prog_data[2*c +: 2] = u[2*(s%4) +: 2];
        end
      end
    @(negedge clk); prog_en = 0;
    for (int trial = 0; trial < 3; trial++) begin
      for (int i = 0; i < IN_LEN; i++) x[i] = 8'($urandom);
      if (trial == 0) x[0] = -8'sd128;
      for (int l = 0; l < NLINES; l++) begin
        @(negedge clk); in_wr_en = 1; in_wr_line = 2'(l);
        for (int b = 0; b < 64; b++) in_wr_data[8*b +: 8] = x[l*64+b];
      end
      @(negedge clk); in_wr_en = 0;
      if (trial == 0) run_job(0, 8, 2);          // layer-wise
      else if (trial == 1) run_job(5, 1, 2);     // GLP, one position
      else begin
        for (int i = ROWS; i < IN_LEN; i++) x[i] = 0;  // tile 1 unused
        run_job(2, 3, 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
