// dcim_pe: DCIM processing engine of N_SA DCIM subarrays sharing one input
// vector.
//
// All subarrays receive the same ROWS-element INT8 input (one bit-plane per
// cycle) and each contributes COLS/8 output columns, so a PE computes a
// ROWS-deep dot product for N_SA*COLS/8 (= 4*8 = 32) weight columns in 8
// cycles. The paper gives the PE as 4 subarrays of 64x64; sharing the input and
// concatenating the outputs is this design's choice. It fits attention heads of
// width 64: a Q block of 32 rows is one PE's weights for QK^T, and a 64-wide V
// block occupies two PEs for PV.
//
// Interface:
//   wr_row_* : write row r (32 weights, byte k of wr_row_data = column k).
//   wr_col_* : write weight column c (byte r of wr_col_data = row r).
//   start    : x (ROWS bytes) is latched and a VMM begins.
//   done     : pulses 9 cycles after the cycle that samples start (8 bit
//              cycles and one more); y[c] then holds the 32 results.
module dcim_pe
  import hemlet_pkg::*;
#(
  parameter int N_SA = DCIM_N_SA,
  parameter int ROWS = DSA_ROWS,
  parameter int COLS = DSA_COLS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wr_row_en,
  input  logic [$clog2(ROWS)-1:0]            wr_row,
  input  logic [N_SA*COLS-1:0]               wr_row_data,
  input  logic                               wr_col_en,
  input  logic [$clog2(N_SA*COLS/8)-1:0]     wr_col,
  input  logic [ROWS*8-1:0]                  wr_col_data,
  input  logic                               start,
  input  logic [ROWS*8-1:0]                  x,
  output logic                               busy,
  output logic                               done,
  output logic signed [N_SA*COLS/8-1:0][DACC_BITS-1:0] y
);
  localparam int WC = COLS / 8;
  localparam int CW = $clog2(WC);

  logic [ROWS*8-1:0] xq;
  logic [3:0]        cnt;
  logic              run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xq <= '0; cnt <= '0; run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        xq <= x; cnt <= '0; run <= 1'b1;
      end else if (run) begin
        cnt <= cnt + 4'd1;
        if (cnt == 4'd8) begin run <= 1'b0; done <= 1'b1; end
      end
    end
  end
  assign busy = run;

  logic [ROWS-1:0] xb;
  always_comb for (int r = 0; r < ROWS; r++) xb[r] = xq[8*r + int'(cnt[2:0])];

  for (genvar s = 0; s < N_SA; s++) begin : g_sa
    logic signed [WC-1:0][DACC_BITS-1:0] a;
    dcim_subarray #(.ROWS(ROWS), .COLS(COLS)) u_sa (
      .clk, .rst_n,
      .wr_row_en   (wr_row_en),
      .wr_row,
      .wr_row_data (wr_row_data[s*COLS +: COLS]),
      .wr_col_en   (wr_col_en && (int'(wr_col) / WC == s)),
      .wr_col      (wr_col[CW-1:0]),
      .wr_col_data,
      .conv_en     (run && !cnt[3]),
      .first       (cnt == 4'd0),
      .in_bits     (xb),
      .bit_idx     (cnt[2:0]),
      .acc         (a)
    );
    assign y[s*WC +: WC] = a;
  end
endmodule
