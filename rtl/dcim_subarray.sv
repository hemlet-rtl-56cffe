// dcim_subarray: one SRAM digital compute-in-memory array.
//
// ROWS x COLS bit cells (64 x 64) hold ROWS x COLS/8 signed INT8 weights;
// weight k of row r sits in bits [8k +: 8] of the row. Every cycle one bit of
// each row's input arrives on the row's activation line; a local multiplier
// per weight (an AND of the input bit with the weight) feeds a per-column
// adder tree that sums the ROWS products, and the shift & accumulate unit
// weights the tree output by 2^bit (bit 7, the sign bit of a two's-complement
// input, by -2^7) and accumulates. A full INT8 x INT8 vector-matrix product
// therefore takes 8 cycles.
//
// The array is written like an SRAM, either one row per cycle (wr_row_*) or
// one weight column per cycle (wr_col_*, one byte per row), the latter being
// used to store a matrix transposed (e.g. Q rows as weight columns). Both are
// this design's interface choices; the multiplier / adder tree / S&A structure
// is the paper's.
//
// Timing: conv_en with first=1 on the first bit; acc is valid the cycle after
// the conv_en with bit_idx = 7.
module dcim_subarray
  import hemlet_pkg::*;
#(
  parameter int ROWS = DSA_ROWS,
  parameter int COLS = DSA_COLS,
  parameter int ACCW = DACC_BITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_row_en,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [COLS-1:0]               wr_row_data,
  input  logic                          wr_col_en,
  input  logic [$clog2(COLS/8)-1:0]     wr_col,
  input  logic [ROWS*8-1:0]             wr_col_data,
  input  logic                          conv_en,
  input  logic                          first,
  input  logic [ROWS-1:0]               in_bits,
  input  logic [2:0]                    bit_idx,
  output logic signed [COLS/8-1:0][ACCW-1:0] acc
);
  localparam int WC = COLS / 8;

  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_row_en) mem[wr_row] <= wr_row_data;
    else if (wr_col_en)
      for (int r = 0; r < ROWS; r++) mem[r][8*wr_col +: 8] <= wr_col_data[8*r +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (conv_en) begin
      for (int k = 0; k < WC; k++) begin
        logic signed [ACCW-1:0] tree;
        tree = '0;
        for (int r = 0; r < ROWS; r++)
          if (in_bits[r]) tree += ACCW'(signed'(mem[r][8*k +: 8]));
        tree = tree <<< bit_idx;
        if (bit_idx == 3'd7) tree = -tree;
        acc[k] <= (first ? '0 : acc[k]) + tree;
      end
    end
  end
endmodule
