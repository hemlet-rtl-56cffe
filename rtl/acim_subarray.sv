// acim_subarray: one analog CIM subarray (RRAM crossbar) with its column
// multiplexers, shared ADCs and shift-add unit.
//
// The crossbar holds ROWS x COLS cells of CELL_BITS each (128 x 128 two-bit
// cells in the paper's configuration). Columns are split into groups of GROUP
// (8) adjacent columns; each group shares one GROUP:1 MUX and one ADC_BITS
// (9-bit) ADC, so per conversion cycle only one column of every group is
// digitised. Inputs are applied one bit-plane per cycle (one bit of every row's
// INT8 activation); the column current is the sum over rows of bit x cell, and
// the ADC turns it into a code. With 128 rows, 1-bit inputs and 2-bit cells the
// largest sum is 384, which a 9-bit ADC resolves without clipping, so the code
// equals the exact column sum; codes above the ADC range saturate.
//
// The analog crossbar and ADC are represented here by this exact digital
// function (an ideal, noise-free conversion). Cells are written one row per
// cycle through the programming port, as is done before inference.
//
// Interface / timing:
//   prog_en, prog_row, prog_data : write one crossbar row (cell c at bits
//                                   [CELL_BITS*c +: CELL_BITS]).
//   conv_en    : one conversion cycle. in_bits is the bit-plane, bit_idx its
//                weight (bit 7 is the two's-complement sign bit, weight -128),
//                mux_sel the column selected in every group, first clears the
//                shift-add accumulators.
//   acc[g]     : shift-add result of group g, updated the cycle after conv_en.
//   adc_code[g]: last ADC code of group g.
// Bit-serial inputs, the signed bit-plane weighting and the register timing
// are this design's choices; the geometry, MUX sharing and ADC precision are
// the paper's.
module acim_subarray
  import hemlet_pkg::*;
#(
  parameter int ROWS      = SA_ROWS,
  parameter int COLS      = SA_COLS,
  parameter int CBITS     = CELL_BITS,
  parameter int GRP       = GROUP,
  parameter int ABITS     = ADC_BITS,
  parameter int ACCW      = SA_ACC_BITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight programming
  input  logic                          prog_en,
  input  logic [$clog2(ROWS)-1:0]       prog_row,
  input  logic [COLS*CBITS-1:0]         prog_data,
  // conversion
  input  logic                          conv_en,
  input  logic                          first,
  input  logic [ROWS-1:0]               in_bits,
  input  logic [2:0]                    bit_idx,
  input  logic [$clog2(GRP)-1:0]        mux_sel,
  output logic [COLS/GRP-1:0][ABITS-1:0] adc_code,
  output logic signed [COLS/GRP-1:0][ACCW-1:0] acc
);
  localparam int NG = COLS / GRP;

  logic [COLS*CBITS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row] <= prog_data;
  end

  // Column sums of the selected column in each group, clipped to the ADC
  // range; evaluated only in conversion cycles.
  function automatic logic [ABITS-1:0] col_code(input int g,
                                                 input logic [ROWS-1:0] xb,
                                                 input int m);
    int unsigned s;
    s = 0;
    for (int r = 0; r < ROWS; r++)
      if (xb[r]) s += 32'(cells[r][CBITS*(g*GRP + m) +: CBITS]);
    if (s > (2**ABITS - 1)) s = 2**ABITS - 1;
    return s[ABITS-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_code <= '0;
      acc      <= '0;
    end else if (conv_en) begin
      for (int g = 0; g < NG; g++) begin
        logic [ABITS-1:0]       code;
        logic signed [ACCW-1:0] term;
        code = col_code(g, in_bits, int'(mux_sel));
        term = ACCW'(signed'({1'b0, code})) <<< bit_idx;
        if (bit_idx == 3'd7) term = -term;
        adc_code[g] <= code;
        acc[g]      <= (first ? '0 : acc[g]) + term;
      end
    end
  end

endmodule
