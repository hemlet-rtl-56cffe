// glp_mapper: weight-placement address generator for group-level parallelism.
//
// A GLP_LayerSet is a set of up to M layers with identical weight shape that
// never run at the same time. Their weight columns are interleaved column by
// column into one augmented matrix: augmented column c = j*M + i holds column
// j of layer slot i. Every M consecutive augmented columns fill one ADC group
// (M equals the group size), so column j of every layer lands in its own group
// and a layer's columns are spread over as many groups -- and ADCs -- as it has
// columns. The conventional layer-wise mapping instead places the layers one
// after another, c = i*n_cols + j, so a layer's columns share few groups.
//
// Given the mode, the layer slot i, the column j and the layer width n_cols,
// the module returns the augmented column c, the column tile (which 128-column
// subarray column, c / COLS), the group ((c mod COLS) / M) and the MUX position
// (c mod M). It is purely combinational. The interleaving formula follows the
// paper's augmented-matrix construction; the tile/group/position split of c is
// the natural one for 128-column subarrays with 8-column groups.
module glp_mapper
  import hemlet_pkg::*;
#(
  parameter int M    = GROUP,
  parameter int COLS = SA_COLS,
  parameter int JW   = 12              // column index width (up to 4096 columns)
) (
  input  logic                      glp_mode,   // 1: interleaved, 0: layer-wise
  input  logic [$clog2(M)-1:0]      slot,       // layer position in the LayerSet
  input  logic [JW-1:0]             col,        // weight column j in the layer
  input  logic [JW-1:0]             n_cols,     // columns per layer (C_out)
  output logic [JW+$clog2(M)-1:0]   aug_col,
  output logic [JW+$clog2(M)-1:0]   tile,
  output logic [$clog2(COLS/M)-1:0] group,
  output logic [$clog2(M)-1:0]      mux_pos
);
  localparam int AW = JW + $clog2(M);
  always_comb begin
    if (glp_mode) aug_col = AW'(col) * AW'(M) + AW'(slot);
    else          aug_col = AW'(slot) * AW'(n_cols) + AW'(col);
    tile    = aug_col / AW'(COLS);
    group   = ($clog2(COLS/M))'((aug_col % AW'(COLS)) / AW'(M));
    mux_pos = ($clog2(M))'(aug_col % AW'(M));
  end
endmodule
