// tb_glp_mapper: checks the interleaved (GLP) and layer-wise column placement
// against the closed-form formulas, and that in GLP mode the columns of one
// layer occupy distinct groups at a single MUX position.
module tb_glp_mapper;
  logic glp_mode; logic [2:0] slot; logic [11:0] col, n_cols;
  logic [14:0] aug_col, tile; logic [3:0] group; logic [2:0] mux_pos;
  int checks = 0, failures = 0;
  glp_mapper dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    n_cols = 12'd768;
    for (int m = 0; m < 2; m++)
      for (int s = 0; s < 8; s++)
        for (int j = 0; j < 768; j += 7) begin
          int c;
          glp_mode = 1'(m); slot = 3'(s); col = 12'(j);
          #1;
          c = m ? j*8 + s : s*768 + j;
          checks++;
          if (int'(aug_col) != c || int'(tile) != c/128 || int'(group) != (c%128)/8 ||
              int'(mux_pos) != c%8) begin
            failures++;
            if (failures < 5) $display("FAIL m%0d s%0d j%0d: %0d %0d %0d %0d", m, s, j, aug_col, tile, group, mux_pos);
          end
          if (m == 1) begin
            checks++;
            if (int'(mux_pos) != s || int'(group) != j % 16) failures++;
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
