// tb_softmax_blk: runs blocked attention for NQ query rows over 3 key blocks
// (the last one partly valid) through the two-stage softmax and compares
//  (a) every local p, m_b, l_b and every final output with a fixed-point
//      model of the documented arithmetic written in this testbench, and
//  (b) the final outputs with real-valued softmax(s*scale) x V within a
//      tolerance that covers the 2^-x approximation.
module tb_softmax_blk;
  import hemlet_pkg::*;
  localparam int BL = 32, D = 64, NQ = 4, NB = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [4:0] sh = 5'd2;
  logic loc_en = 0; logic signed [BL-1:0][31:0] s = '0; logic [BL-1:0] valid = '0;
  logic [BL-1:0][7:0] p; logic signed [31:0] mb; logic [31:0] lb;
  logic acc_en = 0; logic [1:0] acc_row = 0; logic acc_first = 0;
  logic signed [31:0] acc_mb = 0; logic [31:0] acc_lb = 0; logic signed [D-1:0][31:0] sv = '0;
  logic fin_en = 0; logic [1:0] fin_row = 0;
  logic signed [D-1:0][7:0] out; logic out_valid;
  int checks = 0, failures = 0;

  softmax_blk #(.BL(BL), .D(D), .NQ(NQ)) dut (.*);

  int score [NQ][NB*BL];
  int v [NB*BL][D];
  longint mo [NQ]; longint lo [NQ]; longint oo [NQ][D];

  function automatic int e2(longint diff);
    longint d, n; int f, val;
    d = diff >>> sh; n = d >>> 4; f = int'(d & 15);
    if (n > 7) return 0;
    val = (128 - 4*f) >>> n;
    return (val > 127) ? 127 : val;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nvalid;
    nvalid = 2*BL + 9;
    for (int q = 0; q < NQ; q++) for (int k = 0; k < NB*BL; k++) score[q][k] = int'($urandom % 1200) - 600 + (k == 40 ? 500 : 0);
    for (int k = 0; k < NB*BL; k++) for (int f = 0; f < D; f++) v[k][f] = int'($urandom % 256) - 128;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int q = 0; q < NQ; q++) begin
        int em, el; int ep [BL]; longint sp [D];
        // stage 1
        @(negedge clk); loc_en = 1;
        for (int j = 0; j < BL; j++) begin s[j] = score[q][b*BL+j]; valid[j] = (b*BL+j < nvalid); end
        @(negedge clk); loc_en = 0;
        em = -2147483648;
        for (int j = 0; j < BL; j++) if (valid[j] && score[q][b*BL+j] > em) em = score[q][b*BL+j];
        el = 0;
        for (int j = 0; j < BL; j++) begin ep[j] = valid[j] ? e2(longint'(em) - score[q][b*BL+j]) : 0; el += ep[j]; end
        checks++;
        if (int'(mb) != em || int'(lb) != el) begin failures++; $display("FAIL local m/l q%0d b%0d", q, b); end
        for (int j = 0; j < BL; j++) begin checks++; if (int'(p[j]) != ep[j]) failures++; end
        // P''V for this block
        for (int f = 0; f < D; f++) begin
          sp[f] = 0;
          for (int j = 0; j < BL; j++) sp[f] += longint'(ep[j]) * v[b*BL+j][f];
        end
        @(negedge clk); acc_en = 1; acc_row = 2'(q); acc_first = (b == 0); acc_mb = mb; acc_lb = lb;
        for (int f = 0; f < D; f++) sv[f] = 32'(sp[f]);
        @(negedge clk); acc_en = 0;
        // model of stage 2
        if (b == 0) begin
          mo[q] = em; lo[q] = el; for (int f = 0; f < D; f++) oo[q][f] = sp[f];
        end else begin
          longint mn; int a, bb;
          mn = (em > mo[q]) ? em : mo[q];
          a = (mn == mo[q]) ? 128 : e2(mn - mo[q]);
          bb = (mn == em) ? 128 : e2(mn - em);
          lo[q] = (lo[q]*a + longint'(el)*bb) >>> 7;
          for (int f = 0; f < D; f++) oo[q][f] = (oo[q][f]*a + sp[f]*bb) >>> 7;
          mo[q] = mn;
        end
      end
    @(negedge clk); acc_en = 0;
    for (int q = 0; q < NQ; q++) begin
      longint r; real den; real num [D];
      @(negedge clk); fin_en = 1; fin_row = 2'(q);
      @(negedge clk); fin_en = 0;
      checks++; if (!out_valid) failures++;
      r = (lo[q] == 0) ? 0 : (longint'(1) << 20) / lo[q];
      // real softmax, exponent base 2 with the same scale
      den = 0; for (int f = 0; f < D; f++) num[f] = 0;
      for (int k = 0; k < nvalid; k++) begin
        real w;
        w = $pow(2.0, real'(score[q][k] - mo[q]) / real'(16 << sh));
        den += w; for (int f = 0; f < D; f++) num[f] += w * v[k][f];
      end
      for (int f = 0; f < D; f++) begin
        longint m; real ref_v;
        m = (oo[q][f] * r + 524288) >>> 20;
        if (m > 127) m = 127; if (m < -128) m = -128;
        checks++;
        if (longint'(signed'(out[f])) != m) begin failures++; if (failures < 8) $display("FAIL fin q%0d f%0d %0d %0d", q, f, out[f], m); end
        ref_v = num[f] / den;
        checks++;
        if ((real'(signed'(out[f])) - ref_v) > 8.0 || (ref_v - real'(signed'(out[f]))) > 8.0) begin
          failures++; if (failures < 8) $display("FAIL real q%0d f%0d %0d %f", q, f, out[f], ref_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
