// tb_simd_unit: drives each SIMD operator with random INT8 vectors and checks
// the output lines against models written here: exact for ADD/RELU/GELU and
// the documented LN/Softmax arithmetic, plus real-valued LayerNorm and
// softmax within a tolerance. Also checks the latency of LN and Softmax.
module tb_simd_unit;
  import hemlet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0; simd_op_e op = SOP_ADD; logic [4:0] n_lines = 0; logic [10:0] n_elem = 0;
  logic [4:0] sh = 0; logic in_valid = 0; logic [511:0] in_a = 0, in_b = 0;
  logic out_valid; logic [511:0] out_line; logic busy, done;
  int checks = 0, failures = 0;
  simd_unit dut (.*);

  byte a [1024], b [1024], o [1024];
  int nout, lastin_cyc, firstout_cyc, cyc;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid) begin
    if (nout == 0) firstout_cyc = cyc;
    for (int i = 0; i < 64; i++) o[nout*64+i] = out_line[8*i +: 8];
    nout++;
  end

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction
  function automatic int s8(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  task automatic run(simd_op_e opv, int nl, int ne, int shv);
    @(negedge clk); start = 1; op = opv; n_lines = 5'(nl); n_elem = 11'(ne); sh = 5'(shv); nout = 0;
    @(negedge clk); start = 0;
    for (int l = 0; l < nl; l++) begin
      in_valid = 1;
      for (int i = 0; i < 64; i++) begin in_a[8*i +: 8] = a[l*64+i]; in_b[8*i +: 8] = b[l*64+i]; end
      @(negedge clk);
    end
    in_valid = 0; lastin_cyc = cyc;
    while (nout < nl) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cyc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 1024; i++) begin a[i] = byte'($urandom); b[i] = byte'($urandom); end
    a[0] = 127; b[0] = 100; a[1] = -128; b[1] = -5;
    // ADD, RELU, GELU
    for (int t = 0; t < 3; t++) begin
      simd_op_e opv;
      opv = (t == 0) ? SOP_ADD : (t == 1) ? SOP_RELU : SOP_GELU;
      run(opv, 4, 256, 0);
      for (int i = 0; i < 256; i++) begin
        int e, x, sg;
        x = a[i];
        if (t == 0) e = s8(x + b[i]);
        else if (t == 1) e = x < 0 ? 0 : x;
        else begin sg = 64 + ((x * 109) >>> 5); sg = sg < 0 ? 0 : (sg > 128 ? 128 : sg); e = s8((x * sg) >>> 7); end
        checks++;
        if (int'(o[i]) != e) begin failures++; if (failures < 6) $display("FAIL op%0d i%0d %0d %0d", t, i, o[i], e); end
      end
    end
    // LayerNorm over 768 elements (12 lines)
    for (int i = 0; i < 768; i++) a[i] = byte'(int'($urandom % 121) - 50);
    run(SOP_LN, 12, 768, 0);
    checks++; if (firstout_cyc - lastin_cyc != 2) begin failures++; $display("FAIL LN latency %0d", firstout_cyc - lastin_cyc); end
    begin
      longint s, q; int mu, vv, sd, r; real rm, rv;
      s = 0; q = 0; for (int i = 0; i < 768; i++) begin s += a[i]; q += a[i]*a[i]; end
      mu = int'(s / 768); vv = int'(q / 768) - mu*mu; if (vv < 1) vv = 1;
      sd = int'($floor($sqrt(real'(vv)))); if (sd == 0) sd = 1;
      r = 65536 / sd;
      rm = real'(s) / 768.0; rv = real'(q) / 768.0 - rm*rm;
      for (int i = 0; i < 768; i++) begin
        int e; real ref_v;
        e = s8(((a[i] - mu) * r * 16) >>> 16);
        ref_v = (real'(a[i]) - rm) / $sqrt(rv) * 16.0;
        checks++;
        if (int'(o[i]) != e) begin failures++; if (failures < 6) $display("FAIL LN i%0d %0d %0d", i, o[i], e); end
        if (ref_v > 127.0) ref_v = 127.0; if (ref_v < -128.0) ref_v = -128.0;
        checks++;
        if (absr(real'(o[i]) - ref_v) > 2.5) failures++;
      end
    end
    // Softmax over 197 elements (4 lines, last partial)
    for (int i = 0; i < 256; i++) a[i] = byte'($urandom);
    run(SOP_SMAX, 4, 197, 1);
    checks++; if (firstout_cyc - lastin_cyc != 6) begin failures++; $display("FAIL SMAX latency %0d", firstout_cyc - lastin_cyc); end
    begin
      int m, sum, r; int e [256]; real den;
      m = -1000; for (int i = 0; i < 197; i++) if (a[i] > m) m = a[i];
      sum = 0; den = 0;
      for (int i = 0; i < 256; i++) begin
        int d, n, v;
        if (i < 197) begin
          d = (m - a[i]) >>> 1; n = d >>> 4; v = (128 - 4*(d & 15)); v = (n > 7) ? 0 : (v >>> n); if (v > 127) v = 127;
        end else v = 0;
        e[i] = v; sum += v;
        if (i < 197) den += $pow(2.0, real'(a[i] - m) / 32.0);
      end
      r = (127 << 16) / sum;
      for (int i = 0; i < 256; i++) begin
        int ex; real ref_v;
        ex = s8((e[i] * r) >>> 16);
        checks++;
        if (int'(o[i]) != ex) begin failures++; if (failures < 6) $display("FAIL SM i%0d %0d %0d", i, o[i], ex); end
        if (i < 197) begin
          ref_v = 127.0 * $pow(2.0, real'(a[i] - m) / 32.0) / den;
          checks++;
          if (absr(real'(o[i]) - ref_v) > 2.0) begin failures++; if (failures < 6) $display("FAIL SMr i%0d %0d %f", i, o[i], ref_v); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
