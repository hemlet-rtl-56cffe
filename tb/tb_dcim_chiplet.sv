// tb_dcim_chiplet: one DCIM chiplet (4 PEs, 8 KB buffer) driven through its
// NoP interface. Q, K and V of one head (width 64) are written as FT_WRITE
// flits, then an OP_ATTN command runs. Two sequence lengths are used: L = 40
// (two query blocks and two key blocks, so the blocked softmax merges across
// blocks and the last blocks are partly masked) and L = 32 (a single block).
// Every output row must equal a bit-exact model of the scores, the local
// softmax, the P''V product, the global merge and the final normalisation;
// a real-valued softmax-attention must agree within a few LSBs; each command
// must end with an FT_DONE carrying its tag to the sender.
module tb_dcim_chiplet;
  import hemlet_pkg::*;
  localparam int SH = 8, LMAX = 40;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic rin_valid = 0, rin_ready, rout_valid, rout_ready = 1;
  flit_t rin_flit = '0, rout_flit;
  logic [31:0] n_qk, n_pv, n_merge;
  int checks = 0, failures = 0;
  dcim_chiplet #(.X(4'd0), .Y(4'd1), .PES(4), .BUF_BYTES(8192)) dut (.*);

  logic signed [7:0] q_m [LMAX][64], k_m [LMAX][64], v_m [LMAX][64];
  logic [FLIT_W-1:0] outl [int];
  int dones [$];

  always @(posedge clk) if (rst_n && rout_valid && rout_ready) begin
    if (rout_flit.hdr.ftype == FT_DONE) begin
      dones.push_back(int'(rout_flit.hdr.laddr));
      checks++; if (!(rout_flit.hdr.dst_x == 1 && rout_flit.hdr.dst_y == 1)) failures++;
    end else begin
      outl[int'(rout_flit.hdr.laddr)] = rout_flit.payload;
      checks++; if (!(rout_flit.hdr.dst_x == 2 && rout_flit.hdr.dst_y == 2)) failures++;
    end
  end

  task automatic send(flit_t f);
    @(negedge clk); rin_flit = f; rin_valid = 1;
    @(posedge clk); while (!rin_ready) @(posedge clk);
    @(negedge clk); rin_valid = 0;
  endtask

  function automatic flit_t mk(flit_type_e t, int laddr);
    flit_t f; f = '0;
    f.hdr.dst_x = 4'd0; f.hdr.dst_y = 4'd1; f.hdr.src_x = 4'd1; f.hdr.src_y = 4'd1;
    f.hdr.ftype = t; f.hdr.laddr = 16'(laddr);
    return f;
  endfunction

  function automatic int e2(longint diff);
    longint d, n; int f, val;
    d = diff >>> SH; n = d >>> 4; f = int'(d & 15);
    if (n > 7) return 0;
    val = (128 - 4*f) >>> n;
    return (val > 127) ? 127 : val;
  endfunction

  task automatic check_attn(int L, int base);
    int nb; nb = (L + 31) / 32;
    for (int qi = 0; qi < L; qi++) begin
      longint mo, lo, r; longint oo [64]; real den; real num [64];
      for (int kb = 0; kb < nb; kb++) begin
        longint sc [32]; longint em, el; int ep [32]; longint sp [64];
        em = -64'sd2147483648;
        for (int j = 0; j < 32; j++) begin
          sc[j] = 0;
          if (kb*32 + j < L) begin
            for (int d = 0; d < 64; d++) sc[j] += longint'(q_m[qi][d]) * k_m[kb*32 + j][d];
            if (sc[j] > em) em = sc[j];
          end
        end
        el = 0;
        for (int j = 0; j < 32; j++) begin ep[j] = (kb*32 + j < L) ? e2(em - sc[j]) : 0; el += ep[j]; end
        for (int d = 0; d < 64; d++) begin
          sp[d] = 0;
          for (int j = 0; j < 32; j++) if (kb*32 + j < L) sp[d] += longint'(ep[j]) * v_m[kb*32 + j][d];
        end
        if (kb == 0) begin mo = em; lo = el; for (int d = 0; d < 64; d++) oo[d] = sp[d]; end
        else begin
          longint mn; int a, bb;
          mn = (em > mo) ? em : mo;
          a = (mn == mo) ? 128 : e2(mn - mo);
          bb = (mn == em) ? 128 : e2(mn - em);
          lo = (lo*a + el*bb) >>> 7;
          for (int d = 0; d < 64; d++) oo[d] = (oo[d]*a + sp[d]*bb) >>> 7;
          mo = mn;
        end
      end
      r = (lo == 0) ? 0 : (longint'(1) << 20) / lo;
      // real-valued attention with the same base-2 scale
      den = 0; for (int d = 0; d < 64; d++) num[d] = 0;
      for (int k = 0; k < L; k++) begin
        longint sck; real wgt; sck = 0;
        for (int d = 0; d < 64; d++) sck += longint'(q_m[qi][d]) * k_m[k][d];
        wgt = $pow(2.0, real'(sck - mo) / real'(16 << SH));
        den += wgt; for (int d = 0; d < 64; d++) num[d] += wgt * v_m[k][d];
      end
      checks++;
      if (!outl.exists(base + qi)) begin failures++; $display("FAIL no row %0d", qi); end
      else for (int d = 0; d < 64; d++) begin
        longint m; int got; real rv;
        m = (oo[d] * r + 524288) >>> 20; if (m > 127) m = 127; if (m < -128) m = -128;
        got = int'(signed'(outl[base + qi][8*d +: 8]));
        checks++;
        if (longint'(got) != m) begin failures++; if (failures < 10) $display("FAIL L%0d q%0d d%0d %0d %0d", L, qi, d, got, m); end
        rv = num[d] / den;
        checks++;
        if (real'(got) - rv > 12.0 || rv - real'(got) > 12.0) begin failures++; if (failures < 10) $display("FAIL real q%0d d%0d %0d %f", qi, d, got, rv); end
      end
    end
  endtask

  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      int L; cmd_t c; flit_t f;
      L = (t == 0) ? 40 : 32;
      for (int r = 0; r < L; r++) for (int d = 0; d < 64; d++) begin
        q_m[r][d] = 8'(int'($urandom % 32) - 16);
        k_m[r][d] = 8'(int'($urandom % 32) - 16);
        v_m[r][d] = 8'($urandom);
      end
      for (int r = 0; r < L; r++) begin
        flit_t fq, fk, fv;
        fq = mk(FT_WRITE, r); fk = mk(FT_WRITE, 40 + r); fv = mk(FT_WRITE, 80 + r);
        for (int d = 0; d < 64; d++) begin
          fq.payload[8*d +: 8] = q_m[r][d]; fk.payload[8*d +: 8] = k_m[r][d]; fv.payload[8*d +: 8] = v_m[r][d];
        end
        send(fq); send(fk); send(fv);
      end
      c = '0; c.op = OP_ATTN; c.pe = 6'(t); c.src_line = 0; c.src2_line = 40; c.src3_line = 80; c.len = 12'(L);
      c.shift = SH; c.rep_x = 2; c.rep_y = 2; c.dst_line = 16'(1000 * (t + 1)); c.tag = 8'(20 + t);
      f = mk(FT_CMD, 0); f.payload[CMD_W-1:0] = c;
      send(f);
      while (dones.size() < t + 1) @(posedge clk);
      checks++; if (dones[t] != 20 + t) failures++;
      check_attn(L, 1000 * (t + 1));
    end
    $display("QK %0d PV %0d merges %0d", n_qk, n_pv, n_merge);
    checks++; if (n_qk != 32*4 + 32) failures++;
    checks++; if (n_pv != 40*2 + 32) failures++;
    checks++; if (n_merge != 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
