// tb_hemlet_top: end-to-end run of the whole package at reduced sizes
// (ACIM chiplets with 2 PEs of 8 subarrays, DCIM chiplets with 4 PEs, small
// buffers, 32-byte links so each flit crosses a link as two phits).
//
// All traffic enters through the host port of the IDP chiplet, as a host
// would drive the package, and follows one Transformer-block dataflow:
//   1. program the weights of ACIM chiplet (0,0), PE 0 and PE 1 (FT_WPROG);
//   2. write two 256-element input blocks into the IDP global buffer;
//   3. IDP sends block 0 to the ACIM chiplet; a layer-wise VMM (8 MUX
//      positions) runs on PE 1 while the IDP sends block 1 (overlap of
//      communication and computation); a GLP VMM (1 position) follows on PE 0;
//      both write their INT8 results back into the IDP;
//   4. IDP SIMD: residual add, LayerNorm and a 16-line GELU, while the host
//      writes other lines into the IDP (a bank-port stall);
//   5. Q, K, V of one head (L = 40, two key blocks) are written into DCIM
//      chiplet (0,1) and one attention command runs there;
//   6. all results are read back through the host window and compared with
//      models computed here from the same inputs.
// Every mechanism is counted (GLP job, layer-wise job, overlap, QK and PV
// operations, blocked-softmax merges, SIMD commands, bank stalls, multi-phit
// link transfers) and one that never happened counts as a failure.
module tb_hemlet_top;
  import hemlet_pkg::*;
  localparam int IN = 256, L = 40, SH = 8;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 1;
  flit_t host_in_flit = '0, host_out_flit;
  logic [31:0] n_vmm_glp [9], n_vmm_lw [9], n_overlap [9], n_qk [9], n_pv [9], n_merge [9];
  logic [31:0] n_simd, n_bank_stall;
  int checks = 0, failures = 0;

  hemlet_top #(.ACIM_PE_N(2), .ACIM_SA_N(8), .ACIM_BUF(4096), .DCIM_PE_N(4), .DCIM_BUF(8192),
               .IDP_BANKS(4), .IDP_BANK_B(4096), .LINK_BYTES(32)) dut (.*);

  logic signed [7:0] w [2][IN][128];
  logic signed [7:0] x [2][IN];
  logic signed [7:0] q_m [L][64], k_m [L][64], v_m [L][64];
  logic [FLIT_W-1:0] hline [int];     // host-window lines by laddr
  int   dones [$];
  int   phits;

  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) begin
    if (host_out_flit.hdr.ftype == FT_DONE) dones.push_back(int'(host_out_flit.hdr.laddr));
    else hline[int'(host_out_flit.hdr.laddr)] = host_out_flit.payload;
  end
  // multi-phit transfers on the link from the IDP towards DCIM (0,1)
  always @(posedge clk) if (rst_n && dut.ph_valid[4][4] && dut.ph_ready[4][4] && !dut.ph_first[4][4]) phits++;

  task automatic hsend(flit_t f);
    @(negedge clk); host_in_flit = f; host_in_valid = 1;
    @(posedge clk); while (!host_in_ready) @(posedge clk);
    @(negedge clk); host_in_valid = 0;
  endtask

  function automatic flit_t mk(int dx, int dy, flit_type_e t, int laddr);
    flit_t f; f = '0;
    f.hdr.dst_x = 4'(dx); f.hdr.dst_y = 4'(dy); f.hdr.src_x = 4'd1; f.hdr.src_y = 4'd1;
    f.hdr.ftype = t; f.hdr.laddr = 16'(laddr);
    return f;
  endfunction

  function automatic flit_t mkcmd(int dx, int dy, cmd_t c);
    flit_t f; f = mk(dx, dy, FT_CMD, 0);
    f.payload[CMD_W-1:0] = c;
    return f;
  endfunction

  task automatic wait_done(int tag);
    int found; found = 0;
    while (!found) begin
      @(posedge clk);
      foreach (dones[i]) if (dones[i] == tag) found = 1;
    end
  endtask

  function automatic int s8(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int byte_of(logic [FLIT_W-1:0] l, int b); return int'(signed'(l[8*b +: 8])); endfunction

  function automatic int vmm_ref(int pe, int blk, int col, int sh);
    int d; d = 0;
    for (int i = 0; i < IN; i++) d += int'(x[blk][i]) * int'(w[pe][i][col]);
    return s8(d >>> sh);
  endfunction

  function automatic int e2(longint diff);
    longint d, n; int f, val;
    d = diff >>> SH; n = d >>> 4; f = int'(d & 15);
    if (n > 7) return 0;
    val = (128 - 4*f) >>> n;
    return (val > 127) ? 127 : val;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd_t c;
    int glp_line [64];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 2; p++) for (int i = 0; i < IN; i++) for (int j = 0; j < 128; j++) w[p][i][j] = 8'($urandom);
    for (int b = 0; b < 2; b++) for (int i = 0; i < IN; i++) x[b][i] = 8'($urandom);
    for (int r = 0; r < L; r++) for (int d = 0; d < 64; d++) begin
      q_m[r][d] = 8'(int'($urandom % 32) - 16);
      k_m[r][d] = 8'(int'($urandom % 32) - 16);
      v_m[r][d] = 8'($urandom);
    end
    // 1. weights
    for (int p = 0; p < 2; p++) for (int s = 0; s < 8; s++) for (int r = 0; r < 128; r++) begin
      flit_t f; f = mk(0, 0, FT_WPROG, 0);
      for (int j = 0; j < 128; j++) begin
        logic [7:0] u; u = 8'(int'(w[p][(s/4)*128 + r][j]) + 128);
        f.payload[2*j +: 2] = u[2*(s%4) +: 2];
      end
      f.payload[262:256] = 7'(r); f.payload[269:264] = 6'(s); f.payload[277:272] = 6'(p);
      hsend(f);
    end
    // 2. inputs into IDP lines 0..7
    for (int l = 0; l < 8; l++) begin
      flit_t f; f = mk(1, 1, FT_WRITE, l);
      for (int b = 0; b < 64; b++) f.payload[8*b +: 8] = x[l/4][(l%4)*64 + b];
      hsend(f);
    end
    // 3. IDP -> ACIM block 0, layer-wise VMM on PE 1, block 1 during it, GLP VMM on PE 0
    c = '0; c.op = OP_SEND; c.src_line = 0; c.n_lines = 4; c.rep_x = 0; c.rep_y = 0; c.dst_line = 0; c.tag = 1;
    hsend(mkcmd(1, 1, c)); wait_done(1);
    c = '0; c.op = OP_VMM; c.pe = 1; c.src_line = 0; c.len = IN; c.mux_start = 0; c.mux_cnt = 8; c.shift = 6;
    c.rep_x = 1; c.rep_y = 1; c.dst_line = 16; c.tag = 2;
    hsend(mkcmd(0, 0, c));
    c = '0; c.op = OP_SEND; c.src_line = 4; c.n_lines = 4; c.rep_x = 0; c.rep_y = 0; c.dst_line = 8; c.tag = 3;
    hsend(mkcmd(1, 1, c)); wait_done(3);
    c = '0; c.op = OP_VMM; c.pe = 0; c.src_line = 8; c.len = IN; c.mux_start = 5; c.mux_cnt = 1; c.shift = 7;
    c.rep_x = 1; c.rep_y = 1; c.dst_line = 20; c.tag = 4;
    hsend(mkcmd(0, 0, c));
    wait_done(2); wait_done(4);
    // 4. SIMD on the IDP
    c = '0; c.op = OP_SIMD; c.sop = SOP_ADD; c.src_line = 16; c.src2_line = 20; c.n_lines = 1; c.len = 64; c.dst_line = 30; c.tag = 5;
    hsend(mkcmd(1, 1, c)); wait_done(5);
    c = '0; c.op = OP_SIMD; c.sop = SOP_LN; c.src_line = 16; c.n_lines = 2; c.len = 128; c.dst_line = 32; c.tag = 6;
    hsend(mkcmd(1, 1, c)); wait_done(6);
    c = '0; c.op = OP_SIMD; c.sop = SOP_GELU; c.src_line = 0; c.n_lines = 16; c.len = 1024; c.dst_line = 48; c.tag = 7;
    hsend(mkcmd(1, 1, c));
    for (int l = 0; l < 16; l++) hsend(mk(1, 1, FT_WRITE, 100 + l));
    wait_done(7);
    c = '0; c.op = OP_SEND; c.src_line = 16; c.n_lines = 48; c.rep_x = 1; c.rep_y = 1; c.dst_line = 16'h8010; c.tag = 8;
    hsend(mkcmd(1, 1, c)); wait_done(8);
    // 5. attention on DCIM (0,1)
    for (int r = 0; r < L; r++) begin
      flit_t fq, fk, fv;
      fq = mk(0, 1, FT_WRITE, r); fk = mk(0, 1, FT_WRITE, 40 + r); fv = mk(0, 1, FT_WRITE, 80 + r);
      for (int d = 0; d < 64; d++) begin
        fq.payload[8*d +: 8] = q_m[r][d]; fk.payload[8*d +: 8] = k_m[r][d]; fv.payload[8*d +: 8] = v_m[r][d];
      end
      hsend(fq); hsend(fk); hsend(fv);
    end
    c = '0; c.op = OP_ATTN; c.pe = 0; c.src_line = 0; c.src2_line = 40; c.src3_line = 80; c.len = L;
    c.shift = SH; c.rep_x = 1; c.rep_y = 1; c.dst_line = 16'h8100; c.tag = 9;
    hsend(mkcmd(0, 1, c)); wait_done(9);
    repeat (20) @(posedge clk);

    // ---------------- checks ----------------
    foreach (dones[i]) ;
    checks++; if (dones.size() != 9) begin failures++; $display("FAIL %0d DONE flits", dones.size()); end
    // VMM results: layer-wise at 16,17 (position p, group g at byte 16p+g), GLP at 20
    for (int j = 0; j < 128; j++) begin
      int pr, g, got, e;
      pr = j / 16; g = j % 16;
      got = byte_of(hline[16'h8010 + j / 64], j % 64);
      e = vmm_ref(1, 0, g * 8 + pr, 6);
      checks++; if (got != e) begin failures++; if (failures < 6) $display("FAIL LW col %0d %0d %0d", j, got, e); end
    end
    for (int g = 0; g < 16; g++) begin
      int got, e;
      got = byte_of(hline[16'h8014], g);
      e = vmm_ref(0, 1, g * 8 + 5, 7);
      checks++; if (got != e) begin failures++; if (failures < 6) $display("FAIL GLP group %0d %0d %0d", g, got, e); end
    end
    // residual add of line 16 and line 20
    for (int b = 0; b < 64; b++) begin
      checks++;
      if (byte_of(hline[16'h801e], b) != s8(byte_of(hline[16'h8010], b) + byte_of(hline[16'h8014], b))) failures++;
    end
    // LayerNorm over lines 16,17 (128 elements)
    begin
      int s, q, mu, vv, sd, r;
      s = 0; q = 0;
      for (int i = 0; i < 128; i++) begin int a; a = byte_of(hline[16'h8010 + i/64], i%64); s += a; q += a*a; end
      mu = s / 128; vv = q / 128 - mu*mu; if (vv < 1) vv = 1;
      sd = int'($floor($sqrt(real'(vv)))); if (sd == 0) sd = 1;
      r = 65536 / sd;
      for (int i = 0; i < 128; i++) begin
        int a; a = byte_of(hline[16'h8010 + i/64], i%64);
        checks++;
        if (byte_of(hline[16'h8020 + i/64], i%64) != s8(((a - mu) * r * 16) >>> 16)) failures++;
      end
    end
    // GELU of IDP lines 0..15 (inputs and dummy lines not overwritten: 0..7 are x)
    for (int l = 0; l < 8; l++) for (int b = 0; b < 64; b++) begin
      int a, sg, got;
      a = int'(x[l/4][(l%4)*64 + b]);
      sg = 64 + ((a * 109) >>> 5); if (sg < 0) sg = 0; if (sg > 128) sg = 128;
      got = byte_of(hline[16'h8030 + l], b);
      checks++; if (got != s8((a * sg) >>> 7)) failures++;
    end
    // attention: bit-exact model of the blocked softmax
    for (int qi = 0; qi < L; qi++) begin
      longint mo, lo, r; longint oo [64];
      for (int kb = 0; kb < 2; kb++) begin
        longint sc [32]; longint em, el; int ep [32]; longint sp [64];
        em = -64'sd2147483648;
        for (int j = 0; j < 32; j++) begin
          int kk; kk = kb*32 + j; sc[j] = 0;
          if (kk < L) begin
            for (int d = 0; d < 64; d++) sc[j] += longint'(q_m[qi][d]) * k_m[kk][d];
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
      checks++;
      if (!hline.exists(16'h8100 + qi)) begin failures++; $display("FAIL no attention row %0d", qi); end
      else for (int d = 0; d < 64; d++) begin
        longint m;
        m = (oo[d] * r + 524288) >>> 20; if (m > 127) m = 127; if (m < -128) m = -128;
        checks++;
        if (longint'(byte_of(hline[16'h8100 + qi], d)) != m) begin
          failures++; if (failures < 10) $display("FAIL attn q%0d d%0d %0d %0d", qi, d, byte_of(hline[16'h8100 + qi], d), m);
        end
      end
    end
    // ---------------- mechanisms ----------------
    $display("GLP jobs %0d, layer-wise jobs %0d, overlap flits %0d", n_vmm_glp[0], n_vmm_lw[0], n_overlap[0]);
    $display("QK ops %0d, PV ops %0d, softmax merges %0d", n_qk[3], n_pv[3], n_merge[3]);
    $display("SIMD commands %0d, bank stalls %0d, second phits %0d", n_simd, n_bank_stall, phits);
    checks++; if (n_vmm_glp[0] != 1) failures++;
    checks++; if (n_vmm_lw[0] != 1) failures++;
    checks++; if (n_overlap[0] == 0) failures++;
    checks++; if (n_qk[3] != 64 * 2) failures++;     // 2 Q blocks x 2 K blocks x 32 keys
    checks++; if (n_pv[3] != 40 * 2) failures++;     // 40 query rows x 2 key blocks
    checks++; if (n_merge[3] != 40) failures++;
    checks++; if (n_simd != 3) failures++;
    checks++; if (n_bank_stall == 0) failures++;
    checks++; if (phits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
