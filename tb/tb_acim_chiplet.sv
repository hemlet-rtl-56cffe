// tb_acim_chiplet: an ACIM chiplet with 2 PEs of 8 subarrays (256 inputs,
// 128 columns) driven through its NoP interface. Weights are programmed with
// FT_WPROG flits, inputs written with FT_WRITE flits, then a layer-wise VMM
// (8 MUX positions) on PE 1 and a GLP VMM (one position) on PE 0 are issued.
// The returned FT_WRITE flits must hold sat8(dot >>> shift) for the right
// columns, each command must end with an FT_DONE carrying its tag, and the
// overlap counter must see the second input block arrive while PE 1 runs.
module tb_acim_chiplet;
  import hemlet_pkg::*;
  localparam int PES = 2, N_SA = 8, IN = 256;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic rin_valid = 0, rin_ready, rout_valid, rout_ready = 1;
  flit_t rin_flit = '0, rout_flit;
  logic [31:0] n_vmm_glp, n_vmm_lw, n_overlap;
  int checks = 0, failures = 0;
  acim_chiplet #(.X(4'd2), .Y(4'd0), .PES(PES), .N_SA(N_SA), .BUF_BYTES(4096)) dut (.*);

  logic signed [7:0] w [PES][IN][128];
  logic signed [7:0] x [2][IN];
  flit_t got [$];

  always @(posedge clk) if (rst_n && rout_valid && rout_ready) got.push_back(rout_flit);

  task automatic send(flit_t f);
    @(negedge clk); rin_flit = f; rin_valid = 1;
    @(posedge clk); while (!rin_ready) @(posedge clk);
    #0; @(negedge clk); rin_valid = 0;
  endtask

  function automatic flit_t mk(flit_type_e t, int laddr);
    flit_t f; f = '0;
    f.hdr.dst_x = 4'd2; f.hdr.dst_y = 4'd0; f.hdr.src_x = 4'd1; f.hdr.src_y = 4'd1;
    f.hdr.ftype = t; f.hdr.laddr = 16'(laddr);
    return f;
  endfunction

  function automatic flit_t mkcmd(int pe, int src, int len, int ms, int mc, int sh, int dst, int tag);
    flit_t f; cmd_t c;
    f = mk(FT_CMD, 0); c = '0;
    c.op = OP_VMM; c.pe = 6'(pe); c.src_line = 16'(src); c.len = 12'(len);
    c.mux_start = 3'(ms); c.mux_cnt = 4'(mc); c.shift = 5'(sh);
    c.rep_x = 4'd1; c.rep_y = 4'd2; c.dst_line = 16'(dst); c.tag = 8'(tag);
    f.payload[CMD_W-1:0] = c;
    return f;
  endfunction

  function automatic int refv(int pe, int blk, int col, int sh);
    int d, r;
    d = 0;
    for (int i = 0; i < IN; i++) d += int'(x[blk][i]) * int'(w[pe][i][col]);
    r = d >>> sh;
    return r > 127 ? 127 : (r < -128 ? -128 : r);
  endfunction

  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < PES; p++) for (int i = 0; i < IN; i++) for (int c = 0; c < 128; c++) w[p][i][c] = 8'($urandom);
    for (int b = 0; b < 2; b++) for (int i = 0; i < IN; i++) x[b][i] = 8'($urandom);
    // program weights
    for (int p = 0; p < PES; p++)
      for (int s = 0; s < N_SA; s++)
        for (int r = 0; r < 128; r++) begin
          flit_t f; f = mk(FT_WPROG, 0);
          for (int c = 0; c < 128; c++) begin
            logic [7:0] u; u = 8'(int'(w[p][(s/4)*128 + r][c]) + 128);
            f.payload[2*c +: 2] = u[2*(s%4) +: 2];
          end
          f.payload[262:256] = 7'(r); f.payload[269:264] = 6'(s); f.payload[277:272] = 6'(p);
          send(f);
        end
    // input block 0 at lines 0..3
    for (int l = 0; l < 4; l++) begin
      flit_t f; f = mk(FT_WRITE, l);
      for (int b = 0; b < 64; b++) f.payload[8*b +: 8] = x[0][l*64+b];
      send(f);
    end
    send(mkcmd(1, 0, IN, 0, 8, 6, 100, 7));      // layer-wise on PE 1
    // input block 1 at lines 8..11 arrives while PE 1 computes
    repeat (12) @(posedge clk);
    for (int l = 0; l < 4; l++) begin
      flit_t f; f = mk(FT_WRITE, 8 + l);
      for (int b = 0; b < 64; b++) f.payload[8*b +: 8] = x[1][l*64+b];
      send(f);
    end
    send(mkcmd(0, 8, IN, 3, 1, 7, 200, 9));      // GLP position 3 on PE 0
    repeat (300) @(posedge clk);
    // expected: PE1 2 lines + DONE, PE0 1 line + DONE
    checks++; if (got.size() != 5) begin failures++; $display("FAIL got %0d flits", got.size()); end
    foreach (got[k]) begin
      flit_t f; f = got[k];
      if (f.hdr.ftype == FT_DONE) begin
        checks++;
        if (!((f.hdr.laddr == 7 || f.hdr.laddr == 9) && f.hdr.dst_x == 1 && f.hdr.dst_y == 1)) failures++;
      end else begin
        int base, pe, blk, ms, sh, nb;
        checks++;
        if (!(f.hdr.dst_x == 1 && f.hdr.dst_y == 2)) failures++;
        if (f.hdr.laddr >= 200) begin base = 200; pe = 0; blk = 1; ms = 3; sh = 7; nb = 16; end
        else begin base = 100; pe = 1; blk = 0; ms = 0; sh = 6; nb = 64; end
        for (int b = 0; b < nb; b++) begin
          int j, pr, g, e;
          j = (int'(f.hdr.laddr) - base) * 64 + b; pr = j / 16; g = j % 16;
          e = refv(pe, blk, g * 8 + ms + pr, sh);
          checks++;
          if (int'(signed'(f.payload[8*b +: 8])) != e) begin
            failures++;
            if (failures < 6) $display("FAIL line %0d byte %0d got %0d exp %0d", f.hdr.laddr, b, signed'(f.payload[8*b +: 8]), e);
          end
        end
      end
    end
    checks++; if (n_vmm_glp != 1 || n_vmm_lw != 1) failures++;
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL no overlap"); end
    $display("overlap flits %0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
