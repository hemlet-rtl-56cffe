// tb_idp_chiplet: one IDP chiplet (4 banks of 4 KB) driven through its router
// side and its host side. It checks
//   * FT_WRITE storage across all banks and OP_SEND read-back (lines come
//     back as FT_WRITE flits to the requested chiplet and line numbers);
//   * OP_SIMD residual add (two operands), LayerNorm and a streaming GELU,
//     with the result lines compared with models computed here;
//   * that an FT_WRITE arriving while a SIMD result is written waits (stall
//     counter) and is still stored;
//   * the host window: FT_WRITE to line >= 0x8000 and FT_DONE go to host_out;
//   * host_in flits reach the router output when the chiplet sends nothing;
//   * FT_DONE with the command's tag back to the command's sender.
module tb_idp_chiplet;
  import hemlet_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic rin_valid = 0, rin_ready, rout_valid, rout_ready = 1;
  logic host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 1;
  flit_t rin_flit = '0, rout_flit, host_in_flit = '0, host_out_flit;
  logic [31:0] n_simd, n_bank_stall;
  int checks = 0, failures = 0;
  idp_chiplet #(.X(4'd1), .Y(4'd1), .NB(4), .BANK_BYTES(4096)) dut (.*);

  logic signed [7:0] mem [256][64];
  flit_t outq [$];
  flit_t hostq [$];

  always @(posedge clk) if (rst_n) begin
    if (rout_valid && rout_ready) outq.push_back(rout_flit);
    if (host_out_valid && host_out_ready) hostq.push_back(host_out_flit);
  end

  task automatic send(flit_t f);
    @(negedge clk); rin_flit = f; rin_valid = 1;
    @(posedge clk); while (!rin_ready) @(posedge clk);
    @(negedge clk); rin_valid = 0;
  endtask

  function automatic flit_t mk(flit_type_e t, int laddr);
    flit_t f; f = '0;
    f.hdr.dst_x = 4'd1; f.hdr.dst_y = 4'd1; f.hdr.src_x = 4'd0; f.hdr.src_y = 4'd2;
    f.hdr.ftype = t; f.hdr.laddr = 16'(laddr);
    return f;
  endfunction

  task automatic cmd(cmd_t c);
    flit_t f; int n;
    f = mk(FT_CMD, 0); f.payload[CMD_W-1:0] = c;
    n = outq.size();
    send(f);
    // wait for the DONE
    forever begin
      @(posedge clk);
      if (outq.size() > n && outq[outq.size()-1].hdr.ftype == FT_DONE) break;
    end
    checks++;
    if (!(outq[outq.size()-1].hdr.laddr == 16'(c.tag) && outq[outq.size()-1].hdr.dst_x == 0 &&
          outq[outq.size()-1].hdr.dst_y == 2)) failures++;
  endtask

  function automatic int s8(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  task automatic readback(int src, int n, ref logic signed [7:0] res [256][64]);
    cmd_t c;
    c = '0; c.op = OP_SEND; c.src_line = 16'(src); c.n_lines = 16'(n); c.rep_x = 2; c.rep_y = 0;
    c.dst_line = 16'(500 + src); c.tag = 8'(src);
    outq.delete();
    cmd(c);
    checks++; if (outq.size() != n + 1) begin failures++; $display("FAIL readback %0d flits", outq.size()); end
    for (int k = 0; k < n && k < outq.size(); k++) begin
      checks++;
      if (!(outq[k].hdr.ftype == FT_WRITE && outq[k].hdr.laddr == 16'(500 + src + k) &&
            outq[k].hdr.dst_x == 2 && outq[k].hdr.dst_y == 0)) failures++;
      for (int b = 0; b < 64; b++) res[src + k][b] = outq[k].payload[8*b +: 8];
    end
  endtask

  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic signed [7:0] res [256][64];
    cmd_t c;
    repeat (3) @(posedge clk); rst_n = 1;
    // lines spread over all four banks
    for (int l = 0; l < 256; l += 17) begin
      flit_t f; f = mk(FT_WRITE, l);
      for (int b = 0; b < 64; b++) begin mem[l][b] = 8'($urandom); f.payload[8*b +: 8] = mem[l][b]; end
      send(f);
    end
    for (int l = 0; l < 256; l += 17) begin
      readback(l, 1, res);
      for (int b = 0; b < 64; b++) begin checks++; if (res[l][b] != mem[l][b]) failures++; end
    end
    // operands for SIMD at lines 0..15 (GELU), 64/65 (LN), 128 + 192 (ADD)
    for (int l = 0; l < 16; l++) begin
      flit_t f; f = mk(FT_WRITE, l);
      for (int b = 0; b < 64; b++) begin mem[l][b] = 8'($urandom); f.payload[8*b +: 8] = mem[l][b]; end
      send(f);
    end
    for (int l = 64; l < 66; l++) begin
      flit_t f; f = mk(FT_WRITE, l);
      for (int b = 0; b < 64; b++) begin mem[l][b] = 8'(int'($urandom % 100) - 30); f.payload[8*b +: 8] = mem[l][b]; end
      send(f);
    end
    // add
    c = '0; c.op = OP_SIMD; c.sop = SOP_ADD; c.src_line = 136; c.src2_line = 204; c.n_lines = 1; c.len = 64; c.dst_line = 40; c.tag = 1;
    cmd(c); readback(40, 1, res);
    for (int b = 0; b < 64; b++) begin checks++; if (int'(res[40][b]) != s8(int'(mem[136][b]) + int'(mem[204][b]))) failures++; end
    // LayerNorm over 128 elements
    c = '0; c.op = OP_SIMD; c.sop = SOP_LN; c.src_line = 64; c.n_lines = 2; c.len = 128; c.dst_line = 80; c.tag = 2;
    cmd(c); readback(80, 2, res);
    begin
      int s, q, mu, vv, sd, r;
      s = 0; q = 0;
      for (int i = 0; i < 128; i++) begin s += int'(mem[64 + i/64][i%64]); q += int'(mem[64 + i/64][i%64])**2; end
      mu = s / 128; vv = q / 128 - mu*mu; if (vv < 1) vv = 1;
      sd = int'($floor($sqrt(real'(vv)))); if (sd == 0) sd = 1;
      r = 65536 / sd;
      for (int i = 0; i < 128; i++) begin
        checks++;
        if (int'(res[80 + i/64][i%64]) != s8(((int'(mem[64 + i/64][i%64]) - mu) * r * 16) >>> 16)) failures++;
      end
    end
    // streaming GELU over 16 lines while other lines are written
    c = '0; c.op = OP_SIMD; c.sop = SOP_GELU; c.src_line = 0; c.n_lines = 16; c.len = 1024; c.dst_line = 96; c.tag = 3;
    begin
      flit_t f; f = mk(FT_CMD, 0); f.payload[CMD_W-1:0] = c; send(f);
    end
    for (int l = 0; l < 12; l++) begin
      flit_t f; f = mk(FT_WRITE, 200 + l);
      for (int b = 0; b < 64; b++) begin mem[200 + l][b] = 8'($urandom); f.payload[8*b +: 8] = mem[200 + l][b]; end
      send(f);
    end
    repeat (100) @(posedge clk);
    checks++; if (n_bank_stall == 0) begin failures++; $display("FAIL no bank stall"); end
    readback(96, 16, res);
    for (int l = 0; l < 16; l++) for (int b = 0; b < 64; b++) begin
      int a, sg;
      a = int'(mem[l][b]);
      sg = 64 + ((a * 109) >>> 5); if (sg < 0) sg = 0; if (sg > 128) sg = 128;
      checks++; if (int'(res[96 + l][b]) != s8((a * sg) >>> 7)) failures++;
    end
    readback(200, 12, res);
    for (int l = 0; l < 12; l++) for (int b = 0; b < 64; b++) begin checks++; if (res[200 + l][b] != mem[200 + l][b]) failures++; end
    checks++; if (n_simd != 3) failures++;
    // host window and host injection
    begin
      flit_t f; f = mk(FT_WRITE, 16'h8005); f.payload[7:0] = 8'h5a; send(f);
      f = mk(FT_DONE, 77); send(f);
      repeat (3) @(posedge clk);
      checks++; if (hostq.size() != 2) failures++;
      else begin
        checks++; if (!(hostq[0].hdr.laddr == 16'h8005 && hostq[0].payload[7:0] == 8'h5a)) failures++;
        checks++; if (!(hostq[1].hdr.ftype == FT_DONE && hostq[1].hdr.laddr == 77)) failures++;
      end
      outq.delete();
      f = mk(FT_WRITE, 3); f.hdr.dst_x = 4'd2; f.payload[15:0] = 16'hbeef;
      @(negedge clk); host_in_flit = f; host_in_valid = 1;
      @(posedge clk); while (!host_in_ready) @(posedge clk);
      @(negedge clk); host_in_valid = 0;
      repeat (2) @(posedge clk);
      checks++; if (!(outq.size() == 1 && outq[0].payload[15:0] == 16'hbeef && outq[0].hdr.dst_x == 2)) failures++;
    end
    $display("bank stalls %0d", n_bank_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
