// idp_chiplet: Intermediate Data Process chiplet -- the system's global
// buffer, a SIMD unit for operators whose operands come from several
// chiplets, and the attachment point of the host / off-package memory.
//
// Storage is NB SRAM banks of BANK_BYTES (4 x 256 KB by default), addressed
// in 64-byte lines; line a lives in bank a / (BANK_BYTES/64). Flits from the
// router:
//   FT_WRITE, laddr < 0x8000 : stored in line laddr (results collected here).
//   FT_WRITE, laddr >= 0x8000, and every FT_DONE : forwarded to host_out
//                (the host window: final outputs and completion notices).
//   FT_CMD   : cmd_t, one held at a time.
// Commands:
//   OP_SIMD : run simd_unit operator `sop` over n_lines lines from src_line
//             (second operand of SOP_ADD from src2_line; n_elem = len,
//             sh = shift) and write the result lines to dst_line...
//   OP_SEND : send n_lines lines from src_line as FT_WRITE flits to
//             (rep_x, rep_y) at dst_line... (hidden states to ACIM chiplets).
// Each command ends with an FT_DONE (laddr = tag) to the command's sender.
// Flits from host_in (weights, commands, inputs issued by the host) enter the
// NoP through this chiplet's local router port; the chiplet's own flits have
// priority over them.
//
// The paper gives the IDP as SRAM banks plus a SIMD unit plus NoP
// communication; the bank count and size, the command set, the host window
// and the arbitration are this design's choices. SIMD result writes have
// priority over incoming FT_WRITE flits, which then wait (rin_ready low).
module idp_chiplet
  import hemlet_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0,
  parameter int NB         = 4,
  parameter int BANK_BYTES = 256 * 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rin_valid,
  input  flit_t       rin_flit,
  output logic        rin_ready,
  output logic        rout_valid,
  output flit_t       rout_flit,
  input  logic        rout_ready,
  // host / off-package side
  input  logic        host_in_valid,
  input  flit_t       host_in_flit,
  output logic        host_in_ready,
  output logic        host_out_valid,
  output flit_t       host_out_flit,
  input  logic        host_out_ready,
  output logic [31:0] n_simd,
  output logic [31:0] n_bank_stall
);
  localparam int BL_LINES = BANK_BYTES / FLIT_BYTES;
  localparam int BAW      = $clog2(BL_LINES);
  localparam int AW       = $clog2(NB * BL_LINES);
  localparam int BW       = (NB > 1) ? $clog2(NB) : 1;

  // ---------------- receive side ----------------
  logic               cmd_v, cmd_clr;
  cmd_t               cmd;
  logic [COORD_W-1:0] cmd_sx, cmd_sy;
  logic               res_we;          // SIMD result write this cycle
  logic [AW-1:0]      res_addr;
  logic [FLIT_W-1:0]  res_data;

  wire to_host = (rin_flit.hdr.ftype == FT_DONE) ||
                 (rin_flit.hdr.ftype == FT_WRITE && rin_flit.hdr.laddr[LADDR_W-1]);
  wire is_wr   = rin_flit.hdr.ftype == FT_WRITE && !rin_flit.hdr.laddr[LADDR_W-1];
  wire is_cmd  = rin_flit.hdr.ftype == FT_CMD;
  always_comb begin
    rin_ready = 1'b1;
    if (to_host)               rin_ready = host_out_ready;
    else if (is_cmd && cmd_v)  rin_ready = 1'b0;
    else if (is_wr && res_we)  rin_ready = 1'b0;
  end
  wire rx = rin_valid && rin_ready;
  assign host_out_valid = rin_valid && to_host;
  assign host_out_flit  = rin_flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_v <= 1'b0; cmd <= '0; cmd_sx <= '0; cmd_sy <= '0; n_bank_stall <= '0;
    end else begin
      if (cmd_clr) cmd_v <= 1'b0;
      if (rx && is_cmd) begin
        cmd_v  <= 1'b1;
        cmd    <= cmd_t'(rin_flit.payload[CMD_W-1:0]);
        cmd_sx <= rin_flit.hdr.src_x;
        cmd_sy <= rin_flit.hdr.src_y;
      end
      if (rin_valid && is_wr && res_we) n_bank_stall <= n_bank_stall + 1;
    end
  end

  // ---------------- SRAM banks ----------------
  logic              we;
  logic [AW-1:0]     waddr;
  logic [FLIT_W-1:0] wdata;
  logic              re;
  logic [AW-1:0]     raddr;
  logic [BW-1:0]     rbank_q;
  logic [FLIT_W-1:0] bank_rdata [NB];
  logic [FLIT_W-1:0] rdata;

  assign we    = res_we || (rx && is_wr);
  assign waddr = res_we ? res_addr : rin_flit.hdr.laddr[AW-1:0];
  assign wdata = res_we ? res_data : rin_flit.payload;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    chiplet_buffer #(.BYTES(BANK_BYTES)) u_bank (
      .clk,
      .we    (we && int'(waddr[AW-1:BAW]) == b),
      .waddr (waddr[BAW-1:0]),
      .wdata,
      .re    (re && int'(raddr[AW-1:BAW]) == b),
      .raddr (raddr[BAW-1:0]),
      .rdata (bank_rdata[b]));
  end
  always_ff @(posedge clk) if (re) rbank_q <= BW'(raddr[AW-1:BAW]);
  assign rdata = bank_rdata[rbank_q];

  // ---------------- SIMD unit ----------------
  wire               two_op = cmd.sop == SOP_ADD;
  logic              s_start, s_in_valid, s_out_valid, s_busy, s_done;
  logic [FLIT_W-1:0] s_a, s_out;
  simd_unit u_simd (
    .clk, .rst_n, .start(s_start), .op(cmd.sop), .n_lines(5'(cmd.n_lines)),
    .n_elem(cmd.len[10:0]), .sh(cmd.shift), .in_valid(s_in_valid), .in_a(two_op ? s_a : rdata),
    .in_b(rdata), .out_valid(s_out_valid), .out_line(s_out), .busy(s_busy), .done(s_done));

  // ---------------- command controller ----------------
  typedef enum logic [2:0] {I_IDLE, I_RA, I_RB, I_FEED, I_WAIT, I_SEND, I_DONE} istate_e;
  istate_e        st;
  logic [15:0]    k, ko;            // lines fed / results written
  logic           own_v;
  flit_t          own_f;

  always_comb begin
    re    = 1'b0;
    raddr = '0;
    if (st == I_RA) begin re = 1'b1; raddr = AW'(cmd.src_line + k); end
    if (st == I_RB) begin re = 1'b1; raddr = AW'(cmd.src2_line + k); end
  end
  assign s_start    = (st == I_IDLE) && cmd_v && !cmd_clr && cmd.op == OP_SIMD;
  assign s_in_valid = (st == I_FEED);
  assign res_we     = s_out_valid;
  assign res_addr   = AW'(cmd.dst_line + ko);
  assign res_data   = s_out;
  assign cmd_clr    = (st == I_DONE) && !own_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; k <= '0; ko <= '0; own_v <= 1'b0; own_f <= '0; s_a <= '0; n_simd <= '0;
    end else begin
      if (own_v && rout_ready) own_v <= 1'b0;
      if (s_out_valid) ko <= ko + 1'b1;
      unique case (st)
        I_IDLE: if (cmd_v && !cmd_clr) begin
          k  <= '0;
          ko <= '0;
          if (cmd.op == OP_SIMD)      begin st <= I_RA; n_simd <= n_simd + 1; end
          else if (cmd.op == OP_SEND) st <= I_RA;
          else                        st <= I_DONE;
        end
        I_RA: st <= (cmd.op == OP_SEND) ? I_SEND : (two_op ? I_RB : I_FEED);
        I_RB: begin s_a <= rdata; st <= I_FEED; end
        I_FEED: begin
          k <= k + 1'b1;
          st <= (k + 1 == cmd.n_lines) ? I_WAIT : I_RA;
        end
        I_WAIT: if (!s_busy) st <= I_DONE;
        I_SEND: if (!own_v) begin
          own_v <= 1'b1;
          own_f.hdr <= '{dst_x: cmd.rep_x, dst_y: cmd.rep_y, src_x: X, src_y: Y,
                         ftype: FT_WRITE, laddr: cmd.dst_line + k};
          own_f.payload <= rdata;
          k  <= k + 1'b1;
          st <= (k + 1 == cmd.n_lines) ? I_DONE : I_RA;
        end
        I_DONE: if (!own_v) begin
          own_v <= 1'b1;
          own_f.hdr <= '{dst_x: cmd_sx, dst_y: cmd_sy, src_x: X, src_y: Y,
                         ftype: FT_DONE, laddr: LADDR_W'(cmd.tag)};
          own_f.payload <= '0;
          st <= I_IDLE;
        end
        default: st <= I_IDLE;
      endcase
    end
  end

  // in I_FEED the first operand comes straight from the bank for one-operand ops;
  // the host's flits use the local router port when this chiplet sends nothing
  always_comb begin
    rout_valid    = own_v || host_in_valid;
    rout_flit     = own_v ? own_f : host_in_flit;
    host_in_ready = !own_v && rout_ready;
  end

endmodule
