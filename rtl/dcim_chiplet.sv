// dcim_chiplet: digital CIM chiplet for the dynamic matrix multiplications of
// attention (Q K^T and P V), whose operands are produced at run time.
//
// Holds PES DCIM PEs (16 in the A32D16 configuration), a BUF_BYTES chiplet
// buffer (512 KB), the blocked-softmax unit and an attention controller behind
// the chiplet's NoP interface. Flits from the router:
//   FT_WRITE : payload stored in buffer line laddr (Q, K, V rows arriving).
//   FT_CMD   : cmd_t in the low payload bits (one command held at a time).
// OP_ATTN computes softmax(Q K^T) V for one head of width 64 and sequence
// length len, with Q row i at buffer line src_line+i, K row i at src2_line+i
// and V row i at src3_line+i (one 64-byte line per row). Three PEs are used:
// PE pe holds a Q block of BL = 32 rows, written as weight columns, and
// turns each K row into a column of 32 scores; PEs pe+1 and pe+2 hold a V
// block (32 rows x 64 columns, split in two halves) and multiply it by the
// local-softmax weights P'' of one query row. The sequence is walked in
// blocks of 32 keys: per key block the V block is loaded, the 32x32 score tile
// is computed, and for every query row the local softmax, the P''V product and
// the global merge (softmax_blk stage 2) follow. After the last key block the
// 32 normalised output rows are sent as FT_WRITE flits to (rep_x, rep_y) at
// dst_line + row, then an FT_DONE (laddr = tag) goes to the command's sender.
//
// The paper's split of attention into local softmax and a final normalisation
// across blocks, and the use of DCIM arrays for these operand-dependent
// products, are followed. The buffer layout, the 32-row block size, the PE
// roles, the command format and the sequential one-head-at-a-time controller
// are this design's choices; the paper runs heads on several PEs in parallel.
//
// n_qk / n_pv count PE operations, n_merge the stage-2 merges with an earlier
// block (blocked softmax across more than one key block).
module dcim_chiplet
  import hemlet_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0,
  parameter int PES       = DCIM_PES,
  parameter int BUF_BYTES = DCIM_BUF_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rin_valid,
  input  flit_t       rin_flit,
  output logic        rin_ready,
  output logic        rout_valid,
  output flit_t       rout_flit,
  input  logic        rout_ready,
  output logic [31:0] n_qk,
  output logic [31:0] n_pv,
  output logic [31:0] n_merge
);
  localparam int LINES = BUF_BYTES / FLIT_BYTES;
  localparam int AW    = $clog2(LINES);
  localparam int BL    = 32;
  localparam int PW    = $clog2(PES);
  localparam int NOUT  = DCIM_N_SA * DSA_COLS / 8;   // 32 outputs per PE

  // ---------------- network interface ----------------
  logic               cmd_v;
  cmd_t               cmd;
  logic [COORD_W-1:0] cmd_sx, cmd_sy;
  logic               cmd_clr;
  wire  is_cmd = rin_flit.hdr.ftype == FT_CMD;
  assign rin_ready = !(is_cmd && cmd_v);
  wire  rx = rin_valid && rin_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_v <= 1'b0; cmd <= '0; cmd_sx <= '0; cmd_sy <= '0;
    end else begin
      if (cmd_clr) cmd_v <= 1'b0;
      if (rx && is_cmd) begin
        cmd_v  <= 1'b1;
        cmd    <= cmd_t'(rin_flit.payload[CMD_W-1:0]);
        cmd_sx <= rin_flit.hdr.src_x;
        cmd_sy <= rin_flit.hdr.src_y;
      end
    end
  end

  logic              buf_re;
  logic [AW-1:0]     buf_raddr;
  logic [FLIT_W-1:0] buf_rdata;
  chiplet_buffer #(.BYTES(BUF_BYTES)) u_buf (
    .clk, .we(rx && rin_flit.hdr.ftype == FT_WRITE), .waddr(rin_flit.hdr.laddr[AW-1:0]),
    .wdata(rin_flit.payload), .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata));

  // ---------------- PEs ----------------
  logic [PES-1:0] wr_row_en, wr_col_en, pe_start, pe_busy, pe_done;
  logic [5:0]     wr_row;
  logic [4:0]     wr_col;
  logic [255:0]   wr_row_data [PES];
  logic [FLIT_W-1:0] pe_x;
  logic signed [NOUT-1:0][DACC_BITS-1:0] pe_y [PES];

  for (genvar p = 0; p < PES; p++) begin : g_pe
    dcim_pe u_pe (
      .clk, .rst_n,
      .wr_row_en (wr_row_en[p]), .wr_row, .wr_row_data (wr_row_data[p]),
      .wr_col_en (wr_col_en[p]), .wr_col, .wr_col_data (buf_rdata),
      .start (pe_start[p]), .x (pe_x), .busy (pe_busy[p]), .done (pe_done[p]),
      .y (pe_y[p]));
  end

  // ---------------- softmax ----------------
  logic [11:0]                   qb, kb, nblk;   // Q block, key block, block count
  logic                          loc_en, acc_en, fin_en, out_valid;
  logic signed [BL-1:0][31:0]    s_vec;
  logic [BL-1:0]                 s_valid;
  logic [BL-1:0][7:0]            p_vec;
  logic signed [31:0]            mb;
  logic [31:0]                   lb;
  logic signed [63:0][31:0]      sv;
  logic signed [63:0][7:0]       o_row;
  logic [4:0]                    row;

  softmax_blk #(.BL(BL), .D(64), .NQ(BL)) u_smax (
    .clk, .rst_n, .sh(cmd.shift),
    .loc_en, .s(s_vec), .valid(s_valid), .p(p_vec), .mb, .lb,
    .acc_en, .acc_row(row), .acc_first(kb == 0), .acc_mb(mb), .acc_lb(lb), .sv,
    .fin_en, .fin_row(row), .out(o_row), .out_valid);

  // ---------------- attention controller ----------------
  typedef enum logic [3:0] {A_IDLE, A_LQ, A_LV, A_KRD, A_KST, A_KWT, A_SM, A_PVST,
                            A_PVWT, A_FIN, A_FINW, A_SEND, A_DONE} astate_e;
  astate_e      st;
  logic [5:0]   i;            // row / key counter within a block
  logic         ld_v;
  logic [4:0]   ld_r;
  logic signed [31:0] score [BL][BL];   // score[q][k]
  logic         out_v;
  flit_t        out_f;

  wire [PW-1:0] pq  = cmd.pe[PW-1:0];
  wire [PW-1:0] pv0 = PW'(cmd.pe + 6'd1);
  wire [PW-1:0] pv1 = PW'(cmd.pe + 6'd2);
  wire [11:0]   qrow = 12'(qb * BL) + 12'(i);
  wire [11:0]   krow = 12'(kb * BL) + 12'(i);

  assign rout_valid = out_v;
  assign rout_flit  = out_f;

  // buffer reads issued by the controller
  always_comb begin
    buf_re    = 1'b0;
    buf_raddr = '0;
    unique case (st)
      A_LQ:  begin buf_re = i < 6'(BL); buf_raddr = AW'(cmd.src_line)  + AW'(qrow); end
      A_LV:  begin buf_re = i < 6'(BL); buf_raddr = AW'(cmd.src3_line) + AW'(krow); end
      A_KRD: begin buf_re = 1'b1;       buf_raddr = AW'(cmd.src2_line) + AW'(krow); end
      default: ;
    endcase
  end

  // PE write / start strobes
  always_comb begin
    wr_row_en = '0;
    wr_col_en = '0;
    pe_start  = '0;
    wr_row    = 6'(ld_r);
    wr_col    = ld_r;
    for (int p = 0; p < PES; p++) wr_row_data[p] = '0;
    pe_x      = '0;
    if (ld_v && st == A_LQ) wr_col_en[pq] = 1'b1;
    if (ld_v && st == A_LV) begin
      wr_row_en[pv0] = 1'b1;
      wr_row_en[pv1] = 1'b1;
      wr_row_data[pv0] = buf_rdata[255:0];
      wr_row_data[pv1] = buf_rdata[511:256];
    end
    if (st == A_KST) begin
      pe_start[pq] = 1'b1;
      pe_x = (32'(krow) < 32'(cmd.len)) ? buf_rdata : '0;
    end
    if (st == A_PVST) begin
      pe_start[pv0] = 1'b1;
      pe_start[pv1] = 1'b1;
      pe_x = {256'b0, p_vec};
    end
  end

  always_comb begin
    for (int k = 0; k < BL; k++) begin
      s_vec[k]   = score[i[4:0]][k];
      s_valid[k] = 32'(kb) * BL + k < 32'(cmd.len);
    end
    for (int c = 0; c < 32; c++) begin
      sv[c]      = 32'(signed'(pe_y[pv0][c]));
      sv[32 + c] = 32'(signed'(pe_y[pv1][c]));
    end
  end

  assign loc_en  = (st == A_SM);
  assign acc_en  = (st == A_PVWT) && pe_done[pv0];
  assign fin_en  = (st == A_FIN);
  assign row     = i[4:0];
  assign cmd_clr = (st == A_DONE) && !out_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; qb <= '0; kb <= '0; nblk <= '0; i <= '0; ld_v <= 1'b0; ld_r <= '0;
      out_v <= 1'b0; out_f <= '0; n_qk <= '0; n_pv <= '0; n_merge <= '0;
    end else begin
      ld_v <= buf_re && (st == A_LQ || st == A_LV);
      ld_r <= i[4:0];
      if (out_v && rout_ready) out_v <= 1'b0;
      unique case (st)
        A_IDLE: if (cmd_v && cmd.op == OP_ATTN && !cmd_clr) begin
          qb   <= '0;
          nblk <= 12'((32'(cmd.len) + BL - 1) / BL);
          i    <= '0;
          st   <= A_LQ;
        end else if (cmd_v && cmd.op != OP_ATTN) st <= A_DONE;   // unsupported: just acknowledge
        A_LQ: begin                       // Q rows -> weight columns of PE pq
          if (i < 6'(BL)) i <= i + 1'b1;
          else if (!ld_v) begin kb <= '0; i <= '0; st <= A_LV; end
        end
        A_LV: begin                       // V rows -> weight rows of PEs pv0/pv1
          if (i < 6'(BL)) i <= i + 1'b1;
          else if (!ld_v) begin i <= '0; st <= A_KRD; end
        end
        A_KRD: st <= A_KST;               // K row read issued
        A_KST: st <= A_KWT;               // K row as input of PE pq
        A_KWT: if (pe_done[pq]) begin
          for (int q = 0; q < BL; q++) score[q][i[4:0]] <= 32'(signed'(pe_y[pq][q]));
          n_qk <= n_qk + 1;
          if (i == 6'(BL - 1)) begin i <= '0; st <= A_SM; end
          else begin i <= i + 1'b1; st <= A_KRD; end
        end
        A_SM:   st <= A_PVST;             // local softmax of score row i
        A_PVST: st <= A_PVWT;             // P'' row x V block
        A_PVWT: if (pe_done[pv0]) begin   // global merge (acc_en this cycle)
          n_pv <= n_pv + 1;
          if (kb != 0) n_merge <= n_merge + 1;
          if (i == 6'(BL - 1) || 32'(qrow) + 1 >= 32'(cmd.len)) begin
            i <= '0;
            if (kb + 1 == nblk) st <= A_FIN;
            else begin kb <= kb + 1'b1; st <= A_LV; end
          end else begin
            i  <= i + 1'b1;
            st <= A_SM;
          end
        end
        A_FIN:  st <= A_FINW;
        A_FINW: if (out_valid) st <= A_SEND;
        A_SEND: if (!out_v) begin
          out_v <= 1'b1;
          out_f.hdr <= '{dst_x: cmd.rep_x, dst_y: cmd.rep_y, src_x: X, src_y: Y,
                         ftype: FT_WRITE, laddr: cmd.dst_line + LADDR_W'(qrow)};
          out_f.payload <= o_row;
          if (i == 6'(BL - 1) || 32'(qrow) + 1 >= 32'(cmd.len)) begin
            i <= '0;
            if (qb + 1 == nblk) st <= A_DONE;
            else begin qb <= qb + 1'b1; st <= A_LQ; end
          end else begin
            i  <= i + 1'b1;
            st <= A_FIN;
          end
        end
        A_DONE: if (!out_v) begin
          out_v <= 1'b1;
          out_f.hdr <= '{dst_x: cmd_sx, dst_y: cmd_sy, src_x: X, src_y: Y,
                         ftype: FT_DONE, laddr: LADDR_W'(cmd.tag)};
          out_f.payload <= '0;
          st <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
