// acim_chiplet: analog CIM chiplet for the static (weight-stationary) VMMs.
//
// Holds PES ACIM PEs (32 in the A32D16 configuration, 60 subarrays each), a
// BUF_BYTES chiplet buffer (64 KB), a control FSM and the chiplet's NoP
// network interface. Flits from the router:
//   FT_WRITE : payload stored in buffer line laddr (activations arriving).
//   FT_WPROG : programs one subarray row; payload[255:0] = 128 two-bit cells,
//              payload[262:256] = row, [269:264] = subarray, [277:272] = PE.
//   FT_CMD   : cmd_t in the low payload bits, queued (4 entries).
// OP_VMM runs one static VMM on one PE: the FSM copies ceil(len/64) lines
// starting at src_line from the chiplet buffer into the PE's input buffer,
// starts the PE on ceil(len/128) row tiles and MUX positions
// mux_start..mux_start+mux_cnt-1 (mux_cnt = 1 for a GLP-mapped layer, 8 for a
// layer-wise one), and immediately takes the next command. A result sender
// picks finished PEs, requantises every output to INT8 (arithmetic right shift
// by `shift`, saturate), packs them 16 per MUX position into 64-byte lines
// (byte 16*k + g = group g of the k-th converted position) and sends them as
// FT_WRITE flits to (rep_x, rep_y) from line dst_line on, followed by an
// FT_DONE flit (laddr = tag) to the command's sender.
//
// Because each PE computes from its own input buffer, the chiplet buffer can
// be refilled with the next input block while PEs run -- the
// communication/computation pipeline across input blocks that the paper
// builds on the hierarchical buffers instead of a doubled buffer. n_overlap
// counts flits written into the buffer while some PE is busy.
//
// Departures from the paper: results leave from the PE output buffers
// directly rather than through the chiplet buffer; the requantisation in the
// result path stands in for the ACIM chiplet's SIMD unit (the non-VMM
// operators run on the IDP and DCIM SIMD units in this design); the command
// format, packing and queue depth are this design's choices.
module acim_chiplet
  import hemlet_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0,
  parameter int PES       = ACIM_PES,
  parameter int N_SA      = ACIM_N_SA,
  parameter int BUF_BYTES = ACIM_BUF_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  // from router local output
  input  logic        rin_valid,
  input  flit_t       rin_flit,
  output logic        rin_ready,
  // to router local input
  output logic        rout_valid,
  output flit_t       rout_flit,
  input  logic        rout_ready,
  // activity counters
  output logic [31:0] n_vmm_glp,
  output logic [31:0] n_vmm_lw,
  output logic [31:0] n_overlap
);
  localparam int LINES  = BUF_BYTES / FLIT_BYTES;
  localparam int AW     = $clog2(LINES);
  localparam int NT     = N_SA / SLICES;
  localparam int PLINES = (NT * SA_ROWS + FLIT_BYTES - 1) / FLIT_BYTES;
  localparam int PLW    = $clog2(PLINES);
  localparam int PW     = (PES > 1) ? $clog2(PES) : 1;

  // ---------------- network interface: receive ----------------
  typedef struct packed {
    cmd_t               c;
    logic [COORD_W-1:0] sx;
    logic [COORD_W-1:0] sy;
  } qcmd_t;

  qcmd_t      cq [4];
  logic [2:0] cq_cnt;
  logic       cq_pop;

  wire is_cmd = rin_flit.hdr.ftype == FT_CMD;
  assign rin_ready = !(is_cmd && cq_cnt == 3'd4);
  wire rx = rin_valid && rin_ready;

  logic              buf_we;
  logic [AW-1:0]     buf_waddr;
  logic              buf_re;
  logic [AW-1:0]     buf_raddr;
  logic [FLIT_W-1:0] buf_rdata;

  assign buf_we    = rx && rin_flit.hdr.ftype == FT_WRITE;
  assign buf_waddr = rin_flit.hdr.laddr[AW-1:0];

  chiplet_buffer #(.BYTES(BUF_BYTES)) u_buf (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(rin_flit.payload),
    .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata));

  wire              prog    = rx && rin_flit.hdr.ftype == FT_WPROG;
  wire [5:0]        prog_pe = rin_flit.payload[277:272];
  wire [5:0]        prog_sa = rin_flit.payload[269:264];
  wire [6:0]        prog_rw = rin_flit.payload[262:256];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cq_cnt <= '0;
    else begin
      logic [2:0] c;
      c = cq_cnt;
      if (cq_pop) begin
        for (int i = 0; i < 3; i++) cq[i] <= cq[i+1];
        c = c - 1'b1;
      end
      if (rx && is_cmd) begin
        cq[c[1:0]] <= '{c: cmd_t'(rin_flit.payload[CMD_W-1:0]),
                        sx: rin_flit.hdr.src_x, sy: rin_flit.hdr.src_y};
        c = c + 1'b1;
      end
      cq_cnt <= c;
    end
  end

  // ---------------- PEs ----------------
  logic [PES-1:0] pe_busy, pe_done, pe_start, pe_wr;
  logic [PLW-1:0] pe_wline;
  logic [$clog2(NT+1)-1:0] pe_tiles;
  logic signed [GROUP-1:0][SA_COLS/GROUP-1:0][PSUM_BITS-1:0] pe_out [PES];
  qcmd_t          job [PES];
  logic [PES-1:0] pending;

  for (genvar p = 0; p < PES; p++) begin : g_pe
    acim_pe #(.N_SA(N_SA)) u_pe (
      .clk, .rst_n,
      .in_wr_en   (pe_wr[p]),
      .in_wr_line (pe_wline),
      .in_wr_data (buf_rdata),
      .prog_en    (prog && int'(prog_pe) == p),
      .prog_sa    (prog_sa[$clog2(N_SA)-1:0]),
      .prog_row   (prog_rw),
      .prog_data  (rin_flit.payload[SA_COLS*CELL_BITS-1:0]),
      .start      (pe_start[p]),
      .n_tiles    (pe_tiles),
      .mux_start  (job[p].c.mux_start),
      .mux_cnt    (job[p].c.mux_cnt),
      .busy       (pe_busy[p]),
      .done       (pe_done[p]),
      .out        (pe_out[p])
    );
  end

  // ---------------- command FSM: load PE input buffer, start PE ----------------
  typedef enum logic [1:0] {C_IDLE, C_LOAD, C_START} cstate_e;
  cstate_e          cst;
  qcmd_t            cur;
  logic [PLW:0]     ld_i, ld_n;
  logic             ld_v;      // read issued last cycle
  logic [PLW-1:0]   ld_line;
  wire [PW-1:0]     cur_pe = cur.c.pe[PW-1:0];
  qcmd_t            head;
  logic [PW-1:0]    head_pe;
  assign head    = cq[0];
  assign head_pe = head.c.pe[PW-1:0];
  logic             send_busy;
  logic [PW-1:0]    send_pe;

  // A VMM waits until its PE is idle and its previous results are sent;
  // commands of other kinds are not executed by this chiplet and are dropped.
  wire pe_free = !pe_busy[head_pe] && !pending[head_pe] && !pe_done[head_pe] &&
                 !(send_busy && send_pe == head_pe);
  assign cq_pop = (cst == C_IDLE) && (cq_cnt != 0) && (head.c.op != OP_VMM || pe_free);
  assign buf_re    = (cst == C_LOAD) && (ld_i < ld_n);
  assign buf_raddr = AW'(cur.c.src_line) + AW'(ld_i);

  always_comb begin
    pe_wr = '0;
    if (ld_v) pe_wr[cur_pe] = 1'b1;
    pe_start = '0;
    if (cst == C_START) pe_start[cur_pe] = 1'b1;
  end
  assign pe_wline = ld_line;
  assign pe_tiles = ($clog2(NT+1))'((32'(cur.c.len) + SA_ROWS - 1) / SA_ROWS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; cur <= '0; ld_i <= '0; ld_n <= '0; ld_v <= 1'b0; ld_line <= '0;
      n_vmm_glp <= '0; n_vmm_lw <= '0;
      for (int p = 0; p < PES; p++) job[p] <= '0;
    end else begin
      ld_v <= 1'b0;
      unique case (cst)
        C_IDLE: if (cq_pop && head.c.op == OP_VMM) begin
          cur  <= head;
          ld_i <= '0;
          ld_n <= (PLW+1)'((32'(head.c.len) + FLIT_BYTES - 1) / FLIT_BYTES);
          cst  <= C_LOAD;
        end
        C_LOAD: begin
          if (ld_i < ld_n) begin
            ld_v    <= 1'b1;
            ld_line <= ld_i[PLW-1:0];
            ld_i    <= ld_i + 1'b1;
          end else if (!ld_v) begin
            job[cur_pe] <= cur;
            cst <= C_START;
          end
        end
        C_START: begin
          if (cur.c.mux_cnt == 4'd1) n_vmm_glp <= n_vmm_glp + 1;
          else                       n_vmm_lw  <= n_vmm_lw + 1;
          cst <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ---------------- result sender ----------------
  logic [3:0]  s_k, s_nk;      // line index within the result
  logic        s_done_flit;
  qcmd_t       sj;

  always_comb begin
    int j, pr;
    j = 0;
    pr = 0;
    rout_valid = send_busy;
    rout_flit  = '0;
    sj         = job[send_pe];
    if (s_done_flit) begin
      rout_flit.hdr = '{dst_x: sj.sx, dst_y: sj.sy, src_x: X, src_y: Y,
                        ftype: FT_DONE, laddr: LADDR_W'(sj.c.tag)};
    end else begin
      rout_flit.hdr = '{dst_x: sj.c.rep_x, dst_y: sj.c.rep_y, src_x: X, src_y: Y,
                        ftype: FT_WRITE, laddr: sj.c.dst_line + LADDR_W'(s_k)};
      for (int b = 0; b < FLIT_BYTES; b++) begin
        j  = int'(s_k) * FLIT_BYTES + b;
        pr = j / 16;
        if (pr < int'(sj.c.mux_cnt))
          rout_flit.payload[8*b +: 8] =
            sat8(32'(signed'(pe_out[send_pe][(int'(sj.c.mux_start) + pr) % GROUP][j % 16])) >>> sj.c.shift);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0; send_busy <= 1'b0; send_pe <= '0; s_k <= '0; s_nk <= '0; s_done_flit <= 1'b0;
    end else begin
      logic [PES-1:0] pnd;
      pnd = pending | pe_done;
      if (!send_busy) begin
        int sel;
        sel = -1;
        for (int p = PES - 1; p >= 0; p--) if (pnd[p]) sel = p;   // lowest index
        s_k <= '0;
        s_done_flit <= 1'b0;
        if (sel >= 0) begin
          send_busy <= 1'b1;
          send_pe   <= PW'(sel);
          s_nk      <= 4'((16 * int'(job[sel].c.mux_cnt) + FLIT_BYTES - 1) / FLIT_BYTES);
          pnd[sel]  = 1'b0;
        end
      end else if (rout_ready) begin
        if (s_done_flit) send_busy <= 1'b0;
        else if (s_k == s_nk - 1) s_done_flit <= 1'b1;
        else s_k <= s_k + 1'b1;
      end
      pending <= pnd;
    end
  end

  // ---------------- counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_overlap <= '0;
    else if (buf_we && |pe_busy) n_overlap <= n_overlap + 1;
  end

endmodule
