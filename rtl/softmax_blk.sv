// softmax_blk: blocked (two-stage) softmax for attention on the DCIM chiplet.
//
// Attention is computed block by block along the sequence: for a block of
// keys only a BL-wide slice P' of each score row exists at a time. Stage 1
// (local softmax) turns that slice into unnormalised weights relative to the
// slice maximum m_b,
//     p_j = 2^-((m_b - s_j) / 2^(sh+4)),      l_b = sum_j p_j,
// which are consumed at once by the P''V product. Stage 2 (global
// normalisation) merges the per-block results of one query row,
//     m = max(m_acc, m_b),  a = 2^-(m-m_acc), b = 2^-(m-m_b)
//     O = a*O + b*S',  l = a*l + b*l_b
// and, after the last block, divides O by l. This is the split of Softmax into
// a local step and a final normalisation across blocks that the paper adopts
// (after FlashAttention), so no full B_L x L score matrix is ever buffered.
//
// Number formats (this design's choice; the paper states only that the model
// is fully INT8-quantised with I-ViT's integer operators):
//   * scores s are INT32; (m - s) >> sh is read as a base-2 exponent with 4
//     fraction bits (sh folds in the 1/sqrt(d) scale and log2(e)).
//   * 2^-x is approximated by a shift for the integer part and 1 - f/2 for the
//     fraction, giving p in Q0.7 (0..127) -- an INT8 input for the DCIM array.
//   * the final division uses one reciprocal per row, 2^20 / l, and a multiply.
//
// Operations (one per cycle, results registered):
//   loc_en : s[BL] with valid mask -> p[BL], m_b, l_b   (outputs p, mb, lb)
//   acc_en : row q, first, m_b, l_b, sv[D] (S' row)     -> row state updated
//   fin_en : row q                                     -> out[D] (INT8), out_valid
module softmax_blk
  import hemlet_pkg::*;
#(
  parameter int BL = 32,   // block size B_L
  parameter int D  = 64,   // head width
  parameter int NQ = 32    // query rows held (one Q block)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [4:0]                   sh,
  // stage 1
  input  logic                         loc_en,
  input  logic signed [BL-1:0][31:0]   s,
  input  logic [BL-1:0]                valid,
  output logic [BL-1:0][7:0]           p,
  output logic signed [31:0]           mb,
  output logic [31:0]                  lb,
  // stage 2
  input  logic                         acc_en,
  input  logic [$clog2(NQ)-1:0]        acc_row,
  input  logic                         acc_first,
  input  logic signed [31:0]           acc_mb,
  input  logic [31:0]                  acc_lb,
  input  logic signed [D-1:0][31:0]    sv,
  input  logic                         fin_en,
  input  logic [$clog2(NQ)-1:0]        fin_row,
  output logic signed [D-1:0][7:0]     out,
  output logic                         out_valid
);

  // 2^-(diff >> sh) with 4 fraction bits, Q0.7, saturating at 127.
  function automatic logic [7:0] exp2n(input logic [31:0] diff, input logic [4:0] shv);
    logic [31:0] d;
    logic [31:0] n;
    logic [3:0]  f;
    logic [7:0]  v;
    d = diff >> shv;
    n = d >> 4;
    f = d[3:0];
    v = 8'd128 - {2'b00, f, 2'b00};
    if (n > 7) return 8'd0;
    v = v >> n[2:0];
    return (v > 8'd127) ? 8'd127 : v;
  endfunction

  // ---------------- stage 1 ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= '0; mb <= '0; lb <= '0;
    end else if (loc_en) begin
      logic signed [31:0] m;
      logic [31:0]        l;
      m = 32'sh8000_0000;
      for (int j = 0; j < BL; j++)
        if (valid[j] && signed'(s[j]) > m) m = signed'(s[j]);
      l = 0;
      for (int j = 0; j < BL; j++) begin
        logic [7:0] e;
        e = valid[j] ? exp2n(32'(m - signed'(s[j])), sh) : 8'd0;
        p[j] <= e;
        l += 32'(e);
      end
      mb <= m;
      lb <= l;
    end
  end

  // ---------------- stage 2 ----------------
  logic signed [31:0] m_acc [NQ];
  logic [31:0]        l_acc [NQ];
  logic signed [31:0] o_acc [NQ][D];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      if (acc_first) begin
        m_acc[acc_row] <= acc_mb;
        l_acc[acc_row] <= acc_lb;
        for (int k = 0; k < D; k++) o_acc[acc_row][k] <= signed'(sv[k]);
      end else begin
        logic signed [31:0] mo, mn;
        logic [7:0]         a, b;
        mo = m_acc[acc_row];
        mn = (acc_mb > mo) ? acc_mb : mo;
        a  = (mn == mo)     ? 8'd128 : exp2n(32'(mn - mo), sh);
        b  = (mn == acc_mb) ? 8'd128 : exp2n(32'(mn - acc_mb), sh);
        m_acc[acc_row] <= mn;
        l_acc[acc_row] <= 32'((64'(l_acc[acc_row]) * a + 64'(acc_lb) * b) >> 7);
        for (int k = 0; k < D; k++)
          o_acc[acc_row][k] <= 32'((64'(o_acc[acc_row][k]) * signed'({1'b0, a}) +
                                    64'(signed'(sv[k])) * signed'({1'b0, b})) >>> 7);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= fin_en;
      if (fin_en) begin
        logic [31:0] r;
        r = (l_acc[fin_row] == 0) ? 32'd0 : 32'((64'd1 << 20) / 64'(l_acc[fin_row]));
        for (int k = 0; k < D; k++)
          out[k] <= sat8(32'((64'(o_acc[fin_row][k]) * signed'({1'b0, r}) +
                              64'sd524288) >>> 20));
      end
    end
  end

endmodule
