// simd_unit: vector unit for the non-VMM operators of a Transformer block.
//
// Each chiplet carries one of these for operators such as LayerNorm, GELU,
// Softmax and accumulation (residual addition); the IDP chiplet uses it for
// operators whose operands come from several chiplets. Data arrive and leave
// as 64-byte lines of INT8 elements (one NoP flit / buffer line each).
//
//   SOP_ADD  : out = sat8(a + b), element-wise, streaming (1 line/cycle).
//   SOP_RELU : out = max(a, 0), streaming.
//   SOP_GELU : out = a * sigmoid(1.702 a), a read as Q3.4 fixed point, with the
//              sigmoid replaced by the straight line 0.5 + 0.4255 a clipped to
//              [0, 1]; streaming.
//   SOP_LN   : LayerNorm over the n_elem elements of the vector (gamma = 1,
//              beta = 0): (a - mean) / sqrt(var), output in Q3.4. The vector is
//              collected first (sum and sum of squares on the fly), then one
//              cycle computes mean, variance, an integer square root and one
//              reciprocal, then the lines are emitted.
//   SOP_SMAX : Softmax over n_elem elements: max while collecting, then a pass
//              computing 2^-((max-a)>>sh, 4 fraction bits) and their sum, one
//              reciprocal, and the emitted lines hold probabilities in Q0.7.
//
// The paper lists these operators but not how they are computed; the
// formats, approximations and the line-serial organisation are this design's
// choices. Vectors of up to MAXL lines (1024 elements, the largest embedding
// width among the evaluated models) are supported.
//
// Interface: start (op, n_lines, n_elem, sh) -> in_valid lines (a, b) ->
// out_valid lines in the same order -> done pulse with the last line.
// Streaming ops emit each line one cycle after it enters; LN emits its first
// line 2 cycles after the last input line, SMAX n_lines + 2 cycles after it.
module simd_unit
  import hemlet_pkg::*;
#(
  parameter int MAXL = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  simd_op_e             op,
  input  logic [$clog2(MAXL+1)-1:0] n_lines,
  input  logic [10:0]          n_elem,
  input  logic [4:0]           sh,
  input  logic                 in_valid,
  input  logic [FLIT_W-1:0]    in_a,
  input  logic [FLIT_W-1:0]    in_b,
  output logic                 out_valid,
  output logic [FLIT_W-1:0]    out_line,
  output logic                 busy,
  output logic                 done
);
  localparam int E  = FLIT_BYTES;
  localparam int LW = $clog2(MAXL+1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EXP, S_CALC, S_EMIT} state_e;
  state_e      state;
  simd_op_e    op_q;
  logic [LW-1:0] nl_q, cnt;
  logic [10:0] ne_q;
  logic [4:0]  sh_q;
  logic [FLIT_W-1:0] vec [MAXL];
  logic signed [31:0] sum, sumsq, mx;
  logic signed [31:0] mean;
  logic [31:0] rcp;

  function automatic logic [7:0] exp2n(input logic [31:0] diff, input logic [4:0] shv);
    logic [31:0] d, n;
    logic [7:0]  v;
    d = diff >> shv;
    n = d >> 4;
    v = 8'd128 - {2'b00, d[3:0], 2'b00};
    if (n > 7) return 8'd0;
    v = v >> n[2:0];
    return (v > 8'd127) ? 8'd127 : v;
  endfunction

  function automatic logic [15:0] isqrt(input logic [31:0] v);
    logic [31:0] r, b, x;
    x = v; r = 0; b = 32'h4000_0000;
    for (int i = 0; i < 16; i++) begin
      if (x >= r + b) begin x = x - (r + b); r = (r >> 1) + b; end
      else r = r >> 1;
      b = b >> 2;
    end
    return r[15:0];
  endfunction

  function automatic logic [FLIT_W-1:0] stream_op(input simd_op_e o,
      input logic [FLIT_W-1:0] a, input logic [FLIT_W-1:0] b);
    logic [FLIT_W-1:0] r;
    for (int i = 0; i < E; i++) begin
      logic signed [31:0] x, y, sg;
      x = 32'(signed'(a[8*i +: 8]));
      y = 32'(signed'(b[8*i +: 8]));
      unique case (o)
        SOP_ADD:  r[8*i +: 8] = sat8(x + y);
        SOP_RELU: r[8*i +: 8] = (x < 0) ? 8'd0 : x[7:0];
        default: begin  // SOP_GELU
          sg = 32'sd64 + ((x * 32'sd109) >>> 5);
          if (sg < 0) sg = 0;
          if (sg > 128) sg = 128;
          r[8*i +: 8] = sat8((x * sg) >>> 7);
        end
      endcase
    end
    return r;
  endfunction

  wire streaming = (op_q == SOP_ADD) || (op_q == SOP_RELU) || (op_q == SOP_GELU);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; op_q <= SOP_ADD; nl_q <= '0; ne_q <= '0; sh_q <= '0; cnt <= '0;
      sum <= '0; sumsq <= '0; mx <= '0; mean <= '0; rcp <= '0;
      out_valid <= 1'b0; out_line <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q <= op; nl_q <= (n_lines == 0) ? LW'(1) : n_lines; ne_q <= n_elem; sh_q <= sh;
          cnt <= '0; sum <= '0; sumsq <= '0; mx <= 32'sh8000_0000;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (streaming) begin
            out_valid <= 1'b1;
            out_line  <= stream_op(op_q, in_a, in_b);
            if (cnt == nl_q - 1) begin done <= 1'b1; state <= S_IDLE; end
          end else begin
            logic signed [31:0] s, q, m;
            s = sum; q = sumsq; m = mx;
            for (int i = 0; i < E; i++) begin
              logic signed [31:0] x;
              x = 32'(signed'(in_a[8*i +: 8]));
              if (32'(cnt) * E + i < 32'(ne_q)) begin
                s += x; q += x * x; if (x > m) m = x;
              end
            end
            sum <= s; sumsq <= q; mx <= m;
            vec[cnt[$clog2(MAXL)-1:0]] <= in_a;
            if (cnt == nl_q - 1) begin
              cnt   <= '0;
              state <= (op_q == SOP_SMAX) ? S_EXP : S_CALC;
            end
          end
        end
        S_EXP: begin  // softmax: exponentials and their sum, one line per cycle
          logic signed [31:0] s;
          logic [FLIT_W-1:0]  l;
          s = (cnt == 0) ? 32'sd0 : sum;
          for (int i = 0; i < E; i++) begin
            logic [7:0] e;
            e = (32'(cnt) * E + i < 32'(ne_q)) ?
                exp2n(32'(mx - 32'(signed'(vec[cnt[$clog2(MAXL)-1:0]][8*i +: 8]))), sh_q) : 8'd0;
            l[8*i +: 8] = e;
            s += 32'(e);
          end
          vec[cnt[$clog2(MAXL)-1:0]] <= l;
          sum <= s;
          cnt <= cnt + 1'b1;
          if (cnt == nl_q - 1) begin cnt <= '0; state <= S_CALC; end
        end
        S_CALC: begin
          if (op_q == SOP_LN) begin
            logic signed [31:0] mu, var_v;
            logic [15:0] sd;
            mu    = sum / signed'(32'(ne_q));
            var_v = sumsq / signed'(32'(ne_q)) - mu * mu;
            if (var_v < 1) var_v = 1;
            sd    = isqrt(32'(var_v));
            if (sd == 0) sd = 1;
            mean <= mu;
            rcp  <= (32'd1 << 16) / 32'(sd);
          end else begin
            rcp  <= (sum == 0) ? 32'd0 : (32'd127 << 16) / 32'(sum);
          end
          state <= S_EMIT;
        end
        S_EMIT: begin
          logic [FLIT_W-1:0] l;
          for (int i = 0; i < E; i++) begin
            logic signed [31:0] x;
            x = 32'(signed'(vec[cnt[$clog2(MAXL)-1:0]][8*i +: 8]));
            if (op_q == SOP_LN)
              l[8*i +: 8] = sat8(((x - mean) * signed'(rcp) * 16) >>> 16);
            else
              l[8*i +: 8] = sat8((32'(vec[cnt[$clog2(MAXL)-1:0]][8*i +: 8]) * rcp) >> 16);
          end
          out_valid <= 1'b1;
          out_line  <= l;
          cnt <= cnt + 1'b1;
          if (cnt == nl_q - 1) begin done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
