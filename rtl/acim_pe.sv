// acim_pe: ACIM processing engine -- N_SA analog subarrays, an input buffer,
// an adder tree and an output buffer.
//
// Weight placement inside a PE (this design's choice; the paper gives the
// PE's parts but not how weights are sliced): an INT8 weight w is stored as
// u = w + 128 (0..255) in four 2-bit cells, one cell per subarray. Subarray s
// holds slice (s mod 4) of the weights of row tile (s div 4), i.e. input rows
// 128*(s div 4) ... 128*(s div 4)+127. With 60 subarrays a PE holds 15 row
// tiles x 128 rows = 1920 inputs by 128 weight columns (16 groups of 8).
// Output column (group g, MUX position p) is
//     y = sum_s 4^(s mod 4) * acc_s[g]  -  128 * sum(x)
// where acc_s is the subarray's shift-add result and the second term removes
// the +128 offset of the stored weights.
//
// A job converts MUX positions mux_start ... mux_start+mux_cnt-1. The
// conventional layer-wise mapping needs all 8 positions of a group for one
// layer (mux_cnt = 8, 64 conversion cycles); with group-level parallelism (GLP)
// the 8 columns of a group belong to 8 different layers and a layer uses a
// single position (mux_cnt = 1, 8 cycles). Each position takes 8 conversion
// cycles (one per input bit), the adder tree result of a position is written to
// the output buffer one cycle after its last bit, overlapping the next
// position's first bit. done rises 8*mux_cnt + 2 cycles after the cycle that
// samples start (one extra cycle sums the inputs for the offset correction,
// one writes the last position).
//
// Interface:
//   in_wr_*    : write one 64-byte line of the input buffer (INT8 inputs,
//                input row i at line i/64, byte i%64).
//   prog_*     : program one row of one subarray.
//   start      : begin a job with n_tiles active row tiles (1..15).
//   done       : one-cycle pulse at the end; out[p][g] holds the results of
//                the positions converted (INT32, signed).
module acim_pe
  import hemlet_pkg::*;
#(
  parameter int N_SA   = ACIM_N_SA,
  parameter int ROWS   = SA_ROWS,
  parameter int COLS   = SA_COLS,
  parameter int GRP    = GROUP
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // input buffer write
  input  logic                       in_wr_en,
  input  logic [$clog2(((N_SA/SLICES)*ROWS+FLIT_BYTES-1)/FLIT_BYTES)-1:0] in_wr_line,
  input  logic [FLIT_W-1:0]          in_wr_data,
  // weight programming
  input  logic                       prog_en,
  input  logic [$clog2(N_SA)-1:0]    prog_sa,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [COLS*CELL_BITS-1:0]  prog_data,
  // job control
  input  logic                       start,
  input  logic [$clog2(N_SA/SLICES+1)-1:0] n_tiles,
  input  logic [$clog2(GRP)-1:0]     mux_start,
  input  logic [$clog2(GRP+1)-1:0]   mux_cnt,
  output logic                       busy,
  output logic                       done,
  output logic signed [GRP-1:0][COLS/GRP-1:0][PSUM_BITS-1:0] out
);
  localparam int NT     = N_SA / SLICES;          // row tiles
  localparam int IN_LEN = NT * ROWS;              // inputs per PE
  localparam int NLINES = (IN_LEN + FLIT_BYTES - 1) / FLIT_BYTES;
  localparam int NG     = COLS / GRP;

  // ---------------- input buffer ----------------
  logic [FLIT_W-1:0] inbuf [NLINES];
  always_ff @(posedge clk) begin
    if (in_wr_en) inbuf[in_wr_line] <= in_wr_data;
  end

  function automatic logic [7:0] in_byte(input int i);
    return inbuf[i / FLIT_BYTES][8*(i % FLIT_BYTES) +: 8];
  endfunction

  // ---------------- sequencer ----------------
  typedef enum logic [1:0] {S_IDLE, S_SUM, S_CONV, S_LAST} state_e;
  state_e state;
  logic [2:0]               bit_idx;
  logic [$clog2(GRP)-1:0]   pos;
  logic [$clog2(GRP+1)-1:0] pos_left;
  logic [$clog2(NT+1)-1:0]  tiles_q;
  logic signed [31:0]       sumx;
  logic                     tree_en;
  logic [$clog2(GRP)-1:0]   tree_pos;

  wire conv = (state == S_CONV);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bit_idx  <= '0;
      pos      <= '0;
      pos_left <= '0;
      tiles_q  <= '0;
      sumx     <= '0;
      tree_en  <= 1'b0;
      tree_pos <= '0;
      done     <= 1'b0;
    end else begin
      done    <= 1'b0;
      tree_en <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pos      <= mux_start;
          pos_left <= (mux_cnt == 0) ? 1 : mux_cnt;
          tiles_q  <= n_tiles;
          bit_idx  <= '0;
          state    <= S_SUM;
        end
        S_SUM: begin
          // sum of the active inputs, used to remove the weight offset
          logic signed [31:0] s;
          s = 0;
          for (int i = 0; i < IN_LEN; i++)
            if (i < int'(tiles_q) * ROWS) s += 32'(signed'(in_byte(i)));
          sumx  <= s;
          state <= S_CONV;
        end
        S_CONV: begin
          bit_idx <= bit_idx + 3'd1;
          if (bit_idx == 3'd7) begin
            tree_en  <= 1'b1;
            tree_pos <= pos;
            pos      <= pos + 1'b1;
            pos_left <= pos_left - 1'b1;
            if (pos_left == 1) state <= S_LAST;
          end
        end
        S_LAST: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- subarrays ----------------
  logic signed [N_SA-1:0][NG-1:0][SA_ACC_BITS-1:0] acc;

  for (genvar s = 0; s < N_SA; s++) begin : g_sa
    localparam int TILE = s / SLICES;
    logic [ROWS-1:0] xb;
    always_comb begin
      for (int r = 0; r < ROWS; r++) xb[r] = in_byte(TILE*ROWS + r)[bit_idx];
    end
    acim_subarray #(.ROWS(ROWS), .COLS(COLS), .GRP(GRP)) u_sa (
      .clk, .rst_n,
      .prog_en  (prog_en && (int'(prog_sa) == s)),
      .prog_row,
      .prog_data,
      .conv_en  (conv && (TILE < int'(tiles_q))),
      .first    (bit_idx == 3'd0),
      .in_bits  (xb),
      .bit_idx,
      .mux_sel  (pos),
      .adc_code (),
      .acc      (acc[s])
    );
  end

  // ---------------- adder tree + output buffer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else if (tree_en) begin
      for (int g = 0; g < NG; g++) begin
        logic signed [PSUM_BITS-1:0] t;
        t = -(sumx <<< 7);
        for (int s = 0; s < N_SA; s++)
          if (s / SLICES < int'(tiles_q))
            t += PSUM_BITS'(signed'(acc[s][g])) <<< (CELL_BITS * (s % SLICES));
        out[tree_pos][g] <= t;
      end
    end
  end

endmodule
