// hemlet_pkg: constants and types shared by the Hemlet chiplet system.
//
// Array geometry follows the paper's system configuration: ACIM subarrays of
// 128x128 two-bit RRAM cells with eight columns per ADC ("group"), 9-bit ADCs,
// 60 subarrays per ACIM PE; DCIM subarrays of 64x64 SRAM bits, four per DCIM PE;
// INT8 activations and weights; 500 MHz clock.
//
// The network-on-package (NoP) flit format is this design's own choice: one
// flit carries a 64-byte payload, which is what a 32 GB/s link moves per
// 500 MHz cycle, plus a header with XY destination, source, type and a line
// address in the destination chiplet's buffer.
package hemlet_pkg;

  // ---------------- precision ----------------
  localparam int ACT_BITS  = 8;   // INT8 activations (Table 2)
  localparam int W_BITS    = 8;   // INT8 weights (Table 2)

  // ---------------- ACIM ----------------
  localparam int SA_ROWS   = 128; // subarray rows (Sec 6.1)
  localparam int SA_COLS   = 128; // subarray columns (Sec 6.1)
  localparam int CELL_BITS = 2;   // bits per RRAM cell (Sec 6.1)
  localparam int GROUP     = 8;   // columns sharing one ADC (Sec 6.1)
  localparam int ADC_BITS  = 9;   // ADC precision (Sec 6.1, Table 2)
  localparam int N_GROUPS  = SA_COLS / GROUP;          // 16 ADCs per subarray
  localparam int SLICES    = W_BITS / CELL_BITS;       // 4 cells per weight
  localparam int ACIM_N_SA = 60;  // subarrays per ACIM PE (Sec 6.1)
  localparam int ACIM_PES  = 32;  // ACIM PEs per chiplet, A32D16 (Sec 6.1)
  localparam int ACIM_BUF_BYTES = 64 * 1024; // ACIM chiplet buffer (Sec 6.1)
  // Column result of one subarray after shift-add over the 8 input bits:
  // |sum| <= 128 rows * 3 * 128 < 2^16, signed -> 18 bits is ample.
  localparam int SA_ACC_BITS = 18;
  localparam int PSUM_BITS   = 32;

  // ---------------- DCIM ----------------
  localparam int DSA_ROWS  = 64;  // DCIM subarray rows (Sec 6.1)
  localparam int DSA_COLS  = 64;  // DCIM subarray bit columns (Sec 6.1)
  localparam int DSA_WCOLS = DSA_COLS / W_BITS;        // 8 weight columns
  localparam int DCIM_N_SA = 4;   // subarrays per DCIM PE (Sec 6.1)
  localparam int DCIM_PES  = 16;  // DCIM PEs per chiplet, A32D16 (Sec 6.1)
  localparam int DCIM_BUF_BYTES = 512 * 1024; // DCIM chiplet buffer (Sec 6.1)
  localparam int DACC_BITS = 24;

  // ---------------- NoP ----------------
  localparam int FLIT_BYTES = 64;               // 32 GB/s / 500 MHz
  localparam int FLIT_W     = FLIT_BYTES * 8;
  localparam int COORD_W    = 4;
  localparam int LADDR_W    = 16;               // buffer line address

  typedef enum logic [1:0] {
    FT_WRITE = 2'd0,   // payload -> destination buffer line laddr
    FT_CMD   = 2'd1,   // payload holds a command for the chiplet FSM
    FT_WPROG = 2'd2,   // program one ACIM subarray row (weights)
    FT_DONE  = 2'd3    // completion notice, laddr = command tag
  } flit_type_e;

  typedef struct packed {
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    flit_type_e         ftype;
    logic [LADDR_W-1:0] laddr;
  } flit_hdr_t;

  typedef struct packed {
    flit_hdr_t         hdr;
    logic [FLIT_W-1:0] payload;
  } flit_t;

  localparam int FLIT_T_W = $bits(flit_t);

  // ---------------- commands ----------------
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_VMM      = 4'd1,  // ACIM: static VMM on one PE
    OP_ATTN     = 4'd2,  // DCIM: blocked attention for one head
    OP_SIMD     = 4'd3,  // any chiplet: SIMD operator on buffer lines
    OP_SEND     = 4'd4   // any chiplet: send buffer lines to another chiplet
  } op_e;

  typedef enum logic [2:0] {
    SOP_ADD   = 3'd0,    // saturating element-wise add (residual, accumulation)
    SOP_GELU  = 3'd1,
    SOP_LN    = 3'd2,    // LayerNorm over the vector
    SOP_SMAX  = 3'd3,    // Softmax over the vector
    SOP_RELU  = 3'd4
  } simd_op_e;

  // Command carried in the low bits of a FT_CMD payload.
  typedef struct packed {
    logic [7:0]         tag;      // echoed in the FT_DONE flit
    logic [COORD_W-1:0] rep_x;    // where results / DONE go
    logic [COORD_W-1:0] rep_y;
    logic [LADDR_W-1:0] src_line; // first source line in local buffer
    logic [LADDR_W-1:0] src2_line;// second operand / K base
    logic [LADDR_W-1:0] src3_line;// V base (attention)
    logic [LADDR_W-1:0] dst_line; // first line at the destination
    logic [LADDR_W-1:0] n_lines;  // vector length in lines / rows
    logic [11:0]        len;      // elements (VMM rows, attention L)
    logic [5:0]         pe;       // PE index
    logic [2:0]         mux_start;// first MUX position (ACIM)
    logic [3:0]         mux_cnt;  // number of MUX positions (1=GLP, 8=layer-wise)
    logic [4:0]         shift;    // requantization right shift
    simd_op_e           sop;
    op_e                op;
  } cmd_t;

  localparam int CMD_W = $bits(cmd_t);

  // Saturate a signed value to INT8.
  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage
