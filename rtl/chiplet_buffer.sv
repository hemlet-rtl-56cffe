// chiplet_buffer: on-chiplet SRAM buffer, one 64-byte line per access.
//
// Used as the 64 KB ACIM chiplet buffer, the 512 KB DCIM chiplet buffer and
// each IDP SRAM bank (sizes per the paper's system configuration; the IDP
// bank size is this design's choice). A line is the payload of one NoP flit.
// One write port and one read port (a simple dual-port SRAM, so that arriving
// flits can be stored while the chiplet FSM reads -- the basis of the
// communication/computation overlap); the read has one cycle of latency.
// Port widths and latency are this design's choices.
module chiplet_buffer
  import hemlet_pkg::*;
#(
  parameter int BYTES = ACIM_BUF_BYTES,
  parameter int LINES = BYTES / FLIT_BYTES,
  parameter int AW    = $clog2(LINES)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [FLIT_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [FLIT_W-1:0] rdata
);
  logic [FLIT_W-1:0] mem [LINES];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
