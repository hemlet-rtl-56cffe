// nop_txrx: NoP transmitter and receiver of one inter-chiplet link port.
//
// The TX side takes a flit from the router and sends it over the package
// link as FLIT_BYTES/LINK_BYTES phits of LINK_BYTES payload bytes each; the
// flit header travels on sideband wires with the first phit. The RX side
// reassembles the phits and offers the flit to the router. LINK_BYTES sets the
// link bandwidth per 500 MHz cycle: 64 B = 32 GB/s (default, the paper's
// configuration for its headline results), 32 B = 16 GB/s, 16 B = 8 GB/s.
//
// The paper names TX/RX units on every chiplet but does not describe them;
// the physical layer (signalling, clocking) is not modelled -- this is the
// digital framing only. Handshakes: valid/ready on the flit side and on the
// link (phit_ready is the receiver's back-pressure wire).
//
// Timing: a flit occupies the link for FLIT_BYTES/LINK_BYTES cycles and
// flits follow back to back; RX presents a flit the cycle after its last phit.
module nop_txrx
  import hemlet_pkg::*;
#(
  parameter int LINK_BYTES = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // TX: router -> link
  input  logic                    tx_valid,
  input  flit_t                   tx_flit,
  output logic                    tx_ready,
  output logic                    phit_out_valid,
  output logic                    phit_out_first,
  output flit_hdr_t               phit_out_hdr,
  output logic [LINK_BYTES*8-1:0] phit_out_data,
  input  logic                    phit_out_ready,
  // RX: link -> router
  input  logic                    phit_in_valid,
  input  logic                    phit_in_first,
  input  flit_hdr_t               phit_in_hdr,
  input  logic [LINK_BYTES*8-1:0] phit_in_data,
  output logic                    phit_in_ready,
  output logic                    rx_valid,
  output flit_t                   rx_flit,
  input  logic                    rx_ready
);
  localparam int NPH = FLIT_BYTES / LINK_BYTES;
  localparam int CW  = (NPH > 1) ? $clog2(NPH) : 1;
  localparam int LW  = LINK_BYTES * 8;

  // ---------------- TX ----------------
  flit_t         txq;
  logic          tx_busy;
  logic [CW-1:0] tx_cnt;

  wire tx_last = tx_busy && phit_out_ready && (int'(tx_cnt) == NPH - 1);
  assign tx_ready       = !tx_busy || tx_last;
  assign phit_out_valid = tx_busy;
  assign phit_out_first = (tx_cnt == '0);
  assign phit_out_hdr   = txq.hdr;
  assign phit_out_data  = txq.payload[LW*tx_cnt +: LW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy <= 1'b0; tx_cnt <= '0; txq <= '0;
    end else if (!tx_busy || tx_last) begin
      // idle, or the last phit leaves now: take the next flit back to back
      tx_busy <= tx_valid;
      tx_cnt  <= '0;
      if (tx_valid) txq <= tx_flit;
    end else if (phit_out_ready) begin
      tx_cnt <= tx_cnt + 1'b1;
    end
  end

  // ---------------- RX ----------------
  flit_t         rxq;
  logic          rx_full;
  logic [CW-1:0] rx_cnt;

  assign phit_in_ready = !rx_full || rx_ready;   // slot frees this cycle
  assign rx_valid      = rx_full;
  assign rx_flit       = rxq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_full <= 1'b0; rx_cnt <= '0; rxq <= '0;
    end else begin
      if (rx_full && rx_ready) rx_full <= 1'b0;
      if (phit_in_valid && phit_in_ready) begin
        if (phit_in_first) rxq.hdr <= phit_in_hdr;
        rxq.payload[LW*rx_cnt +: LW] <= phit_in_data;
        if (int'(rx_cnt) == NPH - 1) begin rx_full <= 1'b1; rx_cnt <= '0; end
        else rx_cnt <= rx_cnt + 1'b1;
      end
    end
  end

  // A link transfer starts with its first phit.
  always_ff @(posedge clk)
    if (rst_n && phit_in_valid && phit_in_ready && rx_cnt == '0)
      assert (phit_in_first) else $error("nop_txrx: phit stream out of step");
endmodule
