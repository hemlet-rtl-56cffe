// tb_nop_txrx: two TX/RX ports connected back to back at 16 B per cycle
// (8 GB/s, 4 phits per flit) and one at 64 B (1 phit). Random flits are sent
// with random receive back-pressure; each must arrive intact and in order,
// and at full rate the 16 B link must take 4 cycles per flit.
module tb_nop_txrx;
  import hemlet_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  int checks = 0, failures = 0;

  // instance A (16 B link) TX -> instance B RX
  logic a_txv, a_txr, pv, pf, pr, b_rxv, b_rxr;
  flit_t a_txf, b_rxf; flit_hdr_t ph; logic [127:0] pd;
  nop_txrx #(.LINK_BYTES(16)) ua (.clk, .rst_n, .tx_valid(a_txv), .tx_flit(a_txf), .tx_ready(a_txr),
    .phit_out_valid(pv), .phit_out_first(pf), .phit_out_hdr(ph), .phit_out_data(pd), .phit_out_ready(pr),
    .phit_in_valid(1'b0), .phit_in_first(1'b0), .phit_in_hdr('0), .phit_in_data('0), .phit_in_ready(),
    .rx_valid(), .rx_flit(), .rx_ready(1'b1));
  nop_txrx #(.LINK_BYTES(16)) ub (.clk, .rst_n, .tx_valid(1'b0), .tx_flit('0), .tx_ready(),
    .phit_out_valid(), .phit_out_first(), .phit_out_hdr(), .phit_out_data(), .phit_out_ready(1'b1),
    .phit_in_valid(pv), .phit_in_first(pf), .phit_in_hdr(ph), .phit_in_data(pd), .phit_in_ready(pr),
    .rx_valid(b_rxv), .rx_flit(b_rxf), .rx_ready(b_rxr));

  flit_t q [$];
  logic acc_q = 0;
  always @(posedge clk) acc_q <= a_txv && a_txr;
  int nrecv = 0, t_first = 0, t_last = 0, cyc = 0;
  bit full_rate = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) b_rxr <= (nrecv >= 15 && nrecv < 70) ? 1'b1 : 1'($urandom);
  always @(posedge clk) if (rst_n && b_rxv && b_rxr) begin
    flit_t e;
    e = q.pop_front();
    checks++;
    if (b_rxf != e) begin failures++; $display("FAIL flit %0d", nrecv); end
    if (nrecv == 20) t_first = cyc;
    if (nrecv == 60) t_last = cyc;
    nrecv++;
  end

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    a_txv = 0; a_txf = '0; b_rxr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    a_txf = {$urandom, $urandom, {16{$urandom}}}; a_txv = 1; q.push_back(a_txf);
    for (int n = 0; n < 100; ) begin
      @(negedge clk);
      if (acc_q) begin
        n++;
        if (n < 100) begin a_txf = {$urandom, $urandom, {16{$urandom}}}; q.push_back(a_txf); end
        else a_txv = 0;
      end
    end
    b_rxr = 1;
    repeat (20) @(posedge clk);
    checks++; if (nrecv != 100) begin failures++; $display("FAIL received %0d", nrecv); end
    $display("cycles for 40 flits at full rate: %0d", t_last - t_first);
    checks++; if ((t_last - t_first) != 40 * 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
