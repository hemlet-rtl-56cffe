// tb_chiplet_buffer: random writes and reads of the 64 KB buffer against a
// testbench copy; checks one-cycle read latency and write/read in the same
// cycle to different lines.
module tb_chiplet_buffer;
  import hemlet_pkg::*;
  localparam int LINES = 1024;
  logic clk = 0; always #1 clk = ~clk;
  logic we = 0, re = 0; logic [9:0] waddr = 0, raddr = 0; logic [511:0] wdata = 0, rdata;
  logic [511:0] model [LINES];
  bit written [LINES];
  int checks = 0, failures = 0;
  chiplet_buffer dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [9:0] ra;
      @(negedge clk);
      we = 1'($urandom); waddr = 10'($urandom); wdata = {16{$urandom}};
      ra = 10'($urandom % 64); re = written[ra] && (ra != waddr || !we); raddr = ra;
      @(posedge clk); #0;
      if (we) begin model[waddr] = wdata; written[waddr] = 1; end
      @(negedge clk);
      if (re) begin checks++; if (rdata != model[raddr]) failures++; end
      we = 0; re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
