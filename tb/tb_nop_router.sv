// tb_nop_router: a router at (1,1) receives random flits on all five inputs
// with random destinations in a 3x3 mesh while outputs apply random
// back-pressure. Every flit must leave exactly once, on the XY-routing port
// computed here, with its contents intact.
module tb_nop_router;
  import hemlet_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic [4:0] in_valid = 0, in_ready, out_valid, out_ready = 0;
  flit_t in_flit [5]; flit_t out_flit [5];
  int checks = 0, failures = 0;
  int sent = 0, recv = 0;
  int exp_port [int];
  nop_router #(.X(4'd1), .Y(4'd1)) dut (.*);

  function automatic int xy(int x, int y);
    if (x > 1) return 2; if (x < 1) return 4; if (y > 1) return 1; if (y < 1) return 3; return 0;
  endfunction

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      int id;
      id = int'(out_flit[o].payload[31:0]);
      checks++;
      if (!exp_port.exists(id) || exp_port[id] != o) begin failures++; $display("FAIL flit %0d on port %0d", id, o); end
      else exp_port.delete(id);
      recv++;
    end
    for (int i = 0; i < 5; i++) if (in_valid[i] && in_ready[i]) sent++;
  end

  // Driver: one process; a flit stays on an input until it is accepted.
  initial begin
    int nid;
    nid = 1;
    for (int i = 0; i < 5; i++) in_flit[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (nid <= 1500 || in_valid != 0) begin
      @(negedge clk);
      out_ready = 5'($urandom) | 5'b00001;
      for (int i = 0; i < 5; i++) begin
        if (in_valid[i] && acc_q[i]) in_valid[i] = 0;
        if (!in_valid[i] && nid <= 1500 && ($urandom % 2) == 1) begin
          int dx, dy;
          dx = int'($urandom % 3); dy = int'($urandom % 3);
          in_flit[i] = '0;
          in_flit[i].hdr.dst_x = 4'(dx); in_flit[i].hdr.dst_y = 4'(dy);
          in_flit[i].payload[31:0] = 32'(nid);
          exp_port[nid] = xy(dx, dy);
          nid++;
          in_valid[i] = 1;
        end
      end
    end
    out_ready = '1;
    repeat (50) @(posedge clk);
    checks++; if (exp_port.num() != 0 || recv != sent) begin failures++; $display("FAIL lost %0d sent %0d recv %0d", exp_port.num(), sent, recv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [4:0] acc_q = 0;
  always @(posedge clk) acc_q <= in_valid & in_ready;
endmodule
