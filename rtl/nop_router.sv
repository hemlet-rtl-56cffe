// nop_router: five-port router of the 2D-mesh network-on-package.
//
// Every chiplet has one router (paper Fig. 3); the mesh topology follows the
// paper's Simba-style configuration. Ports: 0 local (chiplet), 1 north (y+1),
// 2 east (x+1), 3 south (y-1), 4 west (x-1). Each flit carries its own header,
// so packets are single flits and no wormhole state is needed. Routing is
// dimension-ordered XY (first along x, then y), which is deadlock-free on a
// mesh. Each input has a two-entry FIFO; each output grants one of the
// requesting inputs per cycle in round-robin order. A flit moves when the
// output's ready is high; an input FIFO accepts a flit whenever it has room.
// The router micro-architecture (XY routing, FIFO depth, round-robin) is this
// design's choice: the paper names the router but does not describe it.
//
// Timing: a flit written into an input FIFO can leave on the next cycle
// (one cycle per hop plus any link serialisation).
module nop_router
  import hemlet_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  in_valid,
  input  flit_t       in_flit [5],
  output logic [4:0]  in_ready,
  output logic [4:0]  out_valid,
  output flit_t       out_flit [5],
  input  logic [4:0]  out_ready
);
  localparam int P = 5;

  flit_t      fifo [P][2];
  logic [1:0] cnt  [P];
  logic [2:0] want [P];
  logic [P-1:0] req [P];     // req[o][i]
  logic [P-1:0] gnt [P];
  logic [2:0]   rr  [P];
  logic [P-1:0] pop;

  function automatic logic [2:0] route(input flit_hdr_t h);
    if (h.dst_x > X)      return 3'd2;
    else if (h.dst_x < X) return 3'd4;
    else if (h.dst_y > Y) return 3'd1;
    else if (h.dst_y < Y) return 3'd3;
    else                  return 3'd0;
  endfunction

  always_comb begin
    for (int i = 0; i < P; i++) begin
      in_ready[i] = (cnt[i] != 2'd2);
      want[i]     = route(fifo[i][0].hdr);
    end
    for (int o = 0; o < P; o++)
      for (int i = 0; i < P; i++)
        req[o][i] = (cnt[i] != 0) && (want[i] == 3'(o));
    for (int o = 0; o < P; o++) begin
      gnt[o] = '0;
      for (int k = 0; k < P; k++) begin
        int i;
        i = (int'(rr[o]) + k) % P;
        if (req[o][i] && gnt[o] == '0) gnt[o][i] = 1'b1;
      end
      out_valid[o] = |gnt[o];
      out_flit[o]  = '0;
      for (int i = 0; i < P; i++) if (gnt[o][i]) out_flit[o] = fifo[i][0];
    end
  end

  // FIFO heads leave when their output accepts (kept apart from the grant
  // logic so that out_flit does not depend on out_ready)
  always_comb begin
    pop = '0;
    for (int o = 0; o < P; o++) if (out_ready[o]) pop |= gnt[o];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < P; i++) begin cnt[i] <= '0; rr[i] <= '0; end
    end else begin
      for (int i = 0; i < P; i++) begin
        logic push;
        logic [1:0] c;
        push = in_valid[i] && in_ready[i];
        c = cnt[i];
        if (pop[i]) begin
          fifo[i][0] <= fifo[i][1];
          c = c - 1'b1;
        end
        if (push) begin
          if (c == 0) fifo[i][0] <= in_flit[i];
          else        fifo[i][1] <= in_flit[i];
          c = c + 1'b1;
        end
        cnt[i] <= c;
      end
      for (int o = 0; o < P; o++)
        if (out_valid[o] && out_ready[o])
          for (int i = 0; i < P; i++)
            if (gnt[o][i]) rr[o] <= 3'((i + 1) % P);
    end
  end

  // A flit leaves on the local port only at its destination.
  always_ff @(posedge clk)
    if (rst_n && out_valid[0])
      assert (out_flit[0].hdr.dst_x == X && out_flit[0].hdr.dst_y == Y)
        else $error("nop_router (%0d,%0d): misrouted flit", X, Y);
endmodule
