// hemlet_top: the Hemlet package -- six ACIM chiplets, two DCIM chiplets and
// one IDP chiplet on a 3 x 3 network-on-package mesh.
//
// Placement (x, y):           y = 2 :  ACIM  ACIM  ACIM
//                             y = 1 :  DCIM  IDP   DCIM
//                             y = 0 :  ACIM  ACIM  ACIM
// Every chiplet has a 5-port NoP router (local, N, E, S, W) with XY routing;
// every mesh link between two neighbouring chiplets is a pair of NoP
// transceivers (TX/RX) carrying a flit as 64/LINK_BYTES phits, so with the
// default LINK_BYTES = 64 a link moves one 64-byte flit per cycle, 32 GB/s at
// 500 MHz. Border router ports are unconnected (XY routing never uses them).
//
// The host (and with it DRAM, which is outside the design) talks to the
// package through the IDP chiplet: host_in flits (weight programming, input
// writes, commands) enter the mesh at the IDP router's local port, and
// FT_DONE notices plus FT_WRITEs to IDP lines >= 0x8000 come out on host_out.
//
// The chiplet types, the NoP with router and TX/RX per chiplet, the mesh
// topology and the 3 x 3 layout with DCIM-IDP-DCIM in the middle row follow
// the paper's system figure; chiplet coordinates, port numbering and the host
// attachment are this design's choices. Counters from all chiplets are
// brought out for observation.
module hemlet_top
  import hemlet_pkg::*;
#(
  parameter int ACIM_PE_N   = ACIM_PES,        // PEs per ACIM chiplet
  parameter int ACIM_SA_N   = ACIM_N_SA,       // subarrays per ACIM PE
  parameter int ACIM_BUF    = ACIM_BUF_BYTES,
  parameter int DCIM_PE_N   = DCIM_PES,
  parameter int DCIM_BUF    = DCIM_BUF_BYTES,
  parameter int IDP_BANKS   = 4,
  parameter int IDP_BANK_B  = 256 * 1024,
  parameter int LINK_BYTES  = FLIT_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_in_valid,
  input  flit_t       host_in_flit,
  output logic        host_in_ready,
  output logic        host_out_valid,
  output flit_t       host_out_flit,
  input  logic        host_out_ready,
  // per-chiplet activity (index = y*3 + x)
  output logic [31:0] n_vmm_glp [9],
  output logic [31:0] n_vmm_lw  [9],
  output logic [31:0] n_overlap [9],
  output logic [31:0] n_qk      [9],
  output logic [31:0] n_pv      [9],
  output logic [31:0] n_merge   [9],
  output logic [31:0] n_simd,
  output logic [31:0] n_bank_stall
);
  localparam int N = 3;

  // router ports: 0 local, 1 N (y+1), 2 E (x+1), 3 S (y-1), 4 W (x-1)
  logic [4:0] r_in_valid  [9];
  logic [4:0] r_in_ready  [9];
  logic [4:0] r_out_valid [9];
  logic [4:0] r_out_ready [9];
  flit_t      r_in_flit   [9][5];
  flit_t      r_out_flit  [9][5];

  // link phits leaving node n through port d (d = 1..4)
  logic                    ph_valid [9][5];
  logic                    ph_first [9][5];
  flit_hdr_t               ph_hdr   [9][5];
  logic [LINK_BYTES*8-1:0] ph_data  [9][5];
  logic                    ph_ready [9][5];   // ready of the receiver for that phit

  for (genvar y = 0; y < N; y++) begin : g_y
    for (genvar x = 0; x < N; x++) begin : g_x
      localparam int ID = y * N + x;

      nop_router #(.X(COORD_W'(x)), .Y(COORD_W'(y))) u_router (
        .clk, .rst_n,
        .in_valid  (r_in_valid[ID]),  .in_flit  (r_in_flit[ID]),  .in_ready  (r_in_ready[ID]),
        .out_valid (r_out_valid[ID]), .out_flit (r_out_flit[ID]), .out_ready (r_out_ready[ID]));

      // ---- links ----
      for (genvar d = 1; d <= 4; d++) begin : g_port
        localparam int NX  = (d == 2) ? x + 1 : (d == 4) ? x - 1 : x;
        localparam int NY  = (d == 1) ? y + 1 : (d == 3) ? y - 1 : y;
        localparam int OPP = (d == 1) ? 3 : (d == 2) ? 4 : (d == 3) ? 1 : 2;
        if (NX >= 0 && NX < N && NY >= 0 && NY < N) begin : g_link
          localparam int NID = NY * N + NX;
          nop_txrx #(.LINK_BYTES(LINK_BYTES)) u_txrx (
            .clk, .rst_n,
            .tx_valid       (r_out_valid[ID][d]),
            .tx_flit        (r_out_flit[ID][d]),
            .tx_ready       (r_out_ready[ID][d]),
            .phit_out_valid (ph_valid[ID][d]),
            .phit_out_first (ph_first[ID][d]),
            .phit_out_hdr   (ph_hdr[ID][d]),
            .phit_out_data  (ph_data[ID][d]),
            .phit_out_ready (ph_ready[ID][d]),
            .phit_in_valid  (ph_valid[NID][OPP]),
            .phit_in_first  (ph_first[NID][OPP]),
            .phit_in_hdr    (ph_hdr[NID][OPP]),
            .phit_in_data   (ph_data[NID][OPP]),
            .phit_in_ready  (ph_ready[NID][OPP]),
            .rx_valid       (r_in_valid[ID][d]),
            .rx_flit        (r_in_flit[ID][d]),
            .rx_ready       (r_in_ready[ID][d]));
        end else begin : g_edge
          assign r_in_valid[ID][d]  = 1'b0;
          assign r_in_flit[ID][d]   = '0;
          assign r_out_ready[ID][d] = 1'b1;
          assign ph_valid[ID][d]    = 1'b0;
          assign ph_first[ID][d]    = 1'b0;
          assign ph_hdr[ID][d]      = '0;
          assign ph_data[ID][d]     = '0;
          assign ph_ready[ID][d]    = 1'b1;
        end
      end
      assign ph_valid[ID][0] = 1'b0;
      assign ph_first[ID][0] = 1'b0;
      assign ph_hdr[ID][0]   = '0;
      assign ph_data[ID][0]  = '0;
      assign ph_ready[ID][0] = 1'b1;

      // ---- chiplet ----
      if (y != 1) begin : g_acim
        acim_chiplet #(.X(COORD_W'(x)), .Y(COORD_W'(y)), .PES(ACIM_PE_N),
                       .N_SA(ACIM_SA_N), .BUF_BYTES(ACIM_BUF)) u_chiplet (
          .clk, .rst_n,
          .rin_valid  (r_out_valid[ID][0]), .rin_flit (r_out_flit[ID][0]),
          .rin_ready  (r_out_ready[ID][0]),
          .rout_valid (r_in_valid[ID][0]),  .rout_flit (r_in_flit[ID][0]),
          .rout_ready (r_in_ready[ID][0]),
          .n_vmm_glp  (n_vmm_glp[ID]), .n_vmm_lw (n_vmm_lw[ID]), .n_overlap (n_overlap[ID]));
        assign n_qk[ID] = '0;
        assign n_pv[ID] = '0;
        assign n_merge[ID] = '0;
      end else if (x != 1) begin : g_dcim
        dcim_chiplet #(.X(COORD_W'(x)), .Y(COORD_W'(y)), .PES(DCIM_PE_N),
                       .BUF_BYTES(DCIM_BUF)) u_chiplet (
          .clk, .rst_n,
          .rin_valid  (r_out_valid[ID][0]), .rin_flit (r_out_flit[ID][0]),
          .rin_ready  (r_out_ready[ID][0]),
          .rout_valid (r_in_valid[ID][0]),  .rout_flit (r_in_flit[ID][0]),
          .rout_ready (r_in_ready[ID][0]),
          .n_qk (n_qk[ID]), .n_pv (n_pv[ID]), .n_merge (n_merge[ID]));
        assign n_vmm_glp[ID] = '0;
        assign n_vmm_lw[ID]  = '0;
        assign n_overlap[ID] = '0;
      end else begin : g_idp
        idp_chiplet #(.X(COORD_W'(x)), .Y(COORD_W'(y)), .NB(IDP_BANKS),
                      .BANK_BYTES(IDP_BANK_B)) u_chiplet (
          .clk, .rst_n,
          .rin_valid  (r_out_valid[ID][0]), .rin_flit (r_out_flit[ID][0]),
          .rin_ready  (r_out_ready[ID][0]),
          .rout_valid (r_in_valid[ID][0]),  .rout_flit (r_in_flit[ID][0]),
          .rout_ready (r_in_ready[ID][0]),
          .host_in_valid, .host_in_flit, .host_in_ready,
          .host_out_valid, .host_out_flit, .host_out_ready,
          .n_simd, .n_bank_stall);
        assign n_vmm_glp[ID] = '0;
        assign n_vmm_lw[ID]  = '0;
        assign n_overlap[ID] = '0;
        assign n_qk[ID] = '0;
        assign n_pv[ID] = '0;
        assign n_merge[ID] = '0;
      end
    end
  end
endmodule
