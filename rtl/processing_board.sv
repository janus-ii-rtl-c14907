// processing_board: one Janus II Processing Board, 16 Simulation Processors
// and the Input-Output Processor.
//
// SPnn sits at x = nn mod 4, y = nn div 4 of a 4 x 4 array (SP00..SP03 form
// one x ring, SP00, SP04, SP08, SP12 one y ring). Each SP has point-to-point
// bidirectional links to its four nearest neighbours with toroidal wrap:
// port x+ of an SP feeds port x- of the next SP in x and so on. The z+ and z-
// ports of every SP, which join boards into a 4 x 4 x N machine, are brought
// out as board ports. Every SP also has its own host link from the IOP, which
// connects to the control computer through the host port (the PCIe side).
// A lattice sliced over all 16 SPs uses the ring SP00-01-02-03-07-06-05-04-
// 08-09-10-11-15-14-13-12 and back to SP00; the host sets each SP's up and
// down ports (C_CONFIG) to follow it.
//
// The 16 SPs, the 4 x 4 torus, one link per SP to the IOP and the z links are
// the paper's (Fig. 1); link widths and protocols are this design's.
module processing_board
  import sg_pkg::*;
#(
  parameter int unsigned L       = L_DEF,
  parameter int unsigned LZ      = LZ_DEF,
  parameter int unsigned NCOPIES = NCOPIES_DEF,
  parameter int unsigned NOUT    = NOUT_DEF,
  parameter int unsigned LINK_W  = LINK_W_DEF
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // host (control computer) side of the IOP
  input  logic                           host_valid,
  input  logic                           host_we,
  input  logic [4:0]                     host_target,
  input  logic [31:0]                    host_addr,
  input  logic [31:0]                    host_wdata,
  output logic                           host_ready,
  output logic                           host_rvalid,
  output logic [31:0]                    host_rdata,
  output logic [NSP-1:0]                 sp_busy,
  // z links of the 16 SPs: z+ and z- outputs and inputs
  output logic [NSP-1:0]                 zp_out_valid,
  output logic [NSP-1:0][LINK_W-1:0]     zp_out_data,
  input  logic [NSP-1:0]                 zp_out_ready,
  input  logic [NSP-1:0]                 zp_in_valid,
  input  logic [NSP-1:0][LINK_W-1:0]     zp_in_data,
  output logic [NSP-1:0]                 zp_in_ready,
  output logic [NSP-1:0]                 zm_out_valid,
  output logic [NSP-1:0][LINK_W-1:0]     zm_out_data,
  input  logic [NSP-1:0]                 zm_out_ready,
  input  logic [NSP-1:0]                 zm_in_valid,
  input  logic [NSP-1:0][LINK_W-1:0]     zm_in_data,
  output logic [NSP-1:0]                 zm_in_ready
);
  host_req_t [NSP-1:0] sp_req;
  host_rsp_t [NSP-1:0] sp_rsp;
  logic      [NSP-1:0] sp_ready;

  logic [NSP-1:0][NPORT-1:0]             ov, ordy, iv, irdy;
  logic [NSP-1:0][NPORT-1:0][LINK_W-1:0] od, id;

  iop #(.N(NSP)) u_iop (
    .clk, .rst_n, .host_valid, .host_we, .host_target, .host_addr, .host_wdata,
    .host_ready, .host_rvalid, .host_rdata,
    .sp_req, .sp_ready, .sp_rsp, .sp_busy
  );

  for (genvar i = 0; i < NSP; i++) begin : g_sp
    localparam int unsigned X  = i % GRID;
    localparam int unsigned Y  = i / GRID;
    localparam int unsigned XP = Y*GRID + (X+1) % GRID;
    localparam int unsigned XM = Y*GRID + (X+GRID-1) % GRID;
    localparam int unsigned YP = ((Y+1) % GRID)*GRID + X;
    localparam int unsigned YM = ((Y+GRID-1) % GRID)*GRID + X;

    sim_processor #(.L(L), .LZ(LZ), .NCOPIES(NCOPIES), .NOUT(NOUT), .LINK_W(LINK_W)) u_sp (
      .clk, .rst_n,
      .h_req(sp_req[i]), .h_ready(sp_ready[i]), .h_rsp(sp_rsp[i]), .busy(sp_busy[i]),
      .out_valid(ov[i]), .out_data(od[i]), .out_ready(ordy[i]),
      .in_valid(iv[i]), .in_data(id[i]), .in_ready(irdy[i])
    );

    // torus: what leaves on x+ arrives on the x- port of the +x neighbour
    assign iv[XP][P_XM] = ov[i][P_XP];  assign id[XP][P_XM] = od[i][P_XP];
    assign ordy[i][P_XP] = irdy[XP][P_XM];
    assign iv[XM][P_XP] = ov[i][P_XM];  assign id[XM][P_XP] = od[i][P_XM];
    assign ordy[i][P_XM] = irdy[XM][P_XP];
    assign iv[YP][P_YM] = ov[i][P_YP];  assign id[YP][P_YM] = od[i][P_YP];
    assign ordy[i][P_YP] = irdy[YP][P_YM];
    assign iv[YM][P_YP] = ov[i][P_YM];  assign id[YM][P_YP] = od[i][P_YM];
    assign ordy[i][P_YM] = irdy[YM][P_YP];

    // z links leave the board
    assign zp_out_valid[i] = ov[i][P_ZP];  assign zp_out_data[i] = od[i][P_ZP];
    assign ordy[i][P_ZP]   = zp_out_ready[i];
    assign iv[i][P_ZP]     = zp_in_valid[i]; assign id[i][P_ZP] = zp_in_data[i];
    assign zp_in_ready[i]  = irdy[i][P_ZP];
    assign zm_out_valid[i] = ov[i][P_ZM];  assign zm_out_data[i] = od[i][P_ZM];
    assign ordy[i][P_ZM]   = zm_out_ready[i];
    assign iv[i][P_ZM]     = zm_in_valid[i]; assign id[i][P_ZM] = zm_in_data[i];
    assign zm_in_ready[i]  = irdy[i][P_ZM];
  end
endmodule
