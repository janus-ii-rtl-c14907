// halo_link: exchanges the boundary spin planes of a z-sliced sub-lattice with
// the two neighbouring SPs.
//
// When a lattice is split over several SPs along z, the sites in an SP's
// first and last planes have neighbours held by the SPs below and above. Only
// spins cross (one bit per face site, as in the paper's balance estimate).
// Before every pass the SP hands its plane 0 (for the SP below) and plane LZ-1
// (for the SP above) to start_tx; they are cut into NCH = L*L/LINK_W words and
// sent on the ports chosen by dn_port and up_port. Words arriving on up_port
// fill ghost_up (the upper neighbour's plane 0), words on dn_port fill ghost_dn
// (the lower neighbour's last plane). A receive buffer that is full holds its
// ready low until rx_clear, given when the pass that used it has ended, so a
// faster neighbour cannot overwrite planes still in use. Other ports are idle.
//
// Link ports: valid/ready, one LINK_W-bit word per clock when both are high;
// valid and data hold until accepted. The physical 8-lane serial links are
// not modelled: LINK_W stands for the lanes times the bits each lane moves in
// one core clock. Which ports are up and down is host configuration.
module halo_link #(
  parameter int unsigned L      = sg_pkg::L_DEF,
  parameter int unsigned LINK_W = sg_pkg::LINK_W_DEF
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [2:0]                          up_port,
  input  logic [2:0]                          dn_port,
  input  logic                                start_tx,
  input  logic [L*L-1:0]                      tx_up_plane,
  input  logic [L*L-1:0]                      tx_dn_plane,
  output logic                                tx_done,
  output logic [L*L-1:0]                      ghost_up,
  output logic [L*L-1:0]                      ghost_dn,
  output logic                                rx_full,
  input  logic                                rx_clear,
  output logic [sg_pkg::NPORT-1:0]            out_valid,
  output logic [sg_pkg::NPORT-1:0][LINK_W-1:0] out_data,
  input  logic [sg_pkg::NPORT-1:0]            out_ready,
  input  logic [sg_pkg::NPORT-1:0]            in_valid,
  input  logic [sg_pkg::NPORT-1:0][LINK_W-1:0] in_data,
  output logic [sg_pkg::NPORT-1:0]            in_ready
);
  localparam int unsigned NCH = L*L / LINK_W;
  localparam int unsigned CW  = $clog2(NCH+1);

  logic [L*L-1:0] txb_up, txb_dn;
  logic [CW-1:0]  tcnt_up, tcnt_dn, rcnt_up, rcnt_dn;
  logic           tbusy_up, tbusy_dn, full_up, full_dn;
  logic           tfire_up, tfire_dn, rfire_up, rfire_dn;

  always_comb begin
    out_valid = '0;
    out_data  = '0;
    in_ready  = '0;
    out_valid[up_port] = tbusy_up;
    out_data[up_port]  = txb_up[tcnt_up*LINK_W +: LINK_W];
    out_valid[dn_port] = tbusy_dn;
    out_data[dn_port]  = txb_dn[tcnt_dn*LINK_W +: LINK_W];
    in_ready[up_port]  = !full_up;
    in_ready[dn_port]  = !full_dn;
    tfire_up = tbusy_up && out_ready[up_port];
    tfire_dn = tbusy_dn && out_ready[dn_port];
    rfire_up = !full_up && in_valid[up_port];
    rfire_dn = !full_dn && in_valid[dn_port];
    tx_done  = !tbusy_up && !tbusy_dn;
    rx_full  = full_up && full_dn;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tbusy_up <= 1'b0; tbusy_dn <= 1'b0;
      full_up  <= 1'b0; full_dn  <= 1'b0;
      tcnt_up  <= '0;   tcnt_dn  <= '0;
      rcnt_up  <= '0;   rcnt_dn  <= '0;
      txb_up   <= '0;   txb_dn   <= '0;
      ghost_up <= '0;   ghost_dn <= '0;
    end else begin
      if (start_tx) begin
        txb_up   <= tx_up_plane;  txb_dn   <= tx_dn_plane;
        tbusy_up <= 1'b1;         tbusy_dn <= 1'b1;
        tcnt_up  <= '0;           tcnt_dn  <= '0;
      end else begin
        if (tfire_up) begin
          tcnt_up <= tcnt_up + 1'b1;
          if (tcnt_up == CW'(NCH-1)) tbusy_up <= 1'b0;
        end
        if (tfire_dn) begin
          tcnt_dn <= tcnt_dn + 1'b1;
          if (tcnt_dn == CW'(NCH-1)) tbusy_dn <= 1'b0;
        end
      end
      if (rx_clear) begin
        full_up <= 1'b0; full_dn <= 1'b0;
        rcnt_up <= '0;   rcnt_dn <= '0;
      end else begin
        if (rfire_up) begin
          ghost_up[rcnt_up*LINK_W +: LINK_W] <= in_data[up_port];
          rcnt_up <= rcnt_up + 1'b1;
          if (rcnt_up == CW'(NCH-1)) full_up <= 1'b1;
        end
        if (rfire_dn) begin
          ghost_dn[rcnt_dn*LINK_W +: LINK_W] <= in_data[dn_port];
          rcnt_dn <= rcnt_dn + 1'b1;
          if (rcnt_dn == CW'(NCH-1)) full_dn <= 1'b1;
        end
      end
    end
  end

  // a word offered on a link stays offered, unchanged, until it is taken
  for (genvar p = 0; p < sg_pkg::NPORT; p++) begin : g_hs
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[p] && !out_ready[p] && !start_tx |=> out_valid[p] && $stable(out_data[p]))
      else $error("halo_link: port %0d dropped or changed an unaccepted word", p);
  end

  initial begin
    assert (L*L % LINK_W == 0) else $error("halo_link: LINK_W must divide L*L");
    assert (NCH >= 1) else $error("halo_link: LINK_W larger than a plane");
  end
endmodule
