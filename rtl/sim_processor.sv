// sim_processor: one Simulation Processor (SP), the FPGA that runs the
// Monte Carlo sweeps of the Ising spin glass.
//
// Contents: spin memory and coupling memory (4 bits per site, NCOPIES
// lattice copies of L x L x LZ sites), NP = L*L/2 spin-flip engines, NP/NOUT
// Parisi-Rapuano wheels giving one random number per engine per clock, one
// acceptance table per copy, a sweep sequencer, a host port (to the IOP) and
// six link ports (x+, x-, y+, y-, z+, z-).
//
// A pass updates one checkerboard colour of one copy, plane by plane: planes
// are read in the order LZ-1, 0, 1, ..., LZ-1, 0 into a three-plane window,
// and from the third read on the engines update plane z while plane z+1
// arrives; the new plane is written back at once. The other colour is not
// touched, so the window never holds stale values. A pass of LZ planes takes
// exactly LZ+3 clocks, i.e. NP spins per clock in steady state. A sweep is a
// colour-0 pass and a colour-1 pass. An energy pass is a colour-0 pass that
// writes nothing and adds up the unsatisfied bonds of all colour-0 sites:
// every bond has exactly one colour-0 end, so this is the copy's number of
// unsatisfied bonds U, and E = 2U - 3*L*L*LZ.
//
// Modes (C_CONFIG[0]): standalone, each copy periodic in z inside the SP;
// sliced, the copies are z-slices of a lattice spread over a ring of SPs.
// In sliced mode every pass starts with a halo exchange (halo_link): plane 0
// and plane LZ-1 go to the lower and upper neighbours, their facing planes
// come back and replace planes -1 and LZ of the window, and the +z couplings
// under plane 0 come from the host-written R_JZG region. The SP stalls until
// both neighbour planes are in (counted in C_STALLS).
//
// Commands (sg_pkg): CMD_SEED fills each wheel w with 61 words of the xorshift32
// stream started at seed ^ (w*GOLDEN) (61 clocks); CMD_RUN runs C_NSWEEP
// sweeps then one energy pass for each copy first..last in turn; CMD_MEASURE
// runs only the energy passes. Energies are read at C_ENERGY+copy.
//
// Host port: one request per clock when h_ready; every read gets one
// response on the next clock. Memories, tables and the random wheels are
// only reachable while the SP is idle; control registers always are.
//
// From the paper: engines that each update one spin per clock, ~2000 of them,
// the xor / bit-sum / table / compare engine, Parisi-Rapuano random numbers,
// 4 bits per site in on-chip memory, 30 copies of 64^3, links to the
// neighbours, slicing the lattice over SPs with face data moved on the links,
// energies collected by the host for parallel tempering. This design's own
// choices: the plane-per-clock organisation, the pass order, the command and
// address map, the seeding, the halo protocol and every width not listed.
module sim_processor
  import sg_pkg::*;
#(
  parameter int unsigned L       = L_DEF,
  parameter int unsigned LZ      = LZ_DEF,
  parameter int unsigned NCOPIES = NCOPIES_DEF,
  parameter int unsigned NOUT    = NOUT_DEF,
  parameter int unsigned LINK_W  = LINK_W_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  host_req_t                     h_req,
  output logic                          h_ready,
  output host_rsp_t                     h_rsp,
  output logic                          busy,
  output logic [NPORT-1:0]              out_valid,
  output logic [NPORT-1:0][LINK_W-1:0]  out_data,
  input  logic [NPORT-1:0]              out_ready,
  input  logic [NPORT-1:0]              in_valid,
  input  logic [NPORT-1:0][LINK_W-1:0]  in_data,
  output logic [NPORT-1:0]              in_ready
);
  localparam int unsigned NS     = L*L;
  localparam int unsigned NP     = NS/2;
  localparam int unsigned WPP    = NS/32;
  localparam int unsigned NWHEEL = NP/NOUT;
  localparam int unsigned DEPTH  = NCOPIES*LZ;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned CAW    = $clog2(NCOPIES);
  localparam int unsigned CPW    = $clog2(NCOPIES+1);
  localparam int unsigned TW     = $clog2(LZ+4);
  localparam int unsigned SW     = $clog2(NS*3+1);
  localparam int unsigned WW     = $clog2(3*WPP+1);

  typedef enum logic [2:0] {
    S_IDLE, S_SEED, S_HALO0, S_HALO1, S_HALO2, S_HWAIT, S_PASS
  } state_e;

  state_e          state;
  logic [TW-1:0]   t;
  logic [5:0]      seed_cnt;
  logic [CPW-1:0]  cur_copy, last_copy;
  logic [31:0]     sweep_cnt, nsweep, seed_reg, stalls, passes;
  logic            colour, measure, meas_only;
  logic            cfg_sliced;
  logic [2:0]      up_port, dn_port;
  logic [31:0]     energy [NCOPIES];
  logic [31:0]     e_acc;

  // ---------------- host request decode -----------------------------------
  region_e     h_region;
  logic [27:0] h_off;
  logic        h_fire, h_wr, h_rd;
  assign h_region = region_e'(h_req.addr[31:28]);
  assign h_off    = h_req.addr[27:0];
  assign h_ready  = (h_region == R_CTRL) || (state == S_IDLE);
  assign h_fire   = h_req.valid && h_ready;
  assign h_wr     = h_fire && h_req.we;
  assign h_rd     = h_fire && !h_req.we;
  assign busy     = (state != S_IDLE);

  // ---------------- memories ----------------------------------------------
  logic             sp_rd_en, cp_rd_en, jg_rd_en, sp_wr_en;
  logic [AW-1:0]    sp_rd_addr, cp_rd_addr, sp_wr_addr;
  logic [NS-1:0]    sp_rd_data, sp_wr_data, jg_rd_data;
  logic [3*NS-1:0]  cp_rd_data;
  logic [CAW-1:0]   jg_rd_addr;

  logic             sp_ww, cp_ww, jg_ww;
  logic [AW-1:0]    sp_ww_addr, cp_ww_addr;
  logic [CAW-1:0]   jg_ww_addr;
  logic [WW-1:0]    sp_ww_word, cp_ww_word, jg_ww_word;

  plane_mem #(.DEPTH(DEPTH), .WPP(WPP)) u_spin (
    .clk, .rd_en(sp_rd_en), .rd_addr(sp_rd_addr), .rd_data(sp_rd_data),
    .wr_en(sp_wr_en), .wr_addr(sp_wr_addr), .wr_data(sp_wr_data),
    .ww_en(sp_ww), .ww_addr(sp_ww_addr), .ww_word(sp_ww_word[$clog2(WPP+1)-1:0]),
    .ww_data(h_req.wdata)
  );
  plane_mem #(.DEPTH(DEPTH), .WPP(3*WPP)) u_coup (
    .clk, .rd_en(cp_rd_en), .rd_addr(cp_rd_addr), .rd_data(cp_rd_data),
    .wr_en(1'b0), .wr_addr('0), .wr_data('0),
    .ww_en(cp_ww), .ww_addr(cp_ww_addr), .ww_word(cp_ww_word), .ww_data(h_req.wdata)
  );
  plane_mem #(.DEPTH(NCOPIES), .WPP(WPP)) u_jzg (
    .clk, .rd_en(jg_rd_en), .rd_addr(jg_rd_addr), .rd_data(jg_rd_data),
    .wr_en(1'b0), .wr_addr('0), .wr_data('0),
    .ww_en(jg_ww), .ww_addr(jg_ww_addr), .ww_word(jg_ww_word[$clog2(WPP+1)-1:0]),
    .ww_data(h_req.wdata)
  );

  // host word writes (only accepted while idle, see h_ready)
  always_comb begin
    sp_ww      = h_wr && h_region == R_SPIN && h_off < 28'(DEPTH*WPP);
    sp_ww_addr = AW'(h_off / WPP);
    sp_ww_word = WW'(h_off % WPP);
    cp_ww      = h_wr && h_region == R_COUP && h_off < 28'(DEPTH*3*WPP);
    cp_ww_addr = AW'(h_off / (3*WPP));
    cp_ww_word = WW'(h_off % (3*WPP));
    jg_ww      = h_wr && h_region == R_JZG && h_off < 28'(NCOPIES*WPP);
    jg_ww_addr = CAW'(h_off / WPP);
    jg_ww_word = WW'(h_off % WPP);
  end

  // ---------------- acceptance tables ---------------------------------------
  logic [NLUT-1:0][31:0] lut_sel;
  logic [31:0]           lut_rdata;
  prob_lut #(.NCOPIES(NCOPIES)) u_lut (
    .clk, .rst_n,
    .we(h_wr && h_region == R_LUT), .wcopy(CPW'(h_off[27:3])), .widx(h_off[2:0]),
    .wdata(h_req.wdata), .sel(cur_copy),
    .table_o(lut_sel), .rcopy(CPW'(h_off[27:3])), .ridx(h_off[2:0]), .rdata(lut_rdata)
  );

  // ---------------- random wheels ---------------------------------------------
  logic [NP*32-1:0]  rnd;
  logic [31:0]       seed_st [NWHEEL];
  logic [31:0]       seed_nx [NWHEEL];
  logic              wheel_adv, wheel_load;

  for (genvar w = 0; w < NWHEEL; w++) begin : g_wheel
    assign seed_nx[w] = xorshift32(seed_st[w]);
    pr_wheel #(.NOUT(NOUT)) u_wheel (
      .clk, .rst_n, .adv(wheel_adv), .load(wheel_load), .load_data(seed_nx[w]),
      .rnd(rnd[w*NOUT*32 +: NOUT*32])
    );
  end

  // ---------------- halo exchange -----------------------------------------------
  logic           start_tx, tx_done, rx_full, rx_clear;
  logic [NS-1:0]  ghost_up, ghost_dn, halo_p0;
  halo_link #(.L(L), .LINK_W(LINK_W)) u_halo (
    .clk, .rst_n, .up_port, .dn_port,
    .start_tx, .tx_up_plane(sp_rd_data), .tx_dn_plane(halo_p0), .tx_done,
    .ghost_up, .ghost_dn, .rx_full, .rx_clear,
    .out_valid, .out_data, .out_ready, .in_valid, .in_data, .in_ready
  );

  // ---------------- plane window and engines ------------------------------------
  logic [NS-1:0]  prev_s, cur_s, prev_jz, in_s, nx_s, s_new;
  logic [3*NS-1:0] cur_j;
  logic [SW-1:0]  nu_sum;
  logic [TW-1:0]  zl;           // plane being updated = t - 3
  logic           arrive, compute, pass_end;
  logic [AW-1:0]  base;

  assign base     = AW'(cur_copy) * AW'(LZ);
  assign arrive   = (state == S_PASS) && (t >= 1);
  assign compute  = (state == S_PASS) && (t >= 3);
  assign pass_end = (state == S_PASS) && (t == TW'(LZ+2));
  assign zl       = t - TW'(3);
  assign in_s     = (t == 1 && cfg_sliced) ? ghost_dn : sp_rd_data;
  assign nx_s     = (t == TW'(LZ+2) && cfg_sliced) ? ghost_up : sp_rd_data;

  engine_array #(.L(L)) u_eng (
    .s_prev(prev_s), .s_cur(cur_s), .s_next(nx_s),
    .jx(cur_j[0 +: NS]), .jy(cur_j[NS +: NS]), .jz(cur_j[2*NS +: NS]), .jz_prev(prev_jz),
    .colour, .zpar(zl[0]), .rnd, .lut(lut_sel), .s_new, .nu_sum
  );

  assign wheel_adv  = compute && !measure;
  assign wheel_load = (state == S_SEED);
  assign sp_wr_en   = compute && !measure;
  assign sp_wr_addr = base + AW'(zl);
  assign sp_wr_data = s_new;
  assign start_tx   = (state == S_HALO2);
  assign rx_clear   = pass_end && cfg_sliced;

  // read port use: pass order LZ-1, 0..LZ-1, 0; halo planes 0 and LZ-1; host
  always_comb begin
    logic [AW-1:0] pl;
    pl = '0;
    if (t == 0)                 pl = AW'(LZ-1);
    else if (t == TW'(LZ+1))    pl = '0;
    else                        pl = AW'(t - 1);
    sp_rd_en   = 1'b0; cp_rd_en = 1'b0; jg_rd_en = 1'b0;
    sp_rd_addr = base + pl;
    cp_rd_addr = base + pl;
    jg_rd_addr = CAW'(cur_copy);
    if (state == S_PASS && t <= TW'(LZ+1)) begin
      sp_rd_en = 1'b1; cp_rd_en = 1'b1; jg_rd_en = (t == 0);
    end else if (state == S_HALO0) begin
      sp_rd_en = 1'b1; sp_rd_addr = base;
    end else if (state == S_HALO1) begin
      sp_rd_en = 1'b1; sp_rd_addr = base + AW'(LZ-1);
    end else if (state == S_IDLE && h_rd) begin
      sp_rd_en   = (h_region == R_SPIN);
      cp_rd_en   = (h_region == R_COUP);
      jg_rd_en   = (h_region == R_JZG);
      sp_rd_addr = sp_ww_addr;
      cp_rd_addr = cp_ww_addr;
      jg_rd_addr = jg_ww_addr;
    end
  end

  // ---------------- sequencer -----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t <= '0; seed_cnt <= '0;
      cur_copy <= '0; last_copy <= '0; sweep_cnt <= '0;
      nsweep <= 32'd1; seed_reg <= 32'd1; stalls <= '0; passes <= '0;
      colour <= 1'b0; measure <= 1'b0; meas_only <= 1'b0;
      cfg_sliced <= 1'b0; up_port <= 3'(P_ZP); dn_port <= 3'(P_ZM);
      e_acc <= '0; halo_p0 <= '0;
      prev_s <= '0; cur_s <= '0; prev_jz <= '0; cur_j <= '0;
      for (int c = 0; c < NCOPIES; c++) energy[c] <= '0;
      for (int w = 0; w < NWHEEL; w++) seed_st[w] <= 32'd1;
    end else begin
      logic go_pass;          // start the pass set up below
      go_pass = 1'b0;

      // control register writes
      if (h_wr && h_region == R_CTRL) begin
        case (h_off)
          C_NSWEEP: nsweep   <= h_req.wdata;
          C_SEED:   seed_reg <= h_req.wdata;
          C_CONFIG: if (state == S_IDLE) begin
                      cfg_sliced <= h_req.wdata[0];
                      up_port    <= h_req.wdata[6:4];
                      dn_port    <= h_req.wdata[10:8];
                    end
          C_CMD:    if (state == S_IDLE) begin
                      case (cmd_e'(h_req.wdata[3:0]))
                        CMD_SEED: begin
                          for (int w = 0; w < NWHEEL; w++) begin
                            logic [31:0] s0;
                            s0 = seed_reg ^ (32'(w) * GOLDEN);
                            seed_st[w] <= (s0 == '0) ? 32'd1 : s0;
                          end
                          seed_cnt <= '0;
                          state    <= S_SEED;
                        end
                        CMD_RUN, CMD_MEASURE: begin
                          if (h_req.wdata[23:16] < 8'(NCOPIES) &&
                              h_req.wdata[15:8] <= h_req.wdata[23:16]) begin
                            cur_copy  <= CPW'(h_req.wdata[15:8]);
                            last_copy <= CPW'(h_req.wdata[23:16]);
                            meas_only <= (cmd_e'(h_req.wdata[3:0]) == CMD_MEASURE) ||
                                         (nsweep == 0);
                            measure   <= (cmd_e'(h_req.wdata[3:0]) == CMD_MEASURE) ||
                                         (nsweep == 0);
                            colour    <= 1'b0;
                            sweep_cnt <= '0;
                            go_pass   = 1'b1;
                          end
                        end
                        default: ;
                      endcase
                    end
          default: ;
        endcase
      end

      case (state)
        S_SEED: begin
          for (int w = 0; w < NWHEEL; w++) seed_st[w] <= seed_nx[w];
          seed_cnt <= seed_cnt + 1'b1;
          if (seed_cnt == 6'd60) state <= S_IDLE;
        end
        S_HALO0: state <= S_HALO1;
        S_HALO1: begin halo_p0 <= sp_rd_data; state <= S_HALO2; end
        S_HALO2: state <= S_HWAIT;
        S_HWAIT: begin
          if (tx_done && rx_full) begin state <= S_PASS; t <= '0; end
          else stalls <= stalls + 1'b1;
        end
        S_PASS: begin
          t <= t + 1'b1;
          if (arrive) begin
            prev_s  <= cur_s;
            prev_jz <= cur_j[2*NS +: NS];
            cur_s   <= in_s;
            cur_j   <= cp_rd_data;
            if (t == 1 && cfg_sliced) cur_j[2*NS +: NS] <= jg_rd_data;
          end
          if (t == 0) e_acc <= '0;
          else if (compute && measure) e_acc <= e_acc + 32'(nu_sum);
          if (pass_end) begin
            passes <= passes + 1'b1;
            if (measure) begin
              energy[cur_copy[CAW-1:0]] <= e_acc + 32'(nu_sum);
              if (cur_copy == last_copy) state <= S_IDLE;
              else begin
                cur_copy  <= cur_copy + 1'b1;
                measure   <= meas_only;
                colour    <= 1'b0;
                sweep_cnt <= '0;
                go_pass   = 1'b1;
              end
            end else if (colour == 1'b0) begin
              colour  <= 1'b1;
              go_pass = 1'b1;
            end else begin
              colour    <= 1'b0;
              sweep_cnt <= sweep_cnt + 1'b1;
              if (sweep_cnt + 1 >= nsweep) measure <= 1'b1;
              go_pass = 1'b1;
            end
          end
        end
        default: ;
      endcase

      if (go_pass) begin
        t     <= '0;
        state <= cfg_sliced ? S_HALO0 : S_PASS;
      end
    end
  end

  // ---------------- host read responses --------------------------------------------
  logic          rd_q;
  region_e       rreg_q;
  logic [WW-1:0] rword_q;
  logic [31:0]   rimm_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= 1'b0; rreg_q <= R_CTRL; rword_q <= '0; rimm_q <= '0;
    end else begin
      rd_q   <= h_rd;
      rreg_q <= h_region;
      case (h_region)
        R_SPIN:  rword_q <= sp_ww_word;
        R_COUP:  rword_q <= cp_ww_word;
        default: rword_q <= jg_ww_word;
      endcase
      rimm_q <= '0;
      if (h_region == R_LUT) rimm_q <= lut_rdata;
      else if (h_region == R_CTRL) begin
        if (h_off >= C_ENERGY && h_off < C_ENERGY + 28'(NCOPIES))
          rimm_q <= energy[CAW'(h_off - C_ENERGY)];
        else case (h_off)
          C_NSWEEP: rimm_q <= nsweep;
          C_SEED:   rimm_q <= seed_reg;
          C_CONFIG: rimm_q <= {21'd0, dn_port, 1'b0, up_port, 3'd0, cfg_sliced};
          C_STATUS: rimm_q <= {31'd0, busy};
          C_STALLS: rimm_q <= stalls;
          C_PASSES: rimm_q <= passes;
          default:  rimm_q <= '0;
        endcase
      end
    end
  end

  always_comb begin
    h_rsp.valid = rd_q;
    case (rreg_q)
      R_SPIN:  h_rsp.rdata = sp_rd_data[rword_q*32 +: 32];
      R_COUP:  h_rsp.rdata = cp_rd_data[rword_q*32 +: 32];
      R_JZG:   h_rsp.rdata = jg_rd_data[rword_q*32 +: 32];
      default: h_rsp.rdata = rimm_q;
    endcase
  end

  initial begin
    assert (LZ % 2 == 0 && LZ >= 2) else $error("sim_processor: LZ must be even");
    assert (NS % 64 == 0) else $error("sim_processor: L*L must be a multiple of 64");
    assert (NP % NOUT == 0) else $error("sim_processor: NOUT must divide L*L/2");
    assert (NCOPIES >= 2) else $error("sim_processor: NCOPIES must be at least 2");
  end
endmodule
