// tb_processing_board: the whole board, end to end, at reduced size
// (8 x 8 x 4 sub-lattices, 2 copies, 32 engines and 16-bit links per SP).
//
// Everything goes through the host port of the IOP. Each SP gets its own
// random lattices and seed; tables are broadcast. Then:
//  A. standalone mode, one broadcast CMD_RUN: every SP sweeps its own
//     periodic lattices; all spins and energies are checked against the
//     reference model and the busy time against passes * (LZ+3);
//  B. sliced mode over the 16-SP ring SP00-01-02-03-07-06-05-04-08-...-12,
//     which uses x and y torus links in both directions, so the board holds
//     two 8 x 8 x 64 lattices; results and the total energy are checked
//     against a model of the whole ring;
//  C. sliced mode with each SP's z+ port looped to its own z- port outside
//     the board (the loop-back set-up used for testing z cables): every SP
//     must again act as a periodic lattice.
// Counted mechanisms (each must occur): broadcast writes, unicast reads, IOP
// status reads, spin flips, mode switches, halo stalls, x/y link words and
// z link words.
module tb_processing_board;
  import sg_pkg::*;
  import sg_ref_pkg::*;
  localparam int L = 8, LZ = 4, NC = 2, NOUT = 16, LW = 16;
  localparam int WPP = L*L/32;

  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_we = 0, host_ready, host_rvalid;
  logic [4:0] host_target = 0;
  logic [31:0] host_addr = 0, host_wdata = 0, host_rdata;
  logic [NSP-1:0] sp_busy;
  logic [NSP-1:0] zp_out_valid, zp_out_ready, zp_in_valid, zp_in_ready;
  logic [NSP-1:0] zm_out_valid, zm_out_ready, zm_in_valid, zm_in_ready;
  logic [NSP-1:0][LW-1:0] zp_out_data, zp_in_data, zm_out_data, zm_in_data;
  logic zloop = 0;

  int checks = 0, failures = 0;
  int n_bcast = 0, n_reads = 0, n_status = 0, n_flips = 0, n_modes = 0;
  int n_stall = 0, n_xy = 0, n_z = 0;

  processing_board #(.L(L), .LZ(LZ), .NCOPIES(NC), .NOUT(NOUT), .LINK_W(LW)) dut (.*);
  always #5 clk = ~clk;

  // z cables: looped back when zloop is set, idle otherwise
  always_comb begin
    zp_in_valid  = zloop ? zm_out_valid : '0;
    zp_in_data   = zm_out_data;
    zm_out_ready = zloop ? zp_in_ready : '0;
    zm_in_valid  = zloop ? zp_out_valid : '0;
    zm_in_data   = zp_out_data;
    zp_out_ready = zloop ? zm_in_ready : '0;
  end
  always @(posedge clk) begin
    for (int i = 0; i < NSP; i++) begin
      for (int p = 0; p < 4; p++)
        if (dut.g_sp[0].u_sp.out_valid[p] && dut.g_sp[0].u_sp.out_ready[p]) n_xy++;
      if (zp_out_valid[i] && zp_out_ready[i]) n_z++;
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bw(int tgt, region_e r, int unsigned off, int unsigned d);
    while (!host_ready) @(negedge clk);
    host_valid = 1; host_we = 1; host_target = 5'(tgt); host_addr = {r, 28'(off)}; host_wdata = d;
    @(negedge clk);
    host_valid = 0;
    if (tgt == T_BCAST) n_bcast++;
  endtask
  task automatic br(int tgt, region_e r, int unsigned off, output int unsigned d);
    while (!host_ready) @(negedge clk);
    host_valid = 1; host_we = 0; host_target = 5'(tgt); host_addr = {r, 28'(off)};
    @(negedge clk);
    host_valid = 0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
    n_reads++;
  endtask
  task automatic wait_all_idle();
    int unsigned d;
    do begin
      repeat (4) @(negedge clk);
      br(T_IOP, R_SPIN, 1, d);     // IOP address 1: all SPs idle
      n_status++;
    end while (d != 1);
  endtask

  sg_model m [NSP][NC];
  int ring [NSP] = '{0, 1, 2, 3, 7, 6, 5, 4, 8, 9, 10, 11, 15, 14, 13, 12};

  function automatic int dir_to(int a, int b);
    int ax, ay, bx, by;
    ax = a % 4; ay = a / 4; bx = b % 4; by = b / 4;
    if (ay == by && bx == (ax + 1) % 4) return P_XP;
    if (ay == by && bx == (ax + 3) % 4) return P_XM;
    if (ax == bx && by == (ay + 1) % 4) return P_YP;
    return P_YM;
  endfunction

  task automatic compare_sp(string tag, int i);
    int unsigned d;
    for (int c = 0; c < NC; c++)
      for (int z = 0; z < LZ; z++)
        for (int w = 0; w < WPP; w++) begin
          br(i, R_SPIN, (c*LZ + z)*WPP + w, d);
          checks++;
          if (d != m[i][c].plane_word(m[i][c].s[z], w)) begin
            failures++;
            if (failures < 6) $display("%s SP%0d copy %0d z %0d w %0d: got %h want %h",
                                       tag, i, c, z, w, d, m[i][c].plane_word(m[i][c].s[z], w));
          end
        end
  endtask

  task automatic count_flips(bit prior [NSP][NC][][]);
    for (int i = 0; i < NSP; i++)
      for (int c = 0; c < NC; c++)
        foreach (prior[i][c][z, b]) if (prior[i][c][z][b] != m[i][c].s[z][b]) n_flips++;
  endtask

  // one pass of copy c over the ring; returns the summed unsatisfied bonds
  function automatic int ring_pass(int c, int col, bit meas);
    bit gdn [NSP][], gup [NSP][];
    int tot = 0;
    for (int k = 0; k < NSP; k++) begin
      int me, lo, hi;
      me = ring[k]; lo = ring[(k + NSP - 1) % NSP]; hi = ring[(k + 1) % NSP];
      gdn[me] = m[lo][c].s[LZ-1];
      gup[me] = m[hi][c].s[0];
    end
    for (int i = 0; i < NSP; i++) tot += m[i][c].pass(col, meas, 1, gdn[i], gup[i]);
    return tot;
  endfunction

  initial begin
    int unsigned d;
    int cyc, e_ref [NSP][NC];
    bit prior [NSP][NC][][];
    host_addr = 0;
    for (int i = 0; i < NSP; i++) begin
      for (int c = 0; c < NC; c++) begin
        m[i][c] = new(L, LZ, NOUT);
        m[i][c].randomize_lattice(i*NC + c);
        if (c == 0) m[i][c].set_metropolis(0.8); else m[i][c].set_metropolis(0.35);
      end
      m[i][1].gen = m[i][0].gen;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- load
    for (int i = 0; i < NSP; i++) begin
      for (int c = 0; c < NC; c++)
        for (int z = 0; z < LZ; z++)
          for (int w = 0; w < WPP; w++) begin
            bw(i, R_SPIN, (c*LZ + z)*WPP + w, m[i][c].plane_word(m[i][c].s[z], w));
            for (int f = 0; f < 3; f++)
              bw(i, R_COUP, ((c*LZ + z)*3 + f)*WPP + w, m[i][c].coup_word(z, f, w));
          end
      bw(i, R_CTRL, C_SEED, 32'h100 + i);
      m[i][0].seed(32'h100 + i);
    end
    for (int c = 0; c < NC; c++)
      for (int n = 0; n < 7; n++) bw(T_BCAST, R_LUT, c*8 + n, m[0][c].lut[n]);
    bw(T_BCAST, R_CTRL, C_CMD, CMD_SEED);
    wait_all_idle();
    br(5, R_LUT, 8 + 1, d); checks++; if (d != m[0][1].lut[1]) failures++;

    // ---- A. standalone
    foreach (prior[i, c]) prior[i][c] = m[i][c].s;
    bw(T_BCAST, R_CTRL, C_NSWEEP, 1);
    bw(T_BCAST, R_CTRL, C_CMD, {8'd0, 8'd1, 8'd0, 4'd0, CMD_RUN});
    while (!sp_busy[0]) @(negedge clk);
    cyc = 0;
    while (sp_busy[0]) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NC*3*(LZ + 3)) begin failures++; $display("SP0 busy %0d clocks, want %0d", cyc, NC*3*(LZ+3)); end
    wait_all_idle();
    for (int i = 0; i < NSP; i++)
      for (int c = 0; c < NC; c++) e_ref[i][c] = m[i][c].sweep_standalone(1);
    count_flips(prior);
    for (int i = 0; i < NSP; i++) begin
      compare_sp("A", i);
      for (int c = 0; c < NC; c++) begin
        br(i, R_CTRL, C_ENERGY + c, d);
        checks++;
        if (int'(d) != e_ref[i][c]) begin failures++; $display("A SP%0d copy %0d energy %0d want %0d", i, c, d, e_ref[i][c]); end
      end
    end

    // ---- B. one lattice per copy sliced over the 16-SP ring
    for (int k = 0; k < NSP; k++) begin
      int me, lo, hi;
      me = ring[k]; lo = ring[(k + NSP - 1) % NSP]; hi = ring[(k + 1) % NSP];
      bw(me, R_CTRL, C_CONFIG, (dir_to(me, lo) << 8) | (dir_to(me, hi) << 4) | 1);
      for (int c = 0; c < NC; c++) begin
        m[me][c].jzg = m[lo][c].jz[LZ-1];
        for (int w = 0; w < WPP; w++) bw(me, R_JZG, c*WPP + w, m[me][c].plane_word(m[me][c].jzg, w));
      end
    end
    n_modes++;
    foreach (prior[i, c]) prior[i][c] = m[i][c].s;
    bw(T_BCAST, R_CTRL, C_NSWEEP, 2);
    bw(T_BCAST, R_CTRL, C_CMD, {8'd0, 8'd1, 8'd0, 4'd0, CMD_RUN});
    wait_all_idle();
    for (int c = 0; c < NC; c++) begin
      int tot_ref, tot;
      repeat (2) begin
        void'(ring_pass(c, 0, 0));
        void'(ring_pass(c, 1, 0));
      end
      tot_ref = ring_pass(c, 0, 1);
      tot = 0;
      for (int i = 0; i < NSP; i++) begin
        br(i, R_CTRL, C_ENERGY + c, d);
        tot += int'(d);
      end
      checks++;
      if (tot != tot_ref) begin failures++; $display("B copy %0d total unsatisfied %0d want %0d", c, tot, tot_ref); end
      $display("B copy %0d: energy of the 8x8x64 lattice E = %0d", c, 2*tot - 3*L*L*LZ*int'(NSP));
    end
    count_flips(prior);
    for (int i = 0; i < NSP; i++) compare_sp("B", i);
    for (int i = 0; i < NSP; i++) begin
      br(i, R_CTRL, C_STALLS, d);
      n_stall += int'(d);
    end

    // ---- C. z cables looped back: each SP is its own z neighbour
    zloop = 1;
    for (int i = 0; i < NSP; i++) begin
      bw(i, R_CTRL, C_CONFIG, (P_ZM << 8) | (P_ZP << 4) | 1);
      for (int c = 0; c < NC; c++)
        for (int w = 0; w < WPP; w++) bw(i, R_JZG, c*WPP + w, m[i][c].plane_word(m[i][c].jz[LZ-1], w));
    end
    n_modes++;
    foreach (prior[i, c]) prior[i][c] = m[i][c].s;
    bw(T_BCAST, R_CTRL, C_CMD, {8'd0, 8'd1, 8'd0, 4'd0, CMD_RUN});
    wait_all_idle();
    for (int i = 0; i < NSP; i++)
      for (int c = 0; c < NC; c++) e_ref[i][c] = m[i][c].sweep_standalone(2);
    count_flips(prior);
    for (int i = 0; i < NSP; i++) begin
      compare_sp("C", i);
      for (int c = 0; c < NC; c++) begin
        br(i, R_CTRL, C_ENERGY + c, d);
        checks++;
        if (int'(d) != e_ref[i][c]) begin failures++; $display("C SP%0d copy %0d energy %0d want %0d", i, c, d, e_ref[i][c]); end
      end
    end

    // back to standalone
    bw(T_BCAST, R_CTRL, C_CONFIG, 0);
    br(7, R_CTRL, C_CONFIG, d); checks++; if (d != 0) failures++;
    n_modes++;

    $display("mechanisms: broadcast=%0d reads=%0d status=%0d flips=%0d mode_switches=%0d halo_stall_clocks=%0d xy_link_words(SP00)=%0d z_link_words=%0d",
             n_bcast, n_reads, n_status, n_flips, n_modes, n_stall, n_xy, n_z);
    checks += 8;
    if (n_bcast == 0) failures++;
    if (n_reads == 0) failures++;
    if (n_status == 0) failures++;
    if (n_flips == 0) failures++;
    if (n_modes < 3) failures++;
    if (n_stall == 0) failures++;
    if (n_xy == 0) failures++;
    if (n_z == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
