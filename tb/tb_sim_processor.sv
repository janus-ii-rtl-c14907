// tb_sim_processor: one SP with 8 x 8 x 4 lattices, 2 copies, 32 engines.
//
// 1. Standalone: random lattices and couplings are loaded through the host
//    port, each copy gets its own Metropolis table (two temperatures), the
//    wheels are seeded and CMD_RUN runs 3 sweeps per copy plus the energy
//    passes. Every spin word and both energies are compared with the
//    reference model, and the busy time must be exactly passes * (LZ+3)
//    clocks (32 spins per clock).
// 2. CMD_MEASURE on copy 1 alone gives the same energy again.
// 3. Sliced mode with the up port (x+) looped to the down port (x-) on a
//    randomly stalled wire: the SP is its own neighbour, so with the z
//    couplings under plane 0 loaded from its last plane the result must equal
//    the periodic model. Halo stalls must be counted.
module tb_sim_processor;
  import sg_pkg::*;
  import sg_ref_pkg::*;
  localparam int L = 8, LZ = 4, NC = 2, NOUT = 16, LW = 16;
  localparam int WPP = L*L/32;
  logic clk = 0, rst_n = 0;
  host_req_t h_req;
  logic h_ready, busy;
  host_rsp_t h_rsp;
  logic [NPORT-1:0] out_valid, out_ready, in_valid, in_ready;
  logic [NPORT-1:0][LW-1:0] out_data, in_data;
  logic wire_stall = 0;
  int checks = 0, failures = 0, stall_cycles = 0;

  sim_processor #(.L(L), .LZ(LZ), .NCOPIES(NC), .NOUT(NOUT), .LINK_W(LW)) dut (.*);
  always #5 clk = ~clk;

  // link loop: x+ out -> x- in, x- out -> x+ in, others idle
  always_comb begin
    in_valid = '0; in_data = '0; out_ready = '0;
    in_valid[P_XM] = out_valid[P_XP] && !wire_stall; in_data[P_XM] = out_data[P_XP];
    out_ready[P_XP] = in_ready[P_XM] && !wire_stall;
    in_valid[P_XP] = out_valid[P_XM] && !wire_stall; in_data[P_XP] = out_data[P_XM];
    out_ready[P_XM] = in_ready[P_XP] && !wire_stall;
  end
  always @(negedge clk) begin
    wire_stall = ($urandom() % 4 == 0);
    if (wire_stall && out_valid[P_XP]) stall_cycles++;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(region_e r, int unsigned off, int unsigned d);
    h_req.valid = 1; h_req.we = 1; h_req.addr = {r, 28'(off)}; h_req.wdata = d;
    do @(negedge clk); while (!h_ready);
    h_req.valid = 0;
  endtask
  // the request is taken at the rising edge; the response is valid one clock later
  task automatic hr(region_e r, int unsigned off, output int unsigned d);
    h_req.valid = 1; h_req.we = 0; h_req.addr = {r, 28'(off)};
    while (!h_ready) @(negedge clk);
    @(negedge clk);
    h_req.valid = 0;
    if (!h_rsp.valid) begin failures++; $display("no read response"); end
    d = h_rsp.rdata;
  endtask
  task automatic wait_idle(output int cycles);
    // called right after the command was taken: busy is already high
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  sg_model m [NC];

  task automatic load_all();
    for (int c = 0; c < NC; c++) begin
      for (int z = 0; z < LZ; z++)
        for (int w = 0; w < WPP; w++) begin
          hw(R_SPIN, (c*LZ + z)*WPP + w, m[c].plane_word(m[c].s[z], w));
          for (int f = 0; f < 3; f++)
            hw(R_COUP, ((c*LZ + z)*3 + f)*WPP + w, m[c].coup_word(z, f, w));
        end
      for (int n = 0; n < 7; n++) hw(R_LUT, c*8 + n, m[c].lut[n]);
    end
  endtask

  task automatic compare_all(string tag);
    int unsigned d;
    for (int c = 0; c < NC; c++)
      for (int z = 0; z < LZ; z++)
        for (int w = 0; w < WPP; w++) begin
          hr(R_SPIN, (c*LZ + z)*WPP + w, d);
          checks++;
          if (d != m[c].plane_word(m[c].s[z], w)) begin
            failures++;
            if (failures < 6) $display("%s copy %0d z %0d w %0d: got %h want %h", tag, c, z, w, d, m[c].plane_word(m[c].s[z], w));
          end
        end
  endtask

  initial begin
    int unsigned d;
    int cyc, e_ref [NC], flips;
    bit prior [NC][][];
    h_req = '0;
    for (int c = 0; c < NC; c++) begin
      m[c] = new(L, LZ, NOUT);
      m[c].randomize_lattice(c);
    end
    m[1].gen = m[0].gen;       // the SP's wheels serve every copy in turn
    m[0].set_metropolis(0.9);
    m[1].set_metropolis(0.3);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_all();
    // read back a coupling word and a table entry
    hr(R_COUP, 5, d); checks++; if (d != m[0].coup_word(0, 2, 1)) begin failures++; $display("coupling readback %h", d); end
    hr(R_LUT, 8 + 2, d); checks++; if (d != m[1].lut[2]) failures++;

    // seed
    hw(R_CTRL, C_SEED, 32'hC0FFEE);
    hw(R_CTRL, C_CMD, CMD_SEED);
    wait_idle(cyc);
    m[0].seed(32'hC0FFEE);
    checks++; if (cyc != 61) begin failures++; $display("seed took %0d", cyc); end

    // ---- 1. standalone run
    for (int c = 0; c < NC; c++) prior[c] = m[c].s;
    hw(R_CTRL, C_NSWEEP, 3);
    hw(R_CTRL, C_CMD, {8'd0, 8'd1, 8'd0, 4'd0, CMD_RUN});
    wait_idle(cyc);
    for (int c = 0; c < NC; c++) e_ref[c] = m[c].sweep_standalone(3);
    checks++;
    if (cyc != NC*(2*3 + 1)*(LZ + 3)) begin failures++; $display("run took %0d clocks, want %0d", cyc, NC*7*(LZ+3)); end
    compare_all("standalone");
    flips = 0;
    for (int c = 0; c < NC; c++) foreach (prior[c][z, b]) if (prior[c][z][b] != m[c].s[z][b]) flips++;
    $display("spins flipped in run 1: %0d", flips);
    checks++; if (flips == 0) begin failures++; $display("no flip happened"); end
    for (int c = 0; c < NC; c++) begin
      hr(R_CTRL, C_ENERGY + c, d);
      checks++;
      if (int'(d) != e_ref[c]) begin failures++; $display("energy copy %0d: %0d want %0d", c, d, e_ref[c]); end
    end
    hr(R_CTRL, C_PASSES, d); checks++; if (d != NC*7) failures++;

    // ---- 2. measure only
    hw(R_CTRL, C_CMD, {8'd0, 8'd1, 8'd1, 4'd0, CMD_MEASURE});
    wait_idle(cyc);
    hr(R_CTRL, C_ENERGY + 1, d);
    checks += 2;
    if (int'(d) != e_ref[1]) failures++;
    if (cyc != LZ + 3) failures++;

    // ---- 3. sliced, looped onto itself
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < WPP; w++) hw(R_JZG, c*WPP + w, m[c].plane_word(m[c].jz[LZ-1], w));
    hw(R_CTRL, C_CONFIG, (P_XM << 8) | (P_XP << 4) | 1);
    hw(R_CTRL, C_NSWEEP, 2);
    hw(R_CTRL, C_CMD, {8'd0, 8'd1, 8'd0, 4'd0, CMD_RUN});
    wait_idle(cyc);
    for (int c = 0; c < NC; c++) e_ref[c] = m[c].sweep_standalone(2);
    compare_all("sliced");
    for (int c = 0; c < NC; c++) begin
      hr(R_CTRL, C_ENERGY + c, d);
      checks++;
      if (int'(d) != e_ref[c]) begin failures++; $display("sliced energy copy %0d: %0d want %0d", c, d, e_ref[c]); end
    end
    hr(R_CTRL, C_STALLS, d);
    $display("halo stall clocks: %0d, stalled wire clocks: %0d, run clocks %0d", d, stall_cycles, cyc);
    checks += 2;
    if (d == 0) failures++;
    if (cyc <= NC*5*(LZ + 3)) failures++;
    hr(R_CTRL, C_STATUS, d); checks++; if (d != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
