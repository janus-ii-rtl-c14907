// tb_board_full: the Processing Board at its full default size (16 SPs,
// each with 30 copies of 64^3 sites and 2048 engines, 128-bit links).
//
// One complete operation: copy 0 of every SP is loaded by broadcast with the
// same random 64^3 lattice and Metropolis table, each SP gets its own seed,
// one broadcast CMD_RUN performs one sweep and the energy pass of copy 0 in
// standalone mode. The busy time of SP00 must be 3 passes of 64+3 clocks
// (2048 spins per clock), the 16 energies must match the reference model of
// each SP, and the spins of SP00 and SP15 are read back and compared.
module tb_board_full;
  import sg_pkg::*;
  import sg_ref_pkg::*;
  localparam int L = L_DEF, LZ = LZ_DEF, NOUT = NOUT_DEF, LW = LINK_W_DEF;
  localparam int WPP = L*L/32;

  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_we = 0, host_ready, host_rvalid;
  logic [4:0] host_target = 0;
  logic [31:0] host_addr = 0, host_wdata = 0, host_rdata;
  logic [NSP-1:0] sp_busy;
  logic [NSP-1:0] zp_out_valid, zp_in_ready, zm_out_valid, zm_in_ready;
  logic [NSP-1:0][LW-1:0] zp_out_data, zm_out_data;
  int checks = 0, failures = 0;

  processing_board dut (
    .clk, .rst_n, .host_valid, .host_we, .host_target, .host_addr, .host_wdata,
    .host_ready, .host_rvalid, .host_rdata, .sp_busy,
    .zp_out_valid, .zp_out_data, .zp_out_ready('0), .zp_in_valid('0), .zp_in_data('0), .zp_in_ready,
    .zm_out_valid, .zm_out_data, .zm_out_ready('0), .zm_in_valid('0), .zm_in_data('0), .zm_in_ready
  );
  always #5 clk = ~clk;

  initial begin
    #20000000;
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
  endtask
  task automatic br(int tgt, region_e r, int unsigned off, output int unsigned d);
    while (!host_ready) @(negedge clk);
    host_valid = 1; host_we = 0; host_target = 5'(tgt); host_addr = {r, 28'(off)};
    @(negedge clk);
    host_valid = 0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask

  sg_model m [NSP];

  initial begin
    int unsigned d;
    int cyc, e_ref [NSP];
    for (int i = 0; i < NSP; i++) m[i] = new(L, LZ, NOUT);
    m[0].randomize_lattice(0);
    m[0].set_metropolis(0.9);
    for (int i = 1; i < NSP; i++) begin
      m[i].s = m[0].s; m[i].jx = m[0].jx; m[i].jy = m[0].jy; m[i].jz = m[0].jz;
      m[i].lut = m[0].lut;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int z = 0; z < LZ; z++)
      for (int w = 0; w < WPP; w++) begin
        bw(T_BCAST, R_SPIN, z*WPP + w, m[0].plane_word(m[0].s[z], w));
        for (int f = 0; f < 3; f++) bw(T_BCAST, R_COUP, (z*3 + f)*WPP + w, m[0].coup_word(z, f, w));
      end
    for (int n = 0; n < 7; n++) bw(T_BCAST, R_LUT, n, m[0].lut[n]);
    for (int i = 0; i < NSP; i++) begin
      bw(i, R_CTRL, C_SEED, 32'h5EED_0000 + i);
      m[i].seed(32'h5EED_0000 + i);
    end
    $display("loaded at %0t", $time);
    bw(T_BCAST, R_CTRL, C_CMD, CMD_SEED);
    while (sp_busy != '0 || !host_ready) @(negedge clk);
    bw(T_BCAST, R_CTRL, C_NSWEEP, 1);
    bw(T_BCAST, R_CTRL, C_CMD, {8'd0, 8'd0, 8'd0, 4'd0, CMD_RUN});
    while (!sp_busy[0]) @(negedge clk);
    cyc = 0;
    while (sp_busy[0]) begin @(negedge clk); cyc++; end
    while (sp_busy != '0) @(negedge clk);
    checks++;
    if (cyc != 3*(LZ + 3)) begin failures++; $display("busy %0d clocks, want %0d", cyc, 3*(LZ+3)); end
    for (int i = 0; i < NSP; i++) e_ref[i] = m[i].sweep_standalone(1);
    for (int i = 0; i < NSP; i++) begin
      br(i, R_CTRL, C_ENERGY, d);
      checks++;
      if (int'(d) != e_ref[i]) begin failures++; $display("SP%0d energy %0d want %0d", i, d, e_ref[i]); end
    end
    $display("SP00 energy per spin after one sweep: %0f", real'(2*e_ref[0] - 3*L*L*LZ) / real'(L*L*LZ));
    foreach (m[i]) begin
      if (i != 0 && i != NSP-1) continue;
      for (int z = 0; z < LZ; z++)
        for (int w = 0; w < WPP; w++) begin
          br(i, R_SPIN, z*WPP + w, d);
          checks++;
          if (d != m[i].plane_word(m[i].s[z], w)) begin
            failures++;
            if (failures < 6) $display("SP%0d z %0d w %0d: got %h want %h", i, z, w, d, m[i].plane_word(m[i].s[z], w));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
