// tb_pt_workload: parallel tempering on one SP, as the control computer
// would run it. The SP holds 30 copies (the default copy count) of a reduced
// 8 x 8 x 4 lattice, one copy per temperature; every copy has its own random
// couplings. Each iteration:
//   1. one CMD_RUN performs N_PT sweeps on all 30 copies and
//      an energy pass on each;
//   2. the host reads the 30 energies (checked against the reference model
//      and against H recomputed from the model's spins);
//   3. the host attempts exchanges between neighbouring temperatures with
//      probability min(1, exp((b_a - b_a+1)(H_a - H_a+1))), walking towards
//      ascending temperature;
//   4. an accepted exchange moves temperatures, not spins: the host rewrites
//      the two copies' acceptance tables.
// After the last iteration every spin word is compared with the model. The
// run time of each iteration must be 30 * (2*N_PT + 1) * (LZ + 3) clocks.
// Counted mechanisms: accepted and rejected exchanges (each must happen).
// The exchange rule is the standard one; the sizes (30 copies) follow the
// paper's example, the 8 x 8 x 4 lattice is reduced to keep the run short.
module tb_pt_workload;
  import sg_pkg::*;
  import sg_ref_pkg::*;
  localparam int L = 8, LZ = 4, NC = 30, NOUT = 16, LW = 16;
  localparam int WPP = L*L/32;
  localparam int N_PT = 2, ITER = 12;
  logic clk = 0, rst_n = 0;
  host_req_t h_req;
  logic h_ready, busy;
  host_rsp_t h_rsp;
  logic [NPORT-1:0] out_valid, out_ready, in_valid, in_ready;
  logic [NPORT-1:0][LW-1:0] out_data, in_data;
  int checks = 0, failures = 0;

  sim_processor #(.L(L), .LZ(LZ), .NCOPIES(NC), .NOUT(NOUT), .LINK_W(LW)) dut (.*);
  always #5 clk = ~clk;
  assign in_valid = '0;
  assign in_data = '0;
  assign out_ready = '0;

  initial begin
    #20000000;
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
  task automatic hr(region_e r, int unsigned off, output int unsigned d);
    h_req.valid = 1; h_req.we = 0; h_req.addr = {r, 28'(off)};
    while (!h_ready) @(negedge clk);
    @(negedge clk);
    h_req.valid = 0;
    if (!h_rsp.valid) begin failures++; $display("no read response"); end
    d = h_rsp.rdata;
  endtask

  sg_model m [NC];
  real beta [NC];        // beta of temperature index a, descending beta = ascending T
  int  copy_at [NC];     // copy that currently holds temperature a

  // H from the model's spins, with +-1 arithmetic
  function automatic int model_h(int c);
    int h = 0;
    for (int z = 0; z < LZ; z++)
      for (int y = 0; y < L; y++)
        for (int x = 0; x < L; x++) begin
          int b = y*L + x, s = 2*m[c].s[z][b] - 1;
          h -= (2*m[c].jx[z][b] - 1) * s * (2*m[c].s[z][y*L + (x+1)%L] - 1);
          h -= (2*m[c].jy[z][b] - 1) * s * (2*m[c].s[z][((y+1)%L)*L + x] - 1);
          h -= (2*m[c].jz[z][b] - 1) * s * (2*m[c].s[(z+1)%LZ][b] - 1);
        end
    return h;
  endfunction

  task automatic load_table(int c, real b);
    m[c].set_metropolis(b);
    for (int n = 0; n < NLUT; n++) hw(R_LUT, c*8 + n, m[c].lut[n]);
  endtask

  initial begin
    int unsigned d;
    int cyc, u_ref [NC], h [NC], acc, rej;
    h_req = '0;
    acc = 0;
    rej = 0;
    for (int c = 0; c < NC; c++) begin
      m[c] = new(L, LZ, NOUT);
      m[c].randomize_lattice(100 + c);
      if (c > 0) m[c].gen = m[0].gen;   // all copies draw from the same wheels, in turn
      beta[c] = 1.6 - 1.4 * real'(c) / real'(NC - 1);
      copy_at[c] = c;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      for (int z = 0; z < LZ; z++)
        for (int w = 0; w < WPP; w++) begin
          hw(R_SPIN, (c*LZ + z)*WPP + w, m[c].plane_word(m[c].s[z], w));
          for (int f = 0; f < 3; f++)
            hw(R_COUP, ((c*LZ + z)*3 + f)*WPP + w, m[c].coup_word(z, f, w));
        end
      load_table(c, beta[c]);
    end
    hw(R_CTRL, C_SEED, 32'h7E3B_0001);
    hw(R_CTRL, C_CMD, CMD_SEED);
    while (busy) @(negedge clk);
    m[0].seed(32'h7E3B_0001);
    hw(R_CTRL, C_NSWEEP, N_PT);

    for (int it = 0; it < ITER; it++) begin
      hw(R_CTRL, C_CMD, {8'd0, 8'(NC - 1), 8'd0, 4'd0, CMD_RUN});
      cyc = 0;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NC*(2*N_PT + 1)*(LZ + 3)) begin
        failures++; $display("iteration %0d took %0d clocks, want %0d", it, cyc, NC*(2*N_PT+1)*(LZ+3));
      end
      for (int c = 0; c < NC; c++) u_ref[c] = m[c].sweep_standalone(N_PT);
      for (int c = 0; c < NC; c++) begin
        hr(R_CTRL, C_ENERGY + c, d);
        h[c] = 2*int'(d) - 3*L*L*LZ;
        checks += 2;
        if (int'(d) != u_ref[c]) begin failures++; $display("it %0d copy %0d: U %0d want %0d", it, c, d, u_ref[c]); end
        if (h[c] != model_h(c)) begin failures++; $display("it %0d copy %0d: H %0d, model %0d", it, c, h[c], model_h(c)); end
      end
      // exchanges towards ascending temperature
      for (int a = 0; a < NC - 1; a++) begin
        int ca, cb;
        real x;
        ca = copy_at[a];
        cb = copy_at[a+1];
        x = (beta[a] - beta[a+1]) * real'(h[ca] - h[cb]);
        if (x >= 0.0 || real'($urandom()) / 4294967296.0 < $exp(x)) begin
          acc++;
          copy_at[a] = cb; copy_at[a+1] = ca;
          load_table(cb, beta[a]);
          load_table(ca, beta[a+1]);
        end else rej++;
      end
    end
    for (int c = 0; c < NC; c++)
      for (int z = 0; z < LZ; z++)
        for (int w = 0; w < WPP; w++) begin
          hr(R_SPIN, (c*LZ + z)*WPP + w, d);
          checks++;
          if (d != m[c].plane_word(m[c].s[z], w)) begin
            failures++;
            if (failures < 6) $display("copy %0d z %0d w %0d: got %h want %h", c, z, w, d, m[c].plane_word(m[c].s[z], w));
          end
        end
    $display("exchanges accepted %0d rejected %0d; lowest-T energy per spin %0f",
             acc, rej, real'(h[copy_at[0]]) / real'(L*L*LZ));
    checks += 2;
    if (acc == 0) begin failures++; $display("no exchange accepted"); end
    if (rej == 0) begin failures++; $display("no exchange rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
