// tb_halo_link: two halo_link instances, A above B. A's down port is wired to
// B's up port (both directions); the other ports are watched by the
// testbench. After start_tx each side must receive the other's plane, whole
// and in order, with random stalls on the wire (ready forced low), and a
// second transfer must wait until rx_clear frees the buffer.
module tb_halo_link;
  import sg_pkg::*;
  localparam int L = 8, LW = 16, NS = L*L;
  logic clk = 0, rst_n = 0;
  logic sa, sb, da, db, fa, fb, ca = 0, cb = 0;
  logic [NS-1:0] ua, dna, ub, dnb, gua, gda, gub, gdb;
  logic [NPORT-1:0] ova, ovb, ora, orb, iva, ivb, ira, irb;
  logic [NPORT-1:0][LW-1:0] oda, odb, ida, idb;
  logic stall = 0;
  int checks = 0, failures = 0, stalled = 0;

  // A: up = z+ (4), down = x- (1). B: up = x+ (0), down = z- (5)
  halo_link #(.L(L), .LINK_W(LW)) ua_i (.clk, .rst_n, .up_port(3'd4), .dn_port(3'd1),
    .start_tx(sa), .tx_up_plane(ua), .tx_dn_plane(dna), .tx_done(da),
    .ghost_up(gua), .ghost_dn(gda), .rx_full(fa), .rx_clear(ca),
    .out_valid(ova), .out_data(oda), .out_ready(ora), .in_valid(iva), .in_data(ida), .in_ready(ira));
  halo_link #(.L(L), .LINK_W(LW)) ub_i (.clk, .rst_n, .up_port(3'd0), .dn_port(3'd5),
    .start_tx(sb), .tx_up_plane(ub), .tx_dn_plane(dnb), .tx_done(db),
    .ghost_up(gub), .ghost_dn(gdb), .rx_full(fb), .rx_clear(cb),
    .out_valid(ovb), .out_data(odb), .out_ready(orb), .in_valid(ivb), .in_data(idb), .in_ready(irb));

  // A x- <-> B x+, with the wire stalled at random
  // outer ports: A z+ and B z- are looped to themselves (A up gets A's up plane)
  always_comb begin
    iva = '0; ida = '0; ivb = '0; idb = '0; ora = '0; orb = '0;
    ivb[0] = ova[1] && !stall; idb[0] = oda[1]; ora[1] = irb[0] && !stall;
    iva[1] = ovb[0] && !stall; ida[1] = odb[0]; orb[0] = ira[1] && !stall;
    iva[4] = ova[4]; ida[4] = oda[4]; ora[4] = ira[4];
    ivb[5] = ovb[5]; idb[5] = odb[5]; orb[5] = irb[5];
  end
  always #5 clk = ~clk;
  always @(negedge clk) begin
    stall = ($urandom() % 3 == 0);
    if (stall && (ova[1] || ovb[0])) stalled++;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [NS-1:0] got, logic [NS-1:0] want);
    checks++;
    if (got !== want) begin failures++; $display("%s: got %h want %h", what, got, want); end
  endtask

  initial begin
    sa = 0; sb = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int cyc;
      ua = {$urandom(), $urandom()}; dna = {$urandom(), $urandom()};
      ub = {$urandom(), $urandom()}; dnb = {$urandom(), $urandom()};
      sa = 1; sb = 1; @(negedge clk); sa = 0; sb = 0;
      cyc = 0;
      while (!(da && db && fa && fb) && cyc < 1000) begin @(negedge clk); cyc++; end
      check("A ghost_dn", gda, ub);   // B's top plane
      check("B ghost_up", gub, dna);  // A's bottom plane
      check("A ghost_up", gua, ua);   // loop on z+
      check("B ghost_dn", gdb, dnb);  // loop on z-
      checks++;
      if (cyc < NS/LW) begin failures++; $display("transfer too fast: %0d", cyc); end
      // a new transfer from A must not enter B before B clears its buffer
      ua = ~ua; dna = ~dna;
      sa = 1; @(negedge clk); sa = 0;
      repeat (20) @(negedge clk);
      check("B ghost_up held", gub, ~dna);
      checks++; if (da) begin failures++; $display("A finished sending into a full buffer"); end
      cb = 1; ca = 1; @(negedge clk); cb = 0; ca = 0;
      cyc = 0;
      while (!(da && fb) && cyc < 1000) begin @(negedge clk); cyc++; end
      check("B ghost_up after clear", gub, dna);
      cb = 1; ca = 1; @(negedge clk); cb = 0; ca = 0;
      // drain B's pending transfer state: B did not send again, so its
      // buffers are simply empty now
    end
    checks++; if (stalled == 0) begin failures++; $display("no stall seen"); end
    $display("stalled wire cycles: %0d", stalled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
