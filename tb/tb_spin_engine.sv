// tb_spin_engine: drives the engine with random spins, couplings, random
// numbers and tables and compares with the +-1 energy rule: nu is the number
// of neighbours j with J*Si*Sj = -1, and the spin flips when the random
// number is below table entry nu or the entry is all ones.
module tb_spin_engine;
  logic s, s_new;
  logic [5:0] nb, j;
  logic [31:0] rnd;
  logic [6:0][31:0] lut;
  logic [2:0] nu;
  int checks = 0, failures = 0;

  spin_engine dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      int enu, si, prod;
      logic eflip, es;
      s = 1'($urandom()); nb = 6'($urandom()); j = 6'($urandom());
      for (int n = 0; n < 7; n++) begin
        case ($urandom() % 4)
          0: lut[n] = 32'hFFFF_FFFF;
          1: lut[n] = 0;
          default: lut[n] = $urandom();
        endcase
      end
      rnd = (it % 7 == 0) ? lut[$urandom() % 7] : $urandom();
      #1;
      si = s ? 1 : -1;
      enu = 0;
      for (int k = 0; k < 6; k++) begin
        prod = (j[k] ? 1 : -1) * si * (nb[k] ? 1 : -1);
        if (prod < 0) enu++;
      end
      eflip = (lut[enu] == 32'hFFFF_FFFF) || (rnd < lut[enu]);
      es    = eflip ? !s : s;
      checks += 2;
      if (nu != 3'(enu)) begin failures++; if (failures < 5) $display("nu %0d want %0d", nu, enu); end
      if (s_new != es)   begin failures++; if (failures < 5) $display("s_new %0d want %0d", s_new, es); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
