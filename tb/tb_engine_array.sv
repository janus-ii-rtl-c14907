// tb_engine_array: random planes, couplings, random numbers and tables on an
// 8 x 8 array (32 engines). Each update is compared with a site-by-site +-1
// computation: the updated colour follows the flip rule with the random
// number of its engine, the other colour is unchanged, and nu_sum is the sum
// of unsatisfied bonds over the updated colour.
module tb_engine_array;
  localparam int L = 8, NS = L*L, NP = NS/2;
  logic [NS-1:0] s_prev, s_cur, s_next, jx, jy, jz, jz_prev, s_new;
  logic colour, zpar;
  logic [NP*32-1:0] rnd;
  logic [6:0][31:0] lut;
  logic [$clog2(NS*3+1)-1:0] nu_sum;
  int checks = 0, failures = 0;

  engine_array #(.L(L)) dut (.*);

  function automatic int pm(logic b); return b ? 1 : -1; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      logic [NS-1:0] exp_s;
      int exp_sum;
      s_prev = {$urandom(), $urandom()}; s_cur = {$urandom(), $urandom()};
      s_next = {$urandom(), $urandom()}; jx = {$urandom(), $urandom()};
      jy = {$urandom(), $urandom()};     jz = {$urandom(), $urandom()};
      jz_prev = {$urandom(), $urandom()};
      colour = 1'($urandom()); zpar = 1'($urandom());
      for (int e = 0; e < NP; e++) rnd[e*32 +: 32] = $urandom();
      for (int n = 0; n < 7; n++) lut[n] = (n >= 3) ? 32'hFFFF_FFFF : $urandom();
      if (it % 3 == 0) lut[$urandom() % 7] = 0;
      #1;
      exp_s = s_cur; exp_sum = 0;
      for (int y = 0; y < L; y++)
        for (int x = 0; x < L; x++) begin
          int b, f, nu, e;
          if (((x + y + zpar) % 2) != colour) continue;
          b = y*L + x;
          e = y*(L/2) + x/2;
          f = pm(jx[b]) * pm(s_cur[y*L + (x+1)%L]) + pm(jx[y*L + (x+L-1)%L]) * pm(s_cur[y*L + (x+L-1)%L])
            + pm(jy[b]) * pm(s_cur[((y+1)%L)*L + x]) + pm(jy[((y+L-1)%L)*L + x]) * pm(s_cur[((y+L-1)%L)*L + x])
            + pm(jz[b]) * pm(s_next[b]) + pm(jz_prev[b]) * pm(s_prev[b]);
          nu = (6 - pm(s_cur[b]) * f) / 2;
          exp_sum += nu;
          if (lut[nu] == 32'hFFFF_FFFF || rnd[e*32 +: 32] < lut[nu]) exp_s[b] = !s_cur[b];
        end
      checks += 2;
      if (s_new !== exp_s) begin failures++; if (failures < 5) $display("it %0d s_new %h want %h", it, s_new, exp_s); end
      if (int'(nu_sum) != exp_sum) begin failures++; if (failures < 5) $display("it %0d nu_sum %0d want %0d", it, nu_sum, exp_sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
