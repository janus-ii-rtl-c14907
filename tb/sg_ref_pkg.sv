// sg_ref_pkg: reference model used by the testbenches.
//
// sg_model holds one SP's share of an Ising spin-glass lattice in plain
// arrays (spins, +x/+y/+z couplings as bits), the Parisi-Rapuano generators of
// the SP's wheels as sequential generators, and the acceptance table, and
// applies a checkerboard pass with +-1 arithmetic, site by site, in the
// order in which the hardware hands out random numbers (engine e of the plane
// gets output e mod NOUT of wheel e / NOUT). It is written independently of
// the RTL and shares only the conventions of the interface: bit y*L+x of a
// plane is site (x,y), a bond is stored at its lower end, the flip rule
// "random < entry, or entry all ones", and the seeding rule of CMD_SEED.
package sg_ref_pkg;

  function automatic int unsigned xs32(int unsigned x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // one sequential Parisi-Rapuano generator
  class pr_gen;
    int unsigned h[$];
    function void seed_stream(int unsigned st);
      h.delete();
      repeat (61) begin
        st = xs32(st);
        h.push_back(st);
      end
    endfunction
    function int unsigned next();
      int unsigned n, inew, r;
      n    = h.size();
      inew = h[n-24] + h[n-55];
      r    = inew ^ h[n-61];
      h.push_back(inew);
      void'(h.pop_front());
      return r;
    endfunction
  endclass

  class sg_model;
    int L, LZ, NOUT, NP, NW;
    bit s[][];       // [z][y*L+x]
    bit jx[][], jy[][], jz[][];
    bit jzg[];       // +z couplings under plane 0 (sliced mode)
    int unsigned lut[7];
    pr_gen gen[];

    function new(int L_, int LZ_, int NOUT_);
      L = L_; LZ = LZ_; NOUT = NOUT_;
      NP = L*L/2; NW = NP/NOUT;
      s = new[LZ]; jx = new[LZ]; jy = new[LZ]; jz = new[LZ];
      foreach (s[z]) begin
        s[z] = new[L*L]; jx[z] = new[L*L]; jy[z] = new[L*L]; jz[z] = new[L*L];
      end
      jzg = new[L*L];
      gen = new[NW];
      foreach (gen[w]) gen[w] = new();
    endfunction

    function void randomize_lattice(int unsigned salt);
      foreach (s[z, b]) begin
        s[z][b]  = $urandom() & 1;
        jx[z][b] = $urandom() & 1;
        jy[z][b] = $urandom() & 1;
        jz[z][b] = $urandom() & 1;
      end
      foreach (jzg[b]) jzg[b] = $urandom() & 1;
    endfunction

    function void seed(int unsigned sd);
      foreach (gen[w]) begin
        int unsigned st;
        st = sd ^ (w * 32'h9E3779B9);
        if (st == 0) st = 1;
        gen[w].seed_stream(st);
      end
    endfunction

    static function int pm(bit b);
      return b ? 1 : -1;
    endfunction

    // one pass of colour c; returns the unsatisfied bonds seen by colour c
    function int pass(int c, bit measure, bit sliced, bit gdn[], bit gup[]);
      int nsum = 0;
      for (int z = 0; z < LZ; z++) begin
        for (int e = 0; e < NP; e++) begin
          int y, x, b, xp, xm, yp, ym, nu, si, field;
          int unsigned r, thr;
          bit sp_, sn_, jzp;
          y  = e / (L/2);
          x  = 2*(e % (L/2)) + ((y + z + c) & 1);
          b  = y*L + x;
          xp = y*L + (x+1)%L;  xm = y*L + (x+L-1)%L;
          yp = ((y+1)%L)*L + x; ym = ((y+L-1)%L)*L + x;
          sp_ = (z == 0)    ? (sliced ? gdn[b] : s[LZ-1][b]) : s[z-1][b];
          sn_ = (z == LZ-1) ? (sliced ? gup[b] : s[0][b])    : s[z+1][b];
          jzp = (z == 0)    ? (sliced ? jzg[b] : jz[LZ-1][b]) : jz[z-1][b];
          si  = pm(s[z][b]);
          field = pm(jx[z][b]) * pm(s[z][xp]) + pm(jx[z][xm]) * pm(s[z][xm])
                + pm(jy[z][b]) * pm(s[z][yp]) + pm(jy[z][ym]) * pm(s[z][ym])
                + pm(jz[z][b]) * pm(sn_)     + pm(jzp)       * pm(sp_);
          // unsatisfied bonds: (6 - si*field) / 2
          nu = (6 - si*field) / 2;
          nsum += nu;
          if (!measure) begin
            r   = gen[e / NOUT].next();
            thr = lut[nu];
            if (thr == 32'hFFFF_FFFF || r < thr) s[z][b] = !s[z][b];
          end
        end
      end
      return nsum;
    endfunction

    function int sweep_standalone(int nsweeps);
      bit dummy[];
      dummy = new[L*L];
      repeat (nsweeps) begin
        void'(pass(0, 0, 0, dummy, dummy));
        void'(pass(1, 0, 0, dummy, dummy));
      end
      return pass(0, 1, 0, dummy, dummy);
    endfunction

    // word w of a plane, as the SP stores it
    function int unsigned plane_word(bit p[], int w);
      int unsigned v = 0;
      for (int k = 0; k < 32; k++) v[k] = p[w*32 + k];
      return v;
    endfunction

    // coupling word of field f (0 x, 1 y, 2 z), word w, plane z
    function int unsigned coup_word(int z, int f, int w);
      case (f)
        0: return plane_word(jx[z], w);
        1: return plane_word(jy[z], w);
        default: return plane_word(jz[z], w);
      endcase
    endfunction

    // Metropolis table for inverse temperature beta: dE = 12 - 4 nu
    function void set_metropolis(real beta);
      for (int n = 0; n < 7; n++) begin
        real p;
        p = $exp(-beta * (12 - 4*n));
        if (12 - 4*n <= 0) lut[n] = 32'hFFFF_FFFF;
        else lut[n] = 32'(longint'(p * 4294967296.0 > 4294967295.0 ? 4294967295.0 : p * 4294967296.0));
      end
    endfunction
  endclass

endpackage
