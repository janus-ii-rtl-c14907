// engine_array: the NP = L*L/2 spin-flip engines of one SP.
//
// In one clock the array updates every site of one checkerboard colour c of
// lattice plane z (colour of site (x,y,z) is (x+y+z) mod 2). Sites of the
// other colour keep their value. Inputs are the spin planes z-1, z, z+1, the
// three coupling planes of plane z (bond to +x, +y, +z) and the +z coupling
// plane of plane z-1. Bit y*L+x of a plane is site (x,y); x and y wrap
// around (periodic). Engine e handles row y = e / (L/2), column
// x = 2*(e mod (L/2)) + ((y+z+c) mod 2), and uses random number e.
// nu_sum is the number of unsatisfied bonds of the updated colour, counted
// before the move; summed over a colour-0 pass it is the number of
// unsatisfied bonds of the whole lattice, E = 2*nu_sum - 3*N.
//
// The engine count (~2000 per SP, one spin per engine per clock) is the
// paper's; the plane-per-clock mapping is this design's choice. Purely
// combinational.
module engine_array #(
  parameter int unsigned L = sg_pkg::L_DEF
) (
  input  logic [L*L-1:0]                s_prev,
  input  logic [L*L-1:0]                s_cur,
  input  logic [L*L-1:0]                s_next,
  input  logic [L*L-1:0]                jx,
  input  logic [L*L-1:0]                jy,
  input  logic [L*L-1:0]                jz,
  input  logic [L*L-1:0]                jz_prev,
  input  logic                          colour,
  input  logic                          zpar,    // z mod 2
  input  logic [L*L/2*32-1:0]           rnd,
  input  logic [sg_pkg::NLUT-1:0][31:0] lut,
  output logic [L*L-1:0]                s_new,
  output logic [$clog2(L*L*3+1)-1:0]    nu_sum
);
  localparam int unsigned NP = L*L/2;
  localparam int unsigned SW = $clog2(L*L*3+1);

  logic [NP-1:0]       e_s, e_new;
  logic [NP-1:0][5:0]  e_nb, e_j;
  logic [NP-1:0][2:0]  e_nu;
  int unsigned         e_idx [NP];

  always_comb begin
    for (int e = 0; e < NP; e++) begin
      int y, x, xp, xm, yp, ym;
      y  = e / (L/2);
      x  = 2*(e % (L/2)) + ((y + int'(zpar) + int'(colour)) & 1);
      xp = (x + 1) % L;  xm = (x + L - 1) % L;
      yp = (y + 1) % L;  ym = (y + L - 1) % L;
      e_idx[e] = y*L + x;
      e_s[e]   = s_cur[y*L + x];
      e_nb[e]  = {s_prev[y*L+x], s_next[y*L+x], s_cur[ym*L+x], s_cur[yp*L+x],
                  s_cur[y*L+xm], s_cur[y*L+xp]};
      e_j[e]   = {jz_prev[y*L+x], jz[y*L+x], jy[ym*L+x], jy[y*L+x],
                  jx[y*L+xm], jx[y*L+x]};
    end
  end

  for (genvar e = 0; e < NP; e++) begin : g_eng
    spin_engine u_eng (
      .s(e_s[e]), .nb(e_nb[e]), .j(e_j[e]), .rnd(rnd[e*32 +: 32]), .lut(lut),
      .s_new(e_new[e]), .nu(e_nu[e])
    );
  end

  always_comb begin
    s_new  = s_cur;
    nu_sum = '0;
    for (int e = 0; e < NP; e++) begin
      s_new[e_idx[e]] = e_new[e];
      nu_sum          = nu_sum + SW'(e_nu[e]);
    end
  end
endmodule
