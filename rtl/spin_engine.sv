// spin_engine: one Metropolis (or heat-bath) spin-flip engine.
//
// Spins and couplings are bits: sigma = (1+S)/2, j = (1+J)/2. A bond is
// satisfied (J*Si*Sj = +1) when j xor si xor sj = 1, so the six xors of the
// site with its neighbours give six "unsatisfied" bits whose sum nu (0..6)
// fixes the energy change of a flip, dE = 12 - 4*nu. nu points into the
// acceptance table; the spin flips when the fresh random number is below the
// selected entry. An all-ones entry means "always flip" (so Metropolis moves
// with dE <= 0, nu >= 3, are always taken). The xor / bit-sum / table /
// compare structure is the paper's; the entry encoding and the all-ones rule
// are this design's choices.
//
// Purely combinational; one update per clock when used in a pipeline.
module spin_engine (
  input  logic                          s,      // current spin bit
  input  logic [5:0]                    nb,     // neighbour spins
  input  logic [5:0]                    j,      // couplings to those neighbours
  input  logic [31:0]                   rnd,    // uniform random number
  input  logic [sg_pkg::NLUT-1:0][31:0] lut,    // flip probability * 2^32 per nu
  output logic                          s_new,
  output logic [2:0]                    nu      // unsatisfied bonds before the move
);
  logic [5:0]  unsat;
  logic [31:0] thr;
  logic        flip;

  always_comb begin
    unsat = ~(j ^ nb ^ {6{s}});
    nu    = 3'(unsat[0]) + 3'(unsat[1]) + 3'(unsat[2])
          + 3'(unsat[3]) + 3'(unsat[4]) + 3'(unsat[5]);
    thr   = lut[nu];
    flip  = (thr == '1) || (rnd < thr);
    s_new = s ^ flip;
  end
endmodule
