// prob_lut: acceptance-probability tables, one per lattice copy.
//
// Entry n of copy c is the flip probability (times 2^32) of a site with n
// unsatisfied bonds when copy c is simulated at its own temperature; the host
// precomputes it, e.g. exp(-beta*(12-4n)) for Metropolis, all ones for
// "always". Changing a copy's temperature (parallel tempering) is a rewrite of
// its table. Writes take effect on the next clock; the table of copy `sel` and
// the host read value are combinational. Entries reset to zero (never flip).
// The paper gives the table's role; one table per copy is this design's
// choice.
module prob_lut #(
  parameter int unsigned NCOPIES = sg_pkg::NCOPIES_DEF
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            we,
  input  logic [$clog2(NCOPIES+1)-1:0]    wcopy,
  input  logic [2:0]                      widx,
  input  logic [31:0]                     wdata,
  input  logic [$clog2(NCOPIES+1)-1:0]    sel,
  output logic [sg_pkg::NLUT-1:0][31:0]   table_o,
  input  logic [$clog2(NCOPIES+1)-1:0]    rcopy,
  input  logic [2:0]                      ridx,
  output logic [31:0]                     rdata
);
  logic [sg_pkg::NLUT-1:0][31:0] tbl [NCOPIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCOPIES; c++) tbl[c] <= '0;
    end else if (we && 32'(wcopy) < NCOPIES && 32'(widx) < sg_pkg::NLUT) begin
      tbl[wcopy][widx] <= wdata;
    end
  end

  always_comb begin
    table_o = (32'(sel) < NCOPIES) ? tbl[sel] : '0;
    rdata   = (32'(rcopy) < NCOPIES && 32'(ridx) < sg_pkg::NLUT) ? tbl[rcopy][ridx] : '0;
  end
endmodule
