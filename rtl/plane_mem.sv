// plane_mem: on-chip lattice memory, one word per lattice plane.
//
// DEPTH words of WPP*32 bits. A whole plane is read (registered, one clock
// latency) and written in one clock for the engines; the host writes single
// 32-bit words. A plane write and a word write in the same clock go to the
// plane write. In an FPGA this maps onto many block RAMs side by side; the
// paper says only that all data sit in the embedded memory, so this one-plane
// word organisation is this design's choice. Contents are not reset.
module plane_mem #(
  parameter int unsigned DEPTH = sg_pkg::NCOPIES_DEF * sg_pkg::LZ_DEF,
  parameter int unsigned WPP   = sg_pkg::L_DEF * sg_pkg::L_DEF / 32
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WPP*32-1:0]        rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WPP*32-1:0]        wr_data,
  input  logic                     ww_en,
  input  logic [$clog2(DEPTH)-1:0] ww_addr,
  input  logic [$clog2(WPP+1)-1:0] ww_word,
  input  logic [31:0]              ww_data
);
  logic [WPP*32-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en)      mem[wr_addr] <= wr_data;
    else if (ww_en) mem[ww_addr][ww_word*32 +: 32] <= ww_data;
  end
endmodule
