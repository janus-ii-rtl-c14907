// sg_pkg: sizes, host address map and command codes shared by the spin-glass
// Simulation Processor (SP), the Input-Output Processor (IOP) and the
// Processing Board.
//
// The lattice is held as planes of L x L sites; an SP keeps LZ planes for
// each of NCOPIES lattice copies. Each site needs 4 bits: its spin and the
// three couplings to its +x, +y and +z neighbours. The defaults (64^3
// lattices, 30 copies, 2048 engines, 16 SPs, 8 lanes per link) follow the
// paper's numbers; the link word width, the host word width and the address
// map are this design's own choices.
package sg_pkg;

  // ---- lattice and engine sizes -----------------------------------------
  localparam int unsigned L_DEF       = 64;  // plane edge (64^3 lattices)
  localparam int unsigned LZ_DEF      = 64;  // planes per copy held by one SP
  localparam int unsigned NCOPIES_DEF = 30;  // lattice copies per SP
  localparam int unsigned NLUT        = 7;   // LUT entries: 0..6 unsatisfied bonds
  localparam int unsigned NOUT_DEF    = 16;  // random numbers per wheel per clock

  // ---- links ----------------------------------------------------------------
  localparam int unsigned NPORT       = 6;   // x+, x-, y+, y-, z+, z-
  localparam int unsigned LANES       = 8;   // physical lanes per logical link
  localparam int unsigned LANE_BITS   = 16;  // bits one lane moves per core clock
  localparam int unsigned LINK_W_DEF  = LANES * LANE_BITS;

  localparam int unsigned P_XP = 0, P_XM = 1, P_YP = 2, P_YM = 3, P_ZP = 4, P_ZM = 5;

  // ---- board --------------------------------------------------------------
  localparam int unsigned NSP         = 16;  // SPs on one Processing Board
  localparam int unsigned GRID        = 4;   // 4 x 4 toroidal array

  // ---- host access to one SP: 32-bit word address ---------------------------
  //   [31:28] region, [27:0] word offset inside the region
  typedef enum logic [3:0] {
    R_SPIN = 4'd0,  // spins: (copy*LZ + z)*WPP + word
    R_COUP = 4'd1,  // couplings: ((copy*LZ + z)*3 + field)*WPP + word, field 0=x 1=y 2=z
    R_LUT  = 4'd2,  // acceptance table: copy*8 + index
    R_JZG  = 4'd3,  // z couplings below plane 0 (sliced mode): copy*WPP + word
    R_CTRL = 4'd4   // control and status registers
  } region_e;

  // control registers (offsets in R_CTRL)
  localparam logic [27:0] C_CMD     = 28'h000; // write: starts a command
  localparam logic [27:0] C_NSWEEP  = 28'h001; // sweeps per copy for CMD_RUN
  localparam logic [27:0] C_SEED    = 28'h002; // seed used by CMD_SEED
  localparam logic [27:0] C_CONFIG  = 28'h003; // [0] sliced, [6:4] up port, [10:8] down port
  localparam logic [27:0] C_STATUS  = 28'h004; // read: [0] busy
  localparam logic [27:0] C_STALLS  = 28'h005; // read: clocks spent waiting for halo planes
  localparam logic [27:0] C_PASSES  = 28'h006; // read: passes run since reset
  localparam logic [27:0] C_ENERGY  = 28'h100; // read: +copy, unsatisfied-bond count

  // CMD word: [3:0] opcode, [15:8] first copy, [23:16] last copy
  typedef enum logic [3:0] {
    CMD_NOP     = 4'd0,
    CMD_SEED    = 4'd1,  // refill every random wheel from C_SEED
    CMD_RUN     = 4'd2,  // copies first..last: C_NSWEEP sweeps, then an energy pass
    CMD_MEASURE = 4'd3   // copies first..last: energy pass only
  } cmd_e;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } host_req_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] rdata;
  } host_rsp_t;

  // IOP target field: 0..15 one SP, 16 all SPs (writes only), 17 the IOP itself
  localparam logic [4:0] T_BCAST = 5'd16;
  localparam logic [4:0] T_IOP   = 5'd17;

  // seed of random wheel w: xorshift32 stream started at seed ^ (w * GOLDEN)
  localparam logic [31:0] GOLDEN = 32'h9E37_79B9;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

endpackage
