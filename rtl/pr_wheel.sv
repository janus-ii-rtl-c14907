// pr_wheel: Parisi-Rapuano pseudo-random generator producing NOUT 32-bit
// numbers per clock.
//
// The generator keeps the last 61 words of the sequence
//   I(k) = I(k-24) + I(k-55)  (mod 2^32),   R(k) = I(k) xor I(k-61)
// in a shift register h[], h[0] being the newest, I(k-1). Since NOUT <= 24,
// all NOUT new words I(k)..I(k+NOUT-1) depend only on stored history, so they
// are computed side by side and shifted in together when `adv` is high. Each
// output needs three stored words, matching the paper's remark that the
// generator reads three 32-bit numbers per random value. The paper names the
// generator only; the recurrence above is the published Parisi-Rapuano one.
// Seeding is this design's choice: while `load` is high, `load_data` is
// shifted into h[0] one word per clock (61 loads fill the wheel).
//
// Timing: rnd[i] is combinational from the state and equals R(k+i); it moves
// on by NOUT values in the clock where adv is high.
module pr_wheel #(
  parameter int unsigned NOUT = sg_pkg::NOUT_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adv,
  input  logic                 load,
  input  logic [31:0]          load_data,
  output logic [NOUT*32-1:0]   rnd
);
  localparam int unsigned HW = 61;

  logic [31:0] h [HW];
  logic [31:0] inew [NOUT];

  always_comb begin
    for (int i = 0; i < NOUT; i++) begin
      inew[i]          = h[23-i] + h[54-i];
      rnd[i*32 +: 32]  = inew[i] ^ h[60-i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < HW; j++) h[j] <= '0;
    end else if (load) begin
      h[0] <= load_data;
      for (int j = 1; j < HW; j++) h[j] <= h[j-1];
    end else if (adv) begin
      for (int j = 0; j < HW; j++) begin
        if (j < NOUT) h[j] <= inew[NOUT-1-j];
        else          h[j] <= h[j-NOUT];
      end
    end
  end

  initial assert (NOUT >= 1 && NOUT <= 24)
    else $error("pr_wheel: NOUT must be 1..24 so outputs depend only on history");

endmodule
