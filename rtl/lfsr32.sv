// lfsr32 -- 32-bit linear feedback shift register, the per-neuron PRNG.
//
// Every neuron owns one of these so that the random numbers of different
// neurons are not correlated; each instance is loaded with its own non-zero
// SEED at reset. The register shifts left by one place per enabled clock and
// shifts in the XOR of bits 31, 21, 1 and 0 (polynomial
// x^32 + x^22 + x^2 + x + 1, maximal length, period 2^32 - 1). The 32-bit
// length and the one-LFSR-per-neuron arrangement follow the original design;
// the polynomial, the shift direction and the seeding are this design's
// choices.
//
// Interface: `en` advances the register; `state` is the current 32-bit value,
// registered, valid one clock after reset is released.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  output logic [31:0] state
);
  logic feedback;
  assign feedback = state[31] ^ state[21] ^ state[1] ^ state[0];

  always_ff @(posedge clk) begin
    if (rst)     state <= (SEED == 32'd0) ? 32'h1 : SEED;
    else if (en) state <= {state[30:0], feedback};
  end

  initial assert (SEED != 32'd0) else $error("lfsr32: a zero seed locks the LFSR; 1 is used");
endmodule
