// aia_lfsr: 32-bit random-bit source of the Knuth-Yao sampler.
//
// A Galois linear feedback shift register with the maximal-length polynomial
// x^32 + x^22 + x^2 + x + 1. Bit 0 is the random bit offered to the sampler;
// `step` advances the register by one position (one bit consumed). Writing
// the SU.seed CSR loads `seed` through `load`; a zero seed, which would lock
// the register, is replaced by 1. The sampler taking its random bits from an
// LFSR seeded through SU.seed is published; the width follows the 32-bit
// SU.seed field, and the polynomial is this design's choice.
// Timing: `rbit` is valid in the same cycle; `load` wins over `step`.
module aia_lfsr #(
  parameter int unsigned WIDTH = 32,
  parameter logic [WIDTH-1:0] TAPS = 32'h8020_0003,
  parameter logic [WIDTH-1:0] RESET_SEED = 32'h1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic             step,
  output logic             rbit
);

  logic [WIDTH-1:0] state;

  assign rbit = state[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= RESET_SEED;
    end else if (load) begin
      state <= (seed == '0) ? WIDTH'(1) : seed;
    end else if (step) begin
      state <= (state >> 1) ^ (state[0] ? TAPS : '0);
    end
  end

endmodule
