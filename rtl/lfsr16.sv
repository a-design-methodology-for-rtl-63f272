// lfsr16: 16-bit Galois linear-feedback shift register, the random source of the
// stochastic synaptic release in the astrocyte.
//
// Polynomial x^16 + x^14 + x^13 + x^11 + 1 (taps 16'hB400), maximal length 65535.
// The register loads SEED at reset (a zero seed is replaced by 1) and advances by one
// step on every cycle in which `adv` is high. `rnd` is the current register value.
// The paper does not say how release probabilities are sampled; this generator is a
// choice of this design.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adv,
  output logic [15:0] rnd
);
  localparam logic [15:0] TAPS = 16'hB400;
  localparam logic [15:0] SEED_NZ = (SEED == 16'h0) ? 16'h0001 : SEED;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   rnd <= SEED_NZ;
    else if (adv) rnd <= rnd[0] ? ((rnd >> 1) ^ TAPS) : (rnd >> 1);
  end
endmodule
