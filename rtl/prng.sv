// prng: 16-bit pseudo-random number generator.
//
// The processor uses random numbers in three places: optional noise added to
// the membrane potential, stochastic rounding of the decays, and stochastic
// rounding of the weight updates. The kind of generator is this
// implementation's choice: a Galois LFSR with the maximal-length polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (period 65535). The state advances by one step
// in every cycle where `en` is high; `rnd` is the current state. Reset loads
// SEED, which must be non-zero.
module prng #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= {1'b0, rnd[15:1]} ^ (rnd[0] ? 16'hB400 : 16'h0000);
  end
endmodule
