// galois_lfsr: Galois linear feedback shift register, the random source for the delay
// given to stable non-critical instructions.
//
// Each enabled cycle the register shifts right by one; when the bit shifted out is 1 the
// tap mask is XORed into the result. The default 16-bit mask 0xB400
// (x^16 + x^14 + x^13 + x^11 + 1) gives the maximal period 2^16 - 1.
//
// Seeding mixes a build-time constant with run time: reset loads SEED, and a reseed pulse
// loads SEED xor reseed_value (the top feeds its free-running cycle counter). A result of
// zero, which would lock the register, is replaced by SEED. The use of a Galois LFSR and a
// seed made of generation time and run-time cycles follow the design; width, polynomial
// and the reseed port are this design's choices.
module galois_lfsr #(
  parameter int               WIDTH = 16,
  parameter logic [WIDTH-1:0] TAPS  = 16'hB400,
  parameter logic [WIDTH-1:0] SEED  = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             reseed,
  input  logic [WIDTH-1:0] reseed_value,
  output logic [WIDTH-1:0] state
);
  logic [WIDTH-1:0] mixed;
  assign mixed = SEED ^ reseed_value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= SEED;
    else if (reseed)  state <= (mixed == '0) ? SEED : mixed;
    else if (en)      state <= (state >> 1) ^ (state[0] ? TAPS : '0);
  end

  initial assert (SEED != '0) else $error("galois_lfsr: SEED must be non-zero");

endmodule
