// nonce_rng: source of the random number N_k that the probe sends to the CCS
// in Phase I of the two-way authentication.
//
// A free-running 32-bit Galois LFSR (polynomial x^32+x^22+x^2+x+1, maximal
// length) steps every clock. Because the moment of a host request is not tied
// to the probe clock, the value sampled at that moment serves as the nonce;
// `take` additionally mixes in `entropy_in` (for example the low bits of an
// ADC reading) so that the sequence does not restart identically after reset.
// The paper names a "random number generator" and no more; the LFSR and the
// mixing are this design's choice and are not cryptographically strong.
// Interface: `nonce` is valid every cycle and never zero.
module nonce_rng #(
  parameter int unsigned       W    = 32,
  parameter logic [31:0]       SEED = 32'hACE1_2468
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         take,        // a nonce is being consumed this cycle
  input  logic [W-1:0] entropy_in,  // extra bits folded in on `take`
  output logic [W-1:0] nonce
);
  localparam logic [31:0] TAPS = 32'h8020_0003;

  logic [31:0] state, stepped;

  always_comb begin
    stepped = state[0] ? ((state >> 1) ^ TAPS) : (state >> 1);
    if (take) stepped = stepped ^ 32'(entropy_in);
    if (stepped == '0) stepped = SEED;   // never lock up in the all-zero state
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) state <= SEED;
    else        state <= stepped;

  assign nonce = W'(state);
endmodule
