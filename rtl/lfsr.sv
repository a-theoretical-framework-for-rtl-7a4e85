// lfsr: pseudo-random source for the Bernoulli proxy encoder.
//
// A Fibonacci linear-feedback shift register of LFSR_W bits. Each new bit is
// the XOR of the state bits selected by TAPS and is shifted in at bit 0. When
// en is high the register advances STEPS bits in one clock, so the low STEPS
// bits of consecutive states never share a bit of the m-sequence: the
// encoder can read them as a fresh, near-uniform random number each cycle.
// With the default polynomial x^16+x^14+x^13+x^11+1 the period is 65535 bits.
//
// Ports: clk, rst_n (synchronous, active low, loads SEED), en; state out.
// Timing: state changes on the clock edge after en is sampled high.
// The method calls for an LFSR of O(log n) size; width, polynomial, seed and
// the multi-step advance are this design's own choices.
module lfsr
  import sap_pkg::*;
#(
  parameter int unsigned        LFSR_W = LFSR_W_DEF,
  parameter logic [LFSR_W-1:0]  TAPS   = LFSR_W'(TAPS_DEF),
  parameter logic [LFSR_W-1:0]  SEED   = LFSR_W'(SEED_DEF),
  parameter int unsigned        STEPS  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  output logic [LFSR_W-1:0] state
);

  logic [LFSR_W-1:0] next;

  always_comb begin
    next = state;
    for (int unsigned k = 0; k < STEPS; k++)
      next = {next[LFSR_W-2:0], ^(next & TAPS)};
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= next;
  end

  // An all-zero state would lock the register.
  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");
  assert property (@(posedge clk) disable iff (!rst_n) state != '0);

endmodule
