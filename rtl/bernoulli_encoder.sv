// bernoulli_encoder: turns the operand density Z_t into one proxy bit
// S_t ~ Bernoulli(Z_t / 2N).
//
// R_t, the low log2(2N) bits of the LFSR state, is close to uniform over
// 0 .. 2N-1, so S_t = (R_t < Z_t) is 1 with probability Z_t/(2N): the
// calibrated Bernoulli encoding the SAP method prescribes. A sparse operand
// pair gives a coin that mostly shows 0; a dense pair gives a near-fair coin.
// s_comb is S_t in the arrival cycle; s_q is the flip-flop that keeps S of the
// last valid pair, which the toggle monitor compares against.
//
// Ports: clk, rst_n (synchronous, clears s_q), valid, z, rnd in; s_comb,
// s_q out. Timing: s_comb is combinational, s_q updates at the edge after a
// valid cycle. 2N must be a power of two. The comparator form is this
// design's; the probability it realises is the method's.
module bernoulli_encoder
  import sap_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned LFSR_W = LFSR_W_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid,
  input  logic [z_width(N)-1:0]  z,
  input  logic [LFSR_W-1:0]      rnd,
  output logic                   s_comb,
  output logic                   s_q
);

  localparam int unsigned RW = r_width(N);
  localparam int unsigned ZW = z_width(N);

  logic [RW-1:0] r;
  assign r      = rnd[RW-1:0];
  assign s_comb = ZW'(r) < z;

  always_ff @(posedge clk) begin
    if (!rst_n)     s_q <= 1'b0;
    else if (valid) s_q <= s_comb;
  end

  initial assert ((1 << RW) == 2 * N && RW <= LFSR_W)
    else $error("bernoulli_encoder: 2N must be a power of two no wider than the LFSR");

endmodule
