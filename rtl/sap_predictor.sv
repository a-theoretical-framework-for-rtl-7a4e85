// sap_predictor: the probabilistic half of SAP, from operands to SAP_low.
//
// popcount gives Z_t = HW(A_t)+HW(B_t); the LFSR-driven Bernoulli encoder
// turns Z_t into the proxy bit S_t ~ Bernoulli(Z_t/2N); the toggle monitor
// counts flips of S over W valid operand pairs and sets sap_low when the
// count is below tau_th. This replaces watching the O(n^2) internal nodes of
// the multiplier with watching a single wire. The chain is the method's; the
// LFSR advancing only on valid cycles is this design's choice.
//
// Ports: clk, rst_n, valid, a, b, tau_th in; z, s (combinational, this
// cycle), toggles, window_done, sap_low (registered) out. sap_low reflects
// the last complete window and therefore predicts the current one.
module sap_predictor
  import sap_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned W      = W_DEF,
  parameter int unsigned LFSR_W = LFSR_W_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid,
  input  logic [N-1:0]             a,
  input  logic [N-1:0]             b,
  input  logic [cnt_width(W)-1:0]  tau_th,
  output logic [z_width(N)-1:0]    z,
  output logic                     s,
  output logic [cnt_width(W)-1:0]  toggles,
  output logic                     window_done,
  output logic                     sap_low
);

  logic [LFSR_W-1:0] rnd;
  logic              s_q;

  popcount #(.N(N)) u_popcount (.a, .b, .z);

  lfsr #(
    .LFSR_W(LFSR_W),
    .TAPS  (LFSR_W'(TAPS_DEF)),
    .SEED  (LFSR_W'(SEED_DEF)),
    .STEPS (r_width(N))
  ) u_lfsr (.clk, .rst_n, .en(valid), .state(rnd));

  bernoulli_encoder #(.N(N), .LFSR_W(LFSR_W)) u_encoder (
    .clk, .rst_n, .valid, .z, .rnd, .s_comb(s), .s_q
  );

  toggle_monitor #(.W(W)) u_monitor (
    .clk, .rst_n, .valid, .s, .s_prev(s_q), .tau_th, .toggles, .sap_low, .window_done
  );

endmodule
