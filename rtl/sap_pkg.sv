// sap_pkg: constants and width helpers shared by the Stochastic Activity
// Prediction (SAP) multiplier.
//
// An SAP multiplier watches the combined Hamming weight Z_t = HW(A_t)+HW(B_t)
// of each operand pair, turns it into one random proxy bit
// S_t ~ Bernoulli(Z_t/(2n)), counts how often that bit flips over a window of
// W operand pairs, and freezes the multiplier inputs when the flip count is
// low and a deterministic check proves that the held result is still exact.
//
// The operand width (n = 8, INT8) and the window (W = 256, one 16x16
// activation tile) are the values the analysis is built around. The LFSR
// width, polynomial and seed are this design's own choice: the method only
// asks for an LFSR whose low bits are close to uniform.
package sap_pkg;

  // Operand width n in bits (INT8).
  localparam int unsigned N_DEF = 8;
  // Observation window W in operand pairs.
  localparam int unsigned W_DEF = 256;

  // LFSR: Fibonacci form, x^16 + x^14 + x^13 + x^11 + 1 (maximal length).
  localparam int unsigned      LFSR_W_DEF = 16;
  localparam logic [15:0]      TAPS_DEF   = 16'hB400;
  localparam logic [15:0]      SEED_DEF   = 16'hACE1;

  // Width of Z_t, which ranges over 0 .. 2n.
  function automatic int unsigned z_width(int unsigned n);
    return $clog2(2 * n + 1);
  endfunction

  // Width of the random number R_t, uniform over 0 .. 2n-1 (2n a power of two).
  function automatic int unsigned r_width(int unsigned n);
    return $clog2(2 * n);
  endfunction

  // Width of a toggle count over one window (at most W-1 toggles).
  function automatic int unsigned cnt_width(int unsigned w);
    return $clog2(w);
  endfunction

endpackage
