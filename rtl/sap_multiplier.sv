// sap_multiplier: a Wallace-tree multiplier guarded by Stochastic Activity
// Prediction (SAP).
//
// Every cycle with in_valid high brings an operand pair (A_t, B_t). In that
// same cycle:
//   * the predictor (sap_predictor) counts the pair's Hamming weight, draws
//     the proxy bit S_t ~ Bernoulli(Z_t/2N) and adds any flip of S to the
//     window's toggle count; sap_low, set from the last complete window of W
//     pairs, says "the multiplier is working lightly";
//   * the safety controller checks, exactly, whether the tree's frozen result
//     is still right (operand stasis, zero operand, stationary-weight mode)
//     and raises isolate_en only if that holds and sap_low is set;
//   * operand isolation either loads the new pair into the Wallace tree or,
//     when isolated, keeps the tree on its held operands so it does not
//     switch;
//   * the output register takes the tree's product, or 0 when the isolation
//     was justified by a zero operand.
// The product is therefore always A_t*B_t: a wrong prediction can only waste
// power, never corrupt a result.
//
// Ports: clk; rst_n (synchronous, active low); in_valid, a, b (unsigned N-bit
// operands), sw_mode (compiler flag: B is the layer's stationary weight),
// tau_th (threshold in toggles per window of W pairs) in; out_valid, product,
// isolated (the product came from a frozen tree), sap_low, arch_valid
// (ArchValidity of the current pair), toggles (proxy flips so far in this
// window) and window_done (pulse as a window closes) out.
// Timing: one cycle of latency, one pair per cycle, no back-pressure; sap_low
// changes only at window boundaries.
// The structure (predictor AND deterministic check, frozen inputs, forwarded
// result) follows the method; the register placement, latency and reset
// behaviour are this design's own.
module sap_multiplier
  import sap_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned W      = W_DEF,
  parameter int unsigned LFSR_W = LFSR_W_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N-1:0]             a,
  input  logic [N-1:0]             b,
  input  logic                     sw_mode,
  input  logic [cnt_width(W)-1:0]  tau_th,
  output logic                     out_valid,
  output logic [2*N-1:0]           product,
  output logic                     isolated,
  output logic                     sap_low,
  output logic                     arch_valid,
  output logic [cnt_width(W)-1:0]  toggles,
  output logic                     window_done
);

  logic                     zero_hit, isolate_en, load;
  logic [N-1:0]             tree_a, tree_b, held_a, held_b;
  logic [2*N-1:0]           tree_p;

  sap_predictor #(.N(N), .W(W), .LFSR_W(LFSR_W)) u_predictor (
    .clk, .rst_n, .valid(in_valid), .a, .b, .tau_th,
    .z(), .s(), .toggles, .window_done, .sap_low
  );

  safety_controller #(.N(N)) u_safety (
    .clk, .rst_n, .valid(in_valid), .a, .b, .held_a, .held_b, .sw_mode,
    .sap_low, .arch_valid, .zero_hit, .isolate_en
  );

  assign load = in_valid && !isolate_en;

  operand_isolation #(.N(N)) u_isolation (
    .clk, .rst_n, .load, .a, .b, .tree_a, .tree_b, .held_a, .held_b
  );

  wallace_multiplier #(.N(N)) u_tree (.a(tree_a), .b(tree_b), .p(tree_p));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      product   <= '0;
      isolated  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      isolated  <= isolate_en;
      if (in_valid) product <= (isolate_en && zero_hit) ? '0 : tree_p;
    end
  end

  // The tree never moves while isolated.
  assert property (@(posedge clk) disable iff (!rst_n)
                   isolate_en |-> (tree_a == held_a && tree_b == held_b));

endmodule
