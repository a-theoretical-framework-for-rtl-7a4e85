// safety_controller: the deterministic half of SAP. It decides whether
// freezing the multiplier is provably exact, and ANDs that with SAP_low.
//
//   isolate_en = valid & SAP_low & ArchValidity
//   ArchValidity = zero masking  (A_t == 0 or B_t == 0)
//                | operand stasis (A_t == held A and B_t == held B)
//                | stationary-weight mode (A_t == held A, B promised unchanged)
//
// "held" operands are those the Wallace tree is currently frozen on, so under
// stasis the frozen tree output is exactly A_t*B_t; under zero masking the
// result is 0 whatever the tree holds. SAP_low alone can never isolate, so a
// wrong prediction costs a missed saving, never a wrong product.
//
// The method states stasis against the previous cycle's operands; comparing
// with the held operands is this design's choice (equal except right after a
// zero-masked cycle, where only this form is exact). The method also lists
// compiler-flagged stationary-weight mode as a condition by itself; here it
// only replaces the weight comparison, because a changing activation changes
// the product. An assertion checks the flag's promise.
//
// Ports: valid, a, b, held_a, held_b, sw_mode, sap_low in; arch_valid,
// zero_hit, isolate_en out. Purely combinational; the clock and reset only
// serve the assertion.
module safety_controller
  import sap_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  input  logic [N-1:0]  held_a,
  input  logic [N-1:0]  held_b,
  input  logic          sw_mode,
  input  logic          sap_low,
  output logic          arch_valid,
  output logic          zero_hit,
  output logic          isolate_en
);

  logic a_same, b_same;

  always_comb begin
    a_same     = (a == held_a);
    b_same     = (b == held_b);
    zero_hit   = (a == '0) || (b == '0);
    arch_valid = zero_hit || (a_same && (b_same || sw_mode));
    isolate_en = valid && sap_low && arch_valid;
  end

  // Stationary-weight mode promises that the weight operand does not change.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (valid && sw_mode && sap_low && !zero_hit && a_same) |-> b_same)
    else $error("safety_controller: weight changed in stationary-weight mode");

endmodule
