// operand_isolation: freezes the Wallace-tree inputs.
//
// Two N-bit registers keep the last operands loaded into the tree. When load
// is high (a valid pair arrives and the safety controller does not isolate)
// the arriving operands go straight to the tree and are recorded; otherwise
// the tree keeps seeing the held operands, so none of its nodes switch.
//
// Ports: clk, rst_n (synchronous; held operands to 0), load, a, b in;
// tree_a, tree_b (combinational mux), held_a, held_b (registers) out.
// Freezing the inputs is the method's; the register-plus-mux form is this
// design's own.
module operand_isolation
  import sap_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  output logic [N-1:0]  tree_a,
  output logic [N-1:0]  tree_b,
  output logic [N-1:0]  held_a,
  output logic [N-1:0]  held_b
);

  assign tree_a = load ? a : held_a;
  assign tree_b = load ? b : held_b;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      held_a <= '0;
      held_b <= '0;
    end else if (load) begin
      held_a <= a;
      held_b <= b;
    end
  end

endmodule
