// popcount: combined Hamming weight of an operand pair, Z_t = HW(A) + HW(B).
//
// This is the front of the SAP predictor: it looks at the operands in the
// same cycle they arrive, before the multiplier does anything with them.
// Each operand is counted by a balanced tree of adders (a loop of one-bit
// additions that synthesis turns into an adder tree), and the two counts are
// added. The result lies in 0 .. 2N and is purely combinational.
//
// Ports: a, b (N bits each) in; z (clog2(2N+1) bits) out. No clock.
// The function is the paper's; the adder arrangement is this design's own.
module popcount
  import sap_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic [N-1:0]            a,
  input  logic [N-1:0]            b,
  output logic [z_width(N)-1:0]   z
);

  localparam int unsigned ZW = z_width(N);

  always_comb begin
    logic [ZW-1:0] ha, hb;
    ha = '0;
    hb = '0;
    for (int unsigned i = 0; i < N; i++) begin
      ha = ha + ZW'(a[i]);
      hb = hb + ZW'(b[i]);
    end
    z = ha + hb;
  end

endmodule
