// wallace_multiplier: unsigned N x N Wallace-tree multiplier.
//
// The N^2 partial products p_ij = a_i & b_j are sorted into 2N columns by
// weight i+j. Each reduction stage cuts every column into groups of three
// bits, each reduced by a full adder (3:2 compressor: sum stays in the
// column, carry goes one column up), plus a half adder on a leftover pair;
// a single leftover bit passes through. Stages repeat until no column holds
// more than two bits, which takes O(log N) stages (four for N = 8). The two
// remaining rows are added by one carry-propagate adder.
//
// The schedule is worked out at elaboration by constant functions:
// col_h(s, c) is the height of column c before stage s. Within a column of
// stage s+1 the bits are ordered: full-adder sums, the half-adder sum, the
// pass-through bit, then the carries arriving from column c-1.
//
// Ports: a, b (N bits) in; p (2N bits) out. Purely combinational.
// The tree structure follows the method's description of a carry-save
// cascade ending in two carry-propagate inputs; the grouping rule, unsigned
// operands and the final '+' adder are this design's own choices.
module wallace_multiplier
  import sap_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic [N-1:0]    a,
  input  logic [N-1:0]    b,
  output logic [2*N-1:0]  p
);

  localparam int NC   = 2 * N;
  localparam int MAXH = N + 2;
  localparam int MAXC = 160;

  // Height of column c in the partial-product matrix.
  function automatic int h0(int c);
    int lo, hi;
    lo = (c > int'(N) - 1) ? c - int'(N) + 1 : 0;
    hi = (c < int'(N) - 1) ? c : int'(N) - 1;
    return (c >= 2 * int'(N) - 1) ? 0 : hi - lo + 1;
  endfunction

  // Height of column c before stage s.
  function automatic int col_h(int s, int c);
    int h [MAXC];
    int nh[MAXC];
    for (int i = 0; i < NC; i++) h[i] = h0(i);
    for (int st = 0; st < s; st++) begin
      for (int i = 0; i < NC; i++) begin
        nh[i] = h[i] / 3 + ((h[i] % 3) != 0 ? 1 : 0);
        if (i > 0) nh[i] += h[i-1] / 3 + ((h[i-1] % 3) == 2 ? 1 : 0);
      end
      for (int i = 0; i < NC; i++) h[i] = nh[i];
    end
    return (c >= 0 && c < NC) ? h[c] : 0;
  endfunction

  // Number of reduction stages until every column holds at most two bits.
  function automatic int n_stages();
    int s, mx;
    for (s = 0; s < 64; s++) begin
      mx = 0;
      for (int c = 0; c < NC; c++) if (col_h(s, c) > mx) mx = col_h(s, c);
      if (mx <= 2) return s;
    end
    return s;
  endfunction

  localparam int NS = n_stages();

  // g_lv[s].bits[c][k]: bit k of column c before stage s. Each level has its
  // own array, so no array is both read and written by the same stage.
  for (genvar s = 0; s <= NS; s++) begin : g_lv
    logic bits [NC][MAXH];

    if (s == 0) begin : g_pp
      // Stage 0: partial products p_ij = a_i & b_j in column i+j.
      for (genvar c = 0; c < NC; c++) begin : g_col
        localparam int LO = (c > int'(N) - 1) ? c - int'(N) + 1 : 0;
        for (genvar k = 0; k < MAXH; k++) begin : g_bit
          if (k < h0(c)) begin : g_p
            assign bits[c][k] = a[LO + k] & b[c - LO - k];
          end else begin : g_z
            assign bits[c][k] = 1'b0;
          end
        end
      end
    end else begin : g_red
      // Stage s-1 reduces level s-1 into this level.
      for (genvar c = 0; c < NC; c++) begin : g_col
        localparam int H  = col_h(s - 1, c);
        localparam int FA = H / 3;
        localparam int HA = (H % 3 == 2) ? 1 : 0;
        localparam int PS = (H % 3 == 1) ? 1 : 0;
        localparam int HN = col_h(s, c);
        // Where this column's carries land in column c+1 of this level.
        localparam int HU = col_h(s - 1, c + 1);
        localparam int CO = HU / 3 + ((HU % 3) != 0 ? 1 : 0);

        for (genvar k = 0; k < FA; k++) begin : g_fa
          logic x, y, z;
          assign x = g_lv[s-1].bits[c][3*k];
          assign y = g_lv[s-1].bits[c][3*k+1];
          assign z = g_lv[s-1].bits[c][3*k+2];
          assign bits[c][k] = x ^ y ^ z;
          // The top column's carry would weigh 2^(2N), beyond any product
          // of two N-bit operands: it is always zero and is not built.
          if (c + 1 < NC) begin : g_c
            assign bits[c+1][CO+k] = (x & y) | (x & z) | (y & z);
          end
        end
        if (HA == 1) begin : g_ha
          logic x, y;
          assign x = g_lv[s-1].bits[c][3*FA];
          assign y = g_lv[s-1].bits[c][3*FA+1];
          assign bits[c][FA] = x ^ y;
          if (c + 1 < NC) begin : g_c
            assign bits[c+1][CO+FA] = x & y;
          end
        end
        if (PS == 1) begin : g_ps
          assign bits[c][FA] = g_lv[s-1].bits[c][3*FA];
        end
        for (genvar k = HN; k < MAXH; k++) begin : g_z
          assign bits[c][k] = 1'b0;
        end
      end
    end
  end

  // Final carry-propagate addition of the two remaining rows.
  logic [NC-1:0] row0, row1;
  for (genvar c = 0; c < NC; c++) begin : g_rows
    assign row0[c] = g_lv[NS].bits[c][0];
    assign row1[c] = g_lv[NS].bits[c][1];
  end

  assign p = row0 + row1;

  initial assert (NC <= MAXC && N >= 2) else $error("wallace_multiplier: N out of range");

endmodule
