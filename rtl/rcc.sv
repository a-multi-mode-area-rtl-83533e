// rcc: recursive channel combination (RCC) block of the LC-AML unit.
//
// Given the hard decisions z0..z3 and magnitudes x0..x3 of the four LLRs of a
// half symbol, it returns y0..y15: for each 4-bit sub-symbol value i = (v1 v2
// v3 v4)_2 the LLR-domain metric increment sum_j m_j |alpha_j|, where m_j = 1
// when bit j of the half-symbol code word differs from its hard decision.
// The code word of v is c = v B_4 F^{(x)2}:
//   c0 = v1^v2^v3^v4,  c1 = v3^v4,  c2 = v2^v4,  c3 = v4.
// Datapath, as drawn: for each LLR two muxes give the cost of bit 0 and of
// bit 1 (0 or x_j, chosen by z_j); eight adders form the four costs of the
// pairs (c0,c1) and (c2,c3); a 16-ADDER grid adds one pair cost from each
// group, giving one output per sub-symbol. Tags of the outputs are i.
// Purely combinational.
//
// The mux/adder/16-ADDER structure is the drawn one. The assignment of code
// word bits to the two adder groups, and the index order of the outputs
// (v1 is the MSB of i), are derived here from the polar transform.
module rcc
  import polar_pkg::*;
(
  input  logic [3:0]       z,      // z[j] = 1 when alpha_j < 0
  input  logic [MAG_W-1:0] x [4],  // |alpha_j|
  output cand_t            y [16]
);
  key_t cost [4][2];   // cost[j][b]: penalty of code bit j taking value b
  key_t p01  [4];      // indexed by {c0,c1}
  key_t p23  [4];      // indexed by {c2,c3}

  always_comb begin
    for (int j = 0; j < 4; j++) begin
      cost[j][0] = z[j] ? key_t'(x[j]) : '0;
      cost[j][1] = z[j] ? '0 : key_t'(x[j]);
    end
    for (int k = 0; k < 4; k++) begin
      p01[k] = cost[0][k[1]] + cost[1][k[0]];
      p23[k] = cost[2][k[1]] + cost[3][k[0]];
    end
    for (int i = 0; i < 16; i++) begin
      logic v1, v2, v3, v4;
      logic [1:0] c01, c23;
      v1 = i[3]; v2 = i[2]; v3 = i[1]; v4 = i[0];
      c01 = {v1 ^ v2 ^ v3 ^ v4, v3 ^ v4};
      c23 = {v2 ^ v4, v4};
      y[i].key = p01[c01] + p23[c23];
      y[i].tag = TAG_W'(i);
    end
  end
endmodule
