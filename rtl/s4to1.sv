// s4to1: smallest of four candidates (S4TO1 block of MLD_S1_q1).
//
// Three S2 blocks in a two-level tree. Purely combinational. The design
// description names S4TO1 only; the tree is this design's choice.
module s4to1
  import polar_pkg::*;
(
  input  cand_t x [4],
  output cand_t y
);
  cand_t m01, m23, n01, n23, n;
  logic  e1, e2, e3;
  s2 u_a (.a(x[0]), .b(x[1]), .c(m01), .d(n01), .e(e1));
  s2 u_b (.a(x[2]), .b(x[3]), .c(m23), .d(n23), .e(e2));
  s2 u_c (.a(m01),  .b(m23),  .c(y),   .d(n),   .e(e3));
endmodule
