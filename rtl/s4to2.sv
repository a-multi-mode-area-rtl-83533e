// s4to2: two smallest of four candidates (S4TO2 block).
//
// Two S2 blocks sort (x1,x2) and (x3,x4); two more S2 blocks keep
// min(p1,p4) and min(p2,p3), which for two sorted pairs are the two smallest
// of the four. Works for unsorted inputs too. Outputs unordered.
// Purely combinational. The insides are this design's choice: the design
// description only names S4TO2 and uses it on sorted pairs.
module s4to2
  import polar_pkg::*;
(
  input  cand_t x [4],
  output cand_t y [2]
);
  cand_t p1, p2, p3, p4, n1, n2;
  logic  e1, e2, e3, e4;
  s2 u_a (.a(x[0]), .b(x[1]), .c(p1), .d(p2), .e(e1));
  s2 u_b (.a(x[2]), .b(x[3]), .c(p3), .d(p4), .e(e2));
  s2 u_c (.a(p1), .b(p4), .c(y[0]), .d(n1), .e(e3));
  s2 u_d (.a(p2), .b(p3), .c(y[1]), .d(n2), .e(e4));
endmodule
