// s4: four-input sorter, the S4 block of the LC-AML unit.
//
// Level 1 sorts the pairs (x1,x2) and (x3,x4) with two S2 blocks, giving
// p1 <= p2 and p3 <= p4. Level 2 runs four S2 blocks in parallel: (p1,p3)
// gives y1 = min and its flag e13, (p2,p4) gives y4 = max and its flag e24,
// and (p2,p3) and (p1,p4) give the candidates for the middle outputs. Two
// 4-to-1 muxes selected by {e13,e24} then pick y2 and y3:
//   00: p1 min, p4 max -> middle {p2,p3}, sorted by S2(p2,p3)
//   01: p1 min, p2 max -> middle {p3,p4}
//   10: p3 min, p4 max -> middle {p1,p2}
//   11: p3 min, p2 max -> middle {p1,p4}, sorted by S2(p1,p4)
// The critical path is two comparators and one 4-to-1 mux, as stated for S4.
// Outputs are in increasing key order (decreasing reliability). The level-1
// pair minima are also brought out (lo12, lo34) so that the SC datapath can
// share them. Purely combinational.
//
// The six S2 blocks and two 4-to-1 muxes with selects 00..11 follow the S4
// drawing; the exact wiring of each mux input is derived here, not read off it.
module s4
  import polar_pkg::*;
(
  input  cand_t x [4],
  output cand_t y [4],
  output cand_t lo12,
  output cand_t lo34
);
  cand_t p1, p2, p3, p4;
  cand_t min13, max13, min24, max24, min23, max23, min14, max14;
  logic  e12, e34, e13, e24, e23, e14;

  s2 u_l1a (.a(x[0]), .b(x[1]), .c(p1), .d(p2), .e(e12));
  s2 u_l1b (.a(x[2]), .b(x[3]), .c(p3), .d(p4), .e(e34));
  s2 u_l2a (.a(p1), .b(p3), .c(min13), .d(max13), .e(e13));
  s2 u_l2b (.a(p2), .b(p4), .c(min24), .d(max24), .e(e24));
  s2 u_l2c (.a(p2), .b(p3), .c(min23), .d(max23), .e(e23));
  s2 u_l2d (.a(p1), .b(p4), .c(min14), .d(max14), .e(e14));

  always_comb begin
    y[0] = min13;
    y[3] = max24;
    unique case ({e13, e24})
      2'b00: begin y[1] = min23; y[2] = max23; end
      2'b01: begin y[1] = p3;    y[2] = p4;    end
      2'b10: begin y[1] = p1;    y[2] = p2;    end
      default: begin y[1] = min14; y[2] = max14; end
    endcase
  end

  assign lo12 = p1;
  assign lo34 = p3;
endmodule
