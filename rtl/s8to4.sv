// s8to4: four smallest of eight candidates, the S8TO4 block.
//
// Two S4 blocks sort i1..i4 and i5..i8 into ya and yb (increasing). Four S2
// blocks then compare ya[k] with yb[3-k] and keep the smaller of each pair:
// for two sorted lists this half-cleaner step yields exactly the four smallest
// of all eight, in no particular order. Purely combinational.
//
// The internal S4 results (ya, yb) and their level-1 pair minima are exposed
// for reuse by the MODE-2 and MODE-1 datapaths that share this sorter row.
// Two S4 plus four S2 is the structure drawn for S8TO4; the pairing of S4
// outputs at the S2 inputs is the standard merge and is this design's reading.
module s8to4
  import polar_pkg::*;
(
  input  cand_t i  [8],
  output cand_t o  [4],
  output cand_t ya [4],
  output cand_t yb [4],
  output cand_t lo [4]    // minima of (i1,i2), (i3,i4), (i5,i6), (i7,i8)
);
  cand_t xa [4], xb [4];
  cand_t unused_d [4];
  logic  unused_e [4];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      xa[k] = i[k];
      xb[k] = i[k+4];
    end
  end

  s4 u_s4a (.x(xa), .y(ya), .lo12(lo[0]), .lo34(lo[1]));
  s4 u_s4b (.x(xb), .y(yb), .lo12(lo[2]), .lo34(lo[3]));

  for (genvar k = 0; k < 4; k++) begin : g_merge
    s2 u_s2 (.a(ya[k]), .b(yb[3-k]), .c(o[k]), .d(unused_d[k]), .e(unused_e[k]));
  end
endmodule
