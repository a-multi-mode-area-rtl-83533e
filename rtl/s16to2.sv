// s16to2: two smallest of 16 candidates (S16TO2 block of MLD_S1_q2).
//
// A tree of seven S4TO2 blocks: four on the inputs (16 -> 8), two on their
// results (8 -> 4) and one at the root (4 -> 2). Outputs unordered. Purely
// combinational. The design description names S16TO2 only; the tree is this
// design's choice, built like S32TO4 is built from S8TO4.
module s16to2
  import polar_pkg::*;
(
  input  cand_t i [16],
  output cand_t o [2]
);
  cand_t l1 [8];
  cand_t l2 [4];
  for (genvar g = 0; g < 4; g++) begin : g_l1
    cand_t x [4];
    cand_t y [2];
    for (genvar k = 0; k < 4; k++) begin : g_in
      assign x[k] = i[4*g+k];
    end
    s4to2 u (.x(x), .y(y));
    assign l1[2*g]   = y[0];
    assign l1[2*g+1] = y[1];
  end
  for (genvar g = 0; g < 2; g++) begin : g_l2
    cand_t x [4];
    cand_t y [2];
    for (genvar k = 0; k < 4; k++) begin : g_in
      assign x[k] = l1[4*g+k];
    end
    s4to2 u (.x(x), .y(y));
    assign l2[2*g]   = y[0];
    assign l2[2*g+1] = y[1];
  end
  s4to2 u_root (.x(l2), .y(o));
endmodule
