// s16to4: four smallest of 16 candidates, the stage-2 qL-to-L sorter of the
// MODE-4 path (q = 4, L = 4) and the S16TO4 block of MM-LC-AML.
//
// Three S8TO4 blocks: two on the halves (16 -> 8) and one on their results
// (8 -> 4). Outputs are unordered. Purely combinational. The design
// description states that a 16-to-4 sort consists of three 8-to-4 sorts; the
// tree arrangement is this design's reading of that sentence.
module s16to4
  import polar_pkg::*;
(
  input  cand_t i [16],
  output cand_t o [4]
);
  cand_t lvl1 [8];

  for (genvar g = 0; g < 2; g++) begin : g_l1
    cand_t in8 [8];
    cand_t o4 [4];
    cand_t ya [4], yb [4], lo [4];
    for (genvar k = 0; k < 8; k++) begin : g_in
      assign in8[k] = i[8*g+k];
    end
    s8to4 u (.i(in8), .o(o4), .ya(ya), .yb(yb), .lo(lo));
    for (genvar k = 0; k < 4; k++) begin : g_out
      assign lvl1[4*g+k] = o4[k];
    end
  end

  cand_t ya2 [4], yb2 [4], lo2 [4];
  s8to4 u_root (.i(lvl1), .o(o), .ya(ya2), .yb(yb2), .lo(lo2));
endmodule
