// s32to4: four smallest of 32 candidates, the S32TO4 block of MLD_S1_q4.
//
// Seven S8TO4 blocks in a binary tree: four on the 32 inputs (32 -> 16), two
// on their outputs (16 -> 8) and one at the root (8 -> 4). Each S8TO4 sorts
// its own inputs, so no ordering is needed between levels. The four outputs
// are the four smallest keys, unordered. Purely combinational; the structure
// is the one the design description gives for S32TO4.
module s32to4
  import polar_pkg::*;
(
  input  cand_t i [32],
  output cand_t o [4]
);
  cand_t lvl1 [16];
  cand_t lvl2 [8];

  for (genvar g = 0; g < 4; g++) begin : g_l1
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

  for (genvar g = 0; g < 2; g++) begin : g_l2
    cand_t in8 [8];
    cand_t o4 [4];
    cand_t ya [4], yb [4], lo [4];
    for (genvar k = 0; k < 8; k++) begin : g_in
      assign in8[k] = lvl1[8*g+k];
    end
    s8to4 u (.i(in8), .o(o4), .ya(ya), .yb(yb), .lo(lo));
    for (genvar k = 0; k < 4; k++) begin : g_out
      assign lvl2[4*g+k] = o4[k];
    end
  end

  cand_t ya3 [4], yb3 [4], lo3 [4];
  s8to4 u_root (.i(lvl2), .o(o), .ya(ya3), .yb(yb3), .lo(lo3));
endmodule
