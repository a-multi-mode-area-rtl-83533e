// rep_adder_tree: LLR adder tree for repetition leaf nodes.
//
// A repetition node (frozen pattern FFFFFFFD, or FFFFFFFF_FFFFFFFD for a
// 16-bit node) carries one information bit, the last one, and every code bit
// of the node equals it. Its LLR is therefore the sum of the node's 8 or 16
// input LLRs. A binary tree of adders (8 + 4 + 2 + 1) forms that sum in
// log2 levels; len16 = 0 takes the root of the first 8 inputs, len16 = 1 the
// root of all 16. The sum is registered: out_valid follows in_valid by one
// cycle. The output is wide enough never to overflow.
//
// The design description states only that repetition nodes use a binary tree
// of adders to compute the LLR. Widths, the single output register and the
// interface are this design's choices; the path-metric update of a
// repetition node is not described and is not part of this block.
module rep_adder_tree
  import polar_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      len16,
  input  logic signed [LLR_W-1:0]   llr [16],
  output logic                      out_valid,
  output logic signed [LLR_W+3:0]   sum
);
  logic signed [LLR_W:0]   l1 [8];
  logic signed [LLR_W+1:0] l2 [4];
  logic signed [LLR_W+2:0] l3 [2];
  logic signed [LLR_W+3:0] l4;

  always_comb begin
    for (int k = 0; k < 8; k++) l1[k] = (LLR_W+1)'(llr[2*k]) + (LLR_W+1)'(llr[2*k+1]);
    for (int k = 0; k < 4; k++) l2[k] = (LLR_W+2)'(l1[2*k]) + (LLR_W+2)'(l1[2*k+1]);
    for (int k = 0; k < 2; k++) l3[k] = (LLR_W+3)'(l2[2*k]) + (LLR_W+3)'(l2[2*k+1]);
    l4 = (LLR_W+4)'(l3[0]) + (LLR_W+4)'(l3[1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= len16 ? l4 : (LLR_W+4)'(l3[0]);
    end
  end
endmodule
