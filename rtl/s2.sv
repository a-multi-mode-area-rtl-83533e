// s2: compare-exchange element, the S2 block of the LC-AML sorters.
//
// One magnitude comparator computes e = (a.key > b.key); two 2-to-1 muxes
// driven by e give c, the candidate with the smaller key, and d, the one with
// the larger key. On equal keys c = a and d = b. The candidate tags travel
// with their keys. Purely combinational.
//
// The block structure (one ">" comparator, two muxes, outputs c, e, d) is the
// one drawn for S2; which mux output carries the minimum is this design's
// choice, made so that the sorters keep the smallest path metrics.
module s2
  import polar_pkg::*;
(
  input  cand_t a,
  input  cand_t b,
  output cand_t c,   // smaller
  output cand_t d,   // larger
  output logic  e    // a.key > b.key
);
  always_comb begin
    e = a.key > b.key;
    c = e ? b : a;
    d = e ? a : b;
  end
endmodule
