// cross_adder: the 16-ADDER / 4-ADDER blocks of the MLD_S1 datapaths.
//
// Forms all NA x NB sums of a T1 candidate (tag = v sub-symbol) and a T2
// candidate (tag = u_e sub-symbol). Each output key is the saturating sum and
// each output tag is the 8-bit symbol rebuilt from the two sub-symbols with
// XORs (u_{2i-1} = v_i ^ ue_i, u_{2i} = ue_i). Output k = a*NB + b.
// With NA = NB = 4 this is the 16-ADDER (a 4 x 4 grid of adders), with
// NA = NB = 2 the 4-ADDER. Purely combinational. The design description
// omits the symbol-value XOR circuitry; it is rebuilt here from the
// definition of the RCC split.
module cross_adder
  import polar_pkg::*;
#(
  parameter int NA = 4,
  parameter int NB = 4
) (
  input  cand_t a [NA],
  input  cand_t b [NB],
  output cand_t o [NA*NB]
);
  always_comb begin
    for (int x = 0; x < NA; x++)
      for (int y = 0; y < NB; y++)
        o[x*NB+y] = combine(a[x], b[y]);
  end
endmodule
