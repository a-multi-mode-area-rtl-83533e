// msng: invalid-symbol masking (the MSNG block of the MLD_S1 datapaths).
//
// For every candidate the tag holds the full 8-bit symbol value u1..u8. A
// symbol is invalid when it has a 1 in a position that FrzInfVec marks as
// frozen; its key is then forced to the maximal value so that the sorter that
// follows never prefers it over a valid symbol. Purely combinational.
//
// The design description gives MSNG's job (set path metrics of invalid symbol
// values to the maximal positive value, using FrzInfVec); the test
// (sym & frz) != 0 is this design's way of doing it.
module msng
  import polar_pkg::*;
#(
  parameter int N = 32
) (
  input  logic [7:0] frz,
  input  cand_t      i [N],
  output cand_t      o [N]
);
  always_comb begin
    for (int k = 0; k < N; k++) begin
      o[k] = i[k];
      if ((i[k].tag[7:0] & frz) != 8'h00) o[k].key = KEY_MAX;
    end
  end
endmodule
