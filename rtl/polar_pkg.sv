// polar_pkg: types and constants shared by the multi-mode SCL polar decoder.
//
// The decoder handles M = 8 bit symbols. A symbol u = (u1..u8) is stored MSB
// first: u1 is bit 7, u8 is bit 0. The frozen-bit indication vector FrzInfVec
// (f1..f8) uses the same order, so a pattern string such as "FFFDFDDD" reads
// directly as the binary literal 8'b1110_1000. A 4-bit sub-symbol index (i)_2
// used by the RCC blocks also puts its first bit (v1 or u2) in the MSB.
//
// Every value that travels through a sorter is a candidate: a path-metric key
// (smaller is more reliable, as in LLR-based SCL decoding) and a tag that says
// which symbol value and which parent list produced it. The all-ones key is the
// "maximal positive value" used to mark invalid candidates, and every addition
// on keys saturates to it so that an invalid candidate stays invalid.
package polar_pkg;

  localparam int M       = 8;    // symbol size (paper: M = 8)
  localparam int L_MAX   = 4;    // number of decoding paths n_d (paper: n_d = 4)
  localparam int CH_W    = 5;    // channel LLR width (paper: five-bit channel LLRs)
  localparam int LLR_W   = 6;    // internal LLR width at the AML input (own choice)
  localparam int MAG_W   = LLR_W; // |alpha| fits LLR_W unsigned bits
  localparam int PM_W    = 16;   // path-metric width (own choice)
  localparam int TAG_W   = 10;   // [9:8] parent list, [7:0] symbol or sub-symbol

  typedef logic [PM_W-1:0] key_t;
  localparam key_t KEY_MAX = '1;

  typedef struct packed {
    key_t             key;
    logic [TAG_W-1:0] tag;
  } cand_t;

  // Mode_Sel encoding, Table III of the design description.
  typedef enum logic [1:0] {
    MODE4 = 2'd0,   // SCL, L = 4, one codeword
    MODE2 = 2'd1,   // SCL, L = 2, two codewords
    MODE1 = 2'd2    // SC, four codewords
  } mode_e;

  // The six rate-R-2 frozen-location patterns handled by the LC-AML unit.
  localparam logic [7:0] PAT_FDDDDDDD = 8'b1000_0000;
  localparam logic [7:0] PAT_FFDDDDDD = 8'b1100_0000;
  localparam logic [7:0] PAT_FFFDDDDD = 8'b1110_0000;
  localparam logic [7:0] PAT_FFFDFDDD = 8'b1110_1000;
  localparam logic [7:0] PAT_FFFFFDDD = 8'b1111_1000;
  localparam logic [7:0] PAT_FFFFFFDD = 8'b1111_1100;

  // Survivor written back to a decoding path (SCLO / SCO outputs).
  typedef struct packed {
    logic       valid;
    logic [1:0] parent;  // list whose partial sums the path continues
    logic [7:0] sym;     // decided symbol u_{t+1}..u_{t+8}
    key_t       pm;      // new path metric
  } path_out_t;

  function automatic key_t sat_add(key_t a, key_t b);
    logic [PM_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[PM_W] ? KEY_MAX : s[PM_W-1:0];
  endfunction

  // Candidate sum of a T1 candidate (tag = v) and a T2 candidate (tag = u_e):
  // u_{2i-1} = v_i xor ue_i, u_{2i} = ue_i.
  function automatic cand_t combine(cand_t t1, cand_t t2);
    cand_t r;
    logic [3:0] v, ue;
    v  = t1.tag[3:0];
    ue = t2.tag[3:0];
    r.key = sat_add(t1.key, t2.key);
    r.tag = '0;
    for (int i = 0; i < 4; i++) begin
      r.tag[7-2*i] = v[3-i] ^ ue[3-i];
      r.tag[6-2*i] = ue[3-i];
    end
    return r;
  endfunction

endpackage
