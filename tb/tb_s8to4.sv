// tb_s8to4: self-checking test of s8to4. Random keys (with many ties) on 8
// inputs, tags = input index. Checks that the 4 output keys are the 4
// smallest input keys (as a multiset), and that every
// output tag names a distinct input holding that key.
module tb_s8to4;
  import polar_pkg::*;
  cand_t i [8];
  cand_t o [4];
  int checks = 0, failures = 0;
  s8to4 dut (.i(i), .o(o), .ya(), .yb(), .lo());
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 1500; t++) begin
      automatic int ref_k[$], got[$];
      automatic bit used [8];
      bit bad;
      int range;
      range = (t % 3 == 0) ? 6 : 400;
      for (int k = 0; k < 8; k++) begin
        i[k].key = key_t'($urandom_range(0, range));
        if (t % 11 == 0 && k % 3 == 0) i[k].key = KEY_MAX;
        i[k].tag = TAG_W'(k);
        ref_k.push_back(int'(i[k].key));
        used[k] = 0;
      end
      #1;
      ref_k.sort();
      bad = 0;
      for (int k = 0; k < 4; k++) begin
        got.push_back(int'(o[k].key));
        if (int'(o[k].tag) >= 8 || used[o[k].tag] || i[o[k].tag].key != o[k].key) bad = 1;
        else used[o[k].tag] = 1;
        if (0 && k > 0 && o[k].key < o[k-1].key) bad = 1;
      end
      got.sort();
      for (int k = 0; k < 4; k++) if (got[k] != ref_k[k]) bad = 1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 5) $display("FAIL trial %0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
