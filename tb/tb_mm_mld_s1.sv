// tb_mm_mld_s1: self-checking test of MM_MLD_S1 in all three modes and for
// all six rate-R-2 frozen-location patterns.
//
// For each random symbol (LLRs, pattern, path metric) it checks:
//  * latency: q4_valid 3 cycles after in_valid (MODE-4), q2_valid / q1_valid
//    2 cycles after (MODE-2 / MODE-1), and no output valid of another mode;
//  * the set of output keys equals the q best keys of the divide-and-conquer
//    reference (tb_ref_pkg::stage1) plus PM (none for q = 1);
//  * each output symbol respects the frozen bits and its key equals PM plus
//    the metric of that symbol recomputed from the LLRs; symbols are distinct.
// A second phase runs MODE-4 with random patterns whose first three bits are
// frozen (beyond the six) against a brute-force search over all 256 symbols.
module tb_mm_mld_s1;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  mode_e in_mode = MODE4;
  logic signed [LLR_W-1:0] llr [8];
  logic [7:0] frz = '0;
  key_t pm = '0;
  logic q4_valid, q2_valid, q1_valid;
  cand_t q4 [4], q2 [2], q1;
  int checks = 0, failures = 0, n_other = 0;

  mm_mld_s1 dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL %s mode=%0d frz=%b pm=%0d", msg, in_mode, frz, pm);
  endtask

  function automatic bit is_six(logic [7:0] f);
    foreach (PATS[k]) if (PATS[k] == f) return 1'b1;
    return 1'b0;
  endfunction

  task automatic check_set(cand_t got [], int q, bit with_pm, llr8_t l);
    int rk[$], gk[$];
    stage1(l, frz, q, rk);
    if (!is_six(frz)) best_valid(l, frz, q, rk);
    foreach (rk[k]) rk[k] = with_pm ? int'(ksat(longint'(rk[k]) + pm)) : rk[k];
    for (int k = 0; k < q; k++) gk.push_back(int'(got[k].key));
    gk.sort();
    checks++;
    if (gk != rk) fail("key set");
    for (int k = 0; k < q; k++) begin
      int want;
      if (got[k].key == KEY_MAX) continue;
      want = with_pm ? int'(ksat(longint'(sym_cost(l, got[k].tag[7:0])) + pm)) : sym_cost(l, got[k].tag[7:0]);
      checks++;
      if ((got[k].tag[7:0] & frz) != 0) fail("frozen bit set");
      checks++;
      if (int'(got[k].key) != want) fail("key/symbol mismatch");
      for (int j = 0; j < k; j++) if (got[j].tag[7:0] == got[k].tag[7:0]) fail("duplicate symbol");
    end
  endtask

  initial begin
    int count [3];
    int pat_seen [6];
    count = '{0, 0, 0};
    pat_seen = '{0, 0, 0, 0, 0, 0};
    for (int k = 0; k < 8; k++) llr[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      automatic llr8_t l;
      automatic int lat = 1;   // one rising edge passes while in_valid is high
      automatic int p = $urandom_range(0, 5);
      automatic mode_e m = mode_e'(t % 3);
      @(negedge clk);
      for (int k = 0; k < 8; k++) begin
        l[k] = LLR_W'($urandom_range(0, 63));
        llr[k] = l[k];
      end
      frz = PATS[p];
      pm = (t % 17 == 5) ? KEY_MAX : key_t'($urandom_range(0, 500));
      in_mode = m;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int k = 0; k < 8; k++) llr[k] = LLR_W'($urandom);   // inputs are sampled once
      do begin
        @(posedge clk); #1; lat++;
      end while (!(q4_valid || q2_valid || q1_valid) && lat < 10);
      checks++;
      case (m)
        MODE4: if (!q4_valid || q2_valid || q1_valid || lat != 3) fail($sformatf("latency %0d", lat));
        MODE2: if (!q2_valid || q4_valid || q1_valid || lat != 2) fail($sformatf("latency %0d", lat));
        default: if (!q1_valid || q4_valid || q2_valid || lat != 2) fail($sformatf("latency %0d", lat));
      endcase
      case (m)
        MODE4: check_set(q4, 4, 1, l);
        MODE2: check_set(q2, 2, 1, l);
        default: begin
          automatic cand_t one [] = new[1];
          one[0] = q1;
          check_set(one, 1, 0, l);
        end
      endcase
      count[m]++;
      pat_seen[p]++;
    end
    // MODE-4 with other patterns whose first three bits are frozen: the
    // control-0 datapath pairs the groups with v1 = u2 = 0 and v2 = u4 and is
    // exact for all of them; compared with a brute-force search.
    for (int t = 0; t < 300; t++) begin
      automatic llr8_t l;
      automatic int lat = 1;
      automatic int bf[$], agree = 1;
      @(negedge clk);
      for (int k = 0; k < 8; k++) begin
        l[k] = LLR_W'($urandom_range(0, 63));
        llr[k] = l[k];
      end
      frz = {3'b111, 5'($urandom)};
      pm = key_t'($urandom_range(0, 500));
      in_mode = MODE4;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      do begin
        @(posedge clk); #1; lat++;
      end while (!q4_valid && lat < 10);
      checks++;
      if (lat != 3) fail($sformatf("latency %0d", lat));
      check_set(q4, 4, 1, l);
      n_other++;
      // the pair-type reference must agree with brute force on the six patterns
      if (is_six(frz)) begin
        automatic int dc[$];
        stage1(l, frz, 4, dc);
        best_valid(l, frz, 4, bf);
        checks++;
        if (dc != bf) fail("reference disagreement");
      end
    end
    checks++;
    if (n_other == 0) fail("no other patterns");
    $display("mode counts %0d %0d %0d, other patterns %0d", count[0], count[1], count[2], n_other);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
