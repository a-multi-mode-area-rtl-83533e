// tb_mm_lc_aml: self-checking test of the MM-LC-AML unit.
//
// Runs sequences of rate-R-2 symbols: each sequence starts with pm_init in
// its mode and feeds random LLRs and random patterns (of the six). Some
// sequences switch from MODE-4 to MODE-1 half way (MODE-4_1), and some load
// the PMs through pm_load. For each symbol it checks, against the reference:
// the latency (4 / 3 / 2 cycles), the survivor key set, each survivor's
// parent group, symbol and key, the PM registers afterwards (new survivors in
// MODE-4 / MODE-2, unchanged in MODE-1) and that ready drops while busy.
module tb_mm_lc_aml;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, pm_init = 0, pm_load = 0;
  mode_e mode_sel = MODE4;
  logic [7:0] frz = '0;
  logic signed [LLR_W-1:0] llr [4][8];
  key_t pm_load_val [4];
  logic ready, sclo_valid, sco_valid;
  path_out_t sclo [4], sco [4];
  key_t pm [4];
  int checks = 0, failures = 0;
  int n_mode [3] = '{0, 0, 0};
  int n_switch = 0;

  mm_lc_aml dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(mode_e m);
    automatic llr4x8_t l;
    automatic key_t pm_before [4];
    automatic path_out_t outs [4];
    automatic int lat = 1;
    automatic int want_lat = (m == MODE4) ? 4 : (m == MODE2) ? 3 : 2;
    @(negedge clk);
    checks++;
    if (!ready) begin failures++; $display("FAIL not ready"); end
    for (int p = 0; p < 4; p++) for (int k = 0; k < 8; k++) begin
      l[p][k] = LLR_W'($urandom);
      llr[p][k] = l[p][k];
    end
    frz = PATS[$urandom_range(0, 5)];
    mode_sel = m;
    pm_before = pm;
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (ready) begin failures++; $display("FAIL ready while busy"); end
    while (!(sclo_valid || sco_valid) && lat < 10) begin
      @(posedge clk); #1; lat++;
    end
    checks++;
    if (lat != want_lat || (m == MODE1) != sco_valid || (m != MODE1) != sclo_valid) begin
      failures++; $display("FAIL latency %0d mode %0d", lat, m);
    end
    outs = (m == MODE1) ? sco : sclo;
    check_step(m, frz, l, pm_before, outs, checks, failures);
    @(posedge clk); #1;
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (pm[k] != ((m == MODE1) ? pm_before[k] : outs[k].pm)) begin
        failures++; $display("FAIL PM register %0d", k);
      end
    end
    n_mode[m]++;
  endtask

  initial begin
    for (int p = 0; p < 4; p++) begin
      pm_load_val[p] = '0;
      for (int k = 0; k < 8; k++) llr[p][k] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cw = 0; cw < 40; cw++) begin
      automatic mode_e m = mode_e'(cw % 3);
      automatic bit sw = (cw % 6 == 3);   // MODE-4_1
      if (sw) m = MODE4;
      @(negedge clk);
      mode_sel = m;
      if (cw % 5 == 4) begin
        pm_load = 1;
        for (int p = 0; p < 4; p++) pm_load_val[p] = key_t'($urandom_range(0, 100));
      end else pm_init = 1;
      @(negedge clk);
      pm_init = 0; pm_load = 0;
      checks++;
      if (cw % 5 == 4) begin
        if (pm != pm_load_val) begin failures++; $display("FAIL pm_load"); end
      end else if (pm[0] != 0 || pm[1] != ((m == MODE1) ? key_t'(0) : KEY_MAX)) begin
        failures++; $display("FAIL pm_init");
      end
      for (int s = 0; s < 8; s++) begin
        if (sw && s == 4) begin
          n_switch++;
          m = MODE1;
        end
        step(m);
      end
    end
    $display("symbols per mode: MODE-4 %0d MODE-2 %0d MODE-1 %0d, MODE-4_1 switches %0d",
             n_mode[0], n_mode[1], n_mode[2], n_switch);
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_switch == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
