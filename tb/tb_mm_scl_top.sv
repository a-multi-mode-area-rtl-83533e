// tb_mm_scl_top: end-to-end test of the MM-SCL decoder core at its default
// parameters (N = 1024, 8 channel LLRs per CMEM word).
//
// 1. Loads four different received words into CMEM_1..4 and, in each of the
//    three modes, reads them through the DCD ports: DCD_i must see the CMEM
//    that the mode assigns to it (MODE-4: all CMEM_1; MODE-2: CMEM_1, CMEM_1,
//    CMEM_3, CMEM_3; MODE-1: CMEM_i).
// 2. Decodes sequences of rate-R-2 symbols in MODE-4, MODE-2 and MODE-1, and
//    MODE-4_1 sequences that switch from MODE-4 to MODE-1 part way, with the
//    LLRs taken from the words in the CMEMs. Every symbol is checked against
//    the reference model (survivor set, parents, symbols, keys, latency, PM
//    registers) through the path_out muxes.
// 3. Runs the repetition-node adder trees with 8 and 16 LLRs.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_mm_scl_top;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 1024, PAR = 8, DEPTH = N / PAR, AW = $clog2(DEPTH), DW = PAR * CH_W;

  logic clk = 0, rst_n = 0;
  logic [1:0] mode_sel = 2'd0;
  logic [3:0] cm_we = '0;
  logic [AW-1:0] cm_waddr = '0;
  logic [DW-1:0] cm_wdata = '0;
  logic [AW-1:0] dcd_raddr [4];
  logic [DW-1:0] dcd_rdata [4];
  logic aml_valid = 0, aml_ready, pm_init = 0, pm_load = 0;
  logic [7:0] frz = '0;
  logic signed [LLR_W-1:0] llr [4][8];
  key_t pm_load_val [4];
  logic path_out_valid;
  path_out_t path_out [4];
  key_t pm [4];
  logic rep_valid = 0, rep_len16 = 0, rep_sum_valid;
  logic signed [LLR_W-1:0] rep_llr [4][16];
  logic signed [LLR_W+3:0] rep_sum [4];

  logic [DW-1:0] word [4][DEPTH];
  int checks = 0, failures = 0;
  int n_route [3] = '{0, 0, 0};
  int n_mode [3] = '{0, 0, 0};
  int n_pat [6] = '{0, 0, 0, 0, 0, 0};
  int n_switch = 0, n_rep8 = 0, n_rep16 = 0, n_init = 0, n_load = 0;

  mm_scl_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int src(int m, int i);
    case (m)
      0: return 0;
      1: return (i < 2) ? 0 : 2;
      default: return i;
    endcase
  endfunction

  // channel LLR k of word c, widened to the AML input width
  function automatic logic signed [LLR_W-1:0] ch(int c, int k);
    logic [CH_W-1:0] v = word[c][k / PAR][(k % PAR) * CH_W +: CH_W];
    return LLR_W'(signed'(v));
  endfunction

  task automatic step(int m, int pos);
    automatic llr4x8_t l;
    automatic key_t pm_before [4];
    automatic path_out_t outs [4];
    automatic int lat = 1, p = $urandom_range(0, 5);
    automatic int want_lat = (m == 0) ? 4 : (m == 1) ? 3 : 2;
    @(negedge clk);
    checks++;
    if (!aml_ready) begin failures++; $display("FAIL not ready"); end
    for (int i = 0; i < 4; i++) for (int k = 0; k < 8; k++) begin
      l[i][k] = ch(src(m, i), (pos * 8 + k + 37 * i) % N);
      llr[i][k] = l[i][k];
    end
    frz = PATS[p];
    mode_sel = 2'(m);
    pm_before = pm;
    aml_valid = 1;
    @(negedge clk);
    aml_valid = 0;
    while (!path_out_valid && lat < 10) begin
      @(posedge clk); #1; lat++;
    end
    outs = path_out;
    checks++;
    if (lat != want_lat) begin failures++; $display("FAIL latency %0d mode %0d", lat, m); end
    check_step(mode_e'(m), frz, l, pm_before, outs, checks, failures);
    @(posedge clk); #1;
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (pm[k] != ((m == 2) ? pm_before[k] : outs[k].pm)) begin failures++; $display("FAIL PM %0d", k); end
    end
    n_mode[m]++;
    n_pat[p]++;
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      dcd_raddr[i] = '0;
      pm_load_val[i] = '0;
      for (int k = 0; k < 8; k++) llr[i][k] = '0;
      for (int k = 0; k < 16; k++) rep_llr[i][k] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. load the channel memories ----
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        word[c][a] = {$urandom, $urandom};
        cm_we = 4'(1 << c); cm_waddr = AW'(a); cm_wdata = word[c][a];
      end
    @(negedge clk); cm_we = '0;

    // ---- routing of CMEM to DCD per mode ----
    for (int m = 0; m < 3; m++) begin
      mode_sel = 2'(m);
      for (int t = 0; t < DEPTH; t++) begin
        automatic int ad [4];
        @(negedge clk);
        for (int i = 0; i < 4; i++) begin
          ad[i] = $urandom_range(0, DEPTH - 1);
          dcd_raddr[i] = AW'(ad[i]);
        end
        @(negedge clk);
        for (int i = 0; i < 4; i++) begin
          automatic int s = src(m, i);
          checks++;
          if (dcd_rdata[i] != word[s][ad[s]]) begin
            failures++;
            if (failures < 10) $display("FAIL route mode %0d DCD%0d", m, i + 1);
          end
        end
        n_route[m]++;
      end
    end

    // ---- 2. symbol decoding ----
    for (int cw = 0; cw < 36; cw++) begin
      automatic int m = cw % 3;
      automatic bit sw = (cw % 6 == 3);
      automatic int nsym = 12;
      if (sw) m = 0;
      @(negedge clk);
      mode_sel = 2'(m);
      if (cw % 7 == 6) begin
        pm_load = 1;
        for (int i = 0; i < 4; i++) pm_load_val[i] = key_t'($urandom_range(0, 60));
        n_load++;
      end else begin
        pm_init = 1;
        n_init++;
      end
      @(negedge clk);
      pm_init = 0; pm_load = 0;
      for (int s = 0; s < nsym; s++) begin
        if (sw && s == 7) begin m = 2; n_switch++; end
        step(m, s + cw);
      end
    end

    // ---- 3. repetition nodes ----
    for (int t = 0; t < 40; t++) begin
      automatic int want [4];
      @(negedge clk);
      rep_len16 = t[0];
      for (int i = 0; i < 4; i++) begin
        want[i] = 0;
        for (int k = 0; k < 16; k++) begin
          rep_llr[i][k] = LLR_W'($urandom);
          if (k < 8 || rep_len16) want[i] += int'(rep_llr[i][k]);
        end
      end
      rep_valid = 1;
      @(negedge clk);
      rep_valid = 0;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (!rep_sum_valid || int'(rep_sum[i]) != want[i]) begin failures++; $display("FAIL rep %0d", i); end
      end
      if (rep_len16) n_rep16++; else n_rep8++;
    end

    $display("CMEM routing reads per mode: %0d %0d %0d", n_route[0], n_route[1], n_route[2]);
    $display("symbols per mode: MODE-4 %0d MODE-2 %0d MODE-1 %0d; MODE-4_1 switches %0d",
             n_mode[0], n_mode[1], n_mode[2], n_switch);
    $display("patterns: %0d %0d %0d %0d %0d %0d", n_pat[0], n_pat[1], n_pat[2], n_pat[3], n_pat[4], n_pat[5]);
    $display("pm_init %0d pm_load %0d rep8 %0d rep16 %0d", n_init, n_load, n_rep8, n_rep16);
    for (int m = 0; m < 3; m++) begin
      checks += 2;
      if (n_route[m] == 0) failures++;
      if (n_mode[m] == 0) failures++;
    end
    for (int p = 0; p < 6; p++) begin
      checks++;
      if (n_pat[p] == 0) failures++;
    end
    checks += 5;
    if (n_switch == 0) failures++;
    if (n_rep8 == 0) failures++;
    if (n_rep16 == 0) failures++;
    if (n_init == 0) failures++;
    if (n_load == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
