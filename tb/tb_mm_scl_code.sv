// tb_mm_scl_code: decodes whole (1024, 512) polar codewords through the
// MM-SCL core at its default parameters, in MODE-1 (four words), MODE-2 (two
// words), MODE-4 (one word) and MODE-4_1 with two switching points.
//
// Code: constructed for the BEC with erasure probability 0.5 by the recursion
// z(2j-1) = 2z - z^2, z(2j) = z^2; the 512 bit channels with the smallest z
// carry information. The test first checks that every 8-bit leaf of this code
// has one of nine patterns: rate-0 (FFFFFFFF), rate-1 (DDDDDDDD),
// repetition (FFFFFFFD) or one of the six rate-R-2 patterns.
//
// Channel: random messages, BPSK over AWGN at Eb/N0 = 6 dB, channel LLRs
// 2y/sigma^2 rounded to 5 bits. Words are loaded into CMEM_1..4 and read back
// through the DCD ports in the current mode, so each path sees the word that
// the routing assigns to it.
//
// Processing units (behavioural, in this file): each path keeps its decided
// bits; the LLRs of a leaf are recomputed from its channel LLRs by the
// min-sum f / g tree of u * F^(x)n, using the partial sums of the decided
// bits. The eight leaf LLRs beta_0..7 (code bits of u_leaf * F^(x)3) are given
// to the core as alpha_j = beta_rev(j), the order of u_leaf * B_8 * F^(x)3,
// saturated to the core's LLR width.
//
// Leaves: rate-R-2 leaves go through the core (path_out, checked by
// check_step against the reference model); rate-0, rate-1 and repetition
// leaves are expanded in this file by exhaustive search over the valid
// symbols, and the new path metrics are written into the core with pm_load.
// In MODE-1 repetition leaves use the core's adder trees instead. The
// decoded word of each codeword is the path with the smallest metric; it
// must equal the transmitted message.
//
// The switching points of MODE-4_1 are the two points evaluated for the
// (32768, 29504) code, scaled to N = 1024: 21000 -> 656, 10000 -> 312.
module tb_mm_scl_code;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 1024, K = 512, NLEAF = N / 8;
  localparam int PAR = 8, DEPTH = N / PAR, AW = $clog2(DEPTH), DW = PAR * CH_W;
  localparam real EBN0_DB = 6.0;

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

  mm_scl_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit frozen [N];
  int msg [4][N];          // transmitted messages, one per CMEM
  int chq [4][N];          // quantised channel LLRs, one word per CMEM
  int ch_llr [4][N];       // channel LLRs seen by path slot i (via DCD_i)
  int pu [4][N];           // decided bits of the path in slot i
  int pu_tmp [4][N];
  int xs [N];              // scratch: encoder / partial sums
  int ls [N];              // scratch: LLR tree
  real zs [N], nzs [N];    // scratch: construction
  longint tpm [4];         // path metrics (mirror of the core's, plus SC)
  int n_cat [4] = '{0, 0, 0, 0};      // rate-0, rate-1, repetition, rate-R-2
  int n_r2 [3] = '{0, 0, 0};          // rate-R-2 leaves per mode
  int n_words [4] = '{0, 0, 0, 0};    // words decoded per run kind
  int n_switch = 0, n_rep_rtl = 0, n_pmload = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- code construction (BEC, erasure 0.5) ----------------
  task automatic construct();
    int m = 1;
    zs[0] = 0.5;
    while (m < N) begin
      for (int j = 0; j < m; j++) begin
        nzs[2*j]   = 2.0 * zs[j] - zs[j] * zs[j];
        nzs[2*j+1] = zs[j] * zs[j];
      end
      m = 2 * m;
      for (int j = 0; j < m; j++) zs[j] = nzs[j];
    end
    for (int i = 0; i < N; i++) begin
      int rank = 0;
      for (int j = 0; j < N; j++)
        if (zs[j] < zs[i] || (zs[j] == zs[i] && j < i)) rank++;
      frozen[i] = (rank >= K);
    end
  endtask

  function automatic logic [7:0] leaf_frz(int lf);
    logic [7:0] f;
    for (int k = 0; k < 8; k++) f[7-k] = frozen[8*lf+k];
    return f;
  endfunction

  // 0 rate-0, 1 rate-1, 2 repetition, 3 rate-R-2, -1 other
  function automatic int category(logic [7:0] f);
    if (f == 8'hFF) return 0;
    if (f == 8'h00) return 1;
    if (f == 8'hFE) return 2;
    foreach (PATS[k]) if (PATS[k] == f) return 3;
    return -1;
  endfunction

  // ---------------- encoder and channel ----------------
  // xs[0..bf_n-1] := xs[0..bf_n-1] * F^(x)log2(bf_n); the length is a
  // variable so that the loops stay loops in the compiled model
  int bf_n;
  function automatic void butterfly();
    for (int s = 1; s < bf_n; s *= 2)
      for (int i = 0; i < bf_n; i += 2 * s)
        for (int j = i; j < i + s; j++) xs[j] ^= xs[j+s];
  endfunction

  function automatic real gauss();
    real u1 = (real'($urandom) + 1.0) / 4294967297.0;
    real u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic make_word(int c);
    real sigma2 = 1.0 / (2.0 * (real'(K) / real'(N)) * (10.0 ** (EBN0_DB / 10.0)));
    for (int i = 0; i < N; i++) begin
      msg[c][i] = frozen[i] ? 0 : int'($urandom_range(0, 1));
      xs[i] = msg[c][i];
    end
    bf_n = N;
    butterfly();
    for (int i = 0; i < N; i++) begin
      real y = (xs[i] ? -1.0 : 1.0) + $sqrt(sigma2) * gauss();
      int q = int'($rtoi(2.0 * y / sigma2 + ((y >= 0.0) ? 0.5 : -0.5)));
      chq[c][i] = (q > 15) ? 15 : (q < -16) ? -16 : q;
    end
  endtask

  // ---------------- behavioural processing unit ----------------
  function automatic int fmin(int a, int b);
    int m = ((a < 0) ? -a : a) < ((b < 0) ? -b : b) ? ((a < 0) ? -a : a) : ((b < 0) ? -b : b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic int rev3(int j);
    return ((j & 1) << 2) | (j & 2) | ((j >> 2) & 1);
  endfunction

  function automatic int sat6(int v);
    return (v > 31) ? 31 : (v < -32) ? -32 : v;
  endfunction

  // LLRs alpha_0..7 of leaf lf for the path in slot s
  int n_code = N;          // a variable, for the same reason as bf_n
  function automatic llr8_t leaf_alpha(int s, int lf);
    int n = n_code, base = 0;
    llr8_t a;
    for (int k = 0; k < N; k++) ls[k] = ch_llr[s][k];
    while (n > 8) begin
      int h = n / 2;
      if (8 * lf - base < h) begin
        for (int i = 0; i < h; i++) ls[i] = fmin(ls[i], ls[i+h]);
      end else begin
        for (int i = 0; i < h; i++) xs[i] = pu[s][base+i];
        bf_n = h;
    butterfly();
        for (int i = 0; i < h; i++) ls[i] = ls[i+h] + (xs[i] ? -ls[i] : ls[i]);
        base += h;
      end
      n = h;
    end
    for (int j = 0; j < 8; j++) a[j] = LLR_W'(sat6(ls[rev3(j)]));
    return a;
  endfunction

  // metric of symbol sym from the leaf LLRs in tree order (independent of
  // the sub-symbol split used by the core)
  function automatic int tree_cost(llr8_t a, int sym);
    int c = 0;
    for (int k = 0; k < 8; k++) xs[k] = (sym >> (7 - k)) & 1;
    bf_n = 8;
    butterfly();
    for (int k = 0; k < 8; k++) begin
      int b = int'(a[rev3(k)]);
      if (xs[k] != int'(b < 0)) c += (b < 0) ? -b : b;
    end
    return c;
  endfunction

  function automatic void set_sym(int s, int lf, int sym);
    for (int k = 0; k < 8; k++) pu[s][8*lf+k] = (sym >> (7 - k)) & 1;
  endfunction

  function automatic longint psat(longint v);
    return (v >= longint'(KEY_MAX)) ? longint'(KEY_MAX) : v;
  endfunction

  // ---------------- core operations ----------------
  task automatic load_cmems();
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        cm_we = 4'(1 << c);
        cm_waddr = AW'(a);
        for (int k = 0; k < PAR; k++) cm_wdata[k*CH_W +: CH_W] = CH_W'(chq[c][a*PAR+k]);
      end
    @(negedge clk);
    cm_we = '0;
  endtask

  // every DCD reads its channel word through the CMEM routing of mode m
  task automatic read_channels(int m);
    mode_sel = 2'(m);
    for (int a = 0; a <= DEPTH; a++) begin
      @(negedge clk);
      if (a > 0)
        for (int i = 0; i < 4; i++)
          for (int k = 0; k < PAR; k++)
            ch_llr[i][(a-1)*PAR+k] = int'(signed'(dcd_rdata[i][k*CH_W +: CH_W]));
      for (int i = 0; i < 4; i++) dcd_raddr[i] = AW'(a % DEPTH);
    end
  endtask

  task automatic load_pms();
    @(negedge clk);
    pm_load = 1;
    for (int i = 0; i < 4; i++) pm_load_val[i] = key_t'(psat(tpm[i]));
    @(negedge clk);
    pm_load = 0;
    n_pmload++;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (pm[i] != key_t'(psat(tpm[i]))) begin failures++; $display("FAIL pm_load %0d", i); end
    end
  endtask

  // one rate-R-2 leaf through the core
  task automatic r2_leaf(int m, int lf, llr4x8_t l);
    automatic key_t pm_before [4];
    automatic path_out_t outs [4];
    automatic int lat = 1;
    automatic int want_lat = (m == 0) ? 4 : (m == 1) ? 3 : 2;
    @(negedge clk);
    checks++;
    if (!aml_ready) begin failures++; $display("FAIL not ready"); end
    for (int i = 0; i < 4; i++) for (int k = 0; k < 8; k++) llr[i][k] = l[i][k];
    frz = leaf_frz(lf);
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
    for (int i = 0; i < 4; i++) for (int k = 0; k < N; k++) pu_tmp[i][k] = pu[i][k];
    for (int i = 0; i < 4; i++) begin
      automatic int par = int'(outs[i].parent);
      automatic llr8_t lp;
      for (int k = 0; k < 8; k++) lp[k] = l[par][k];
      for (int k = 0; k < N; k++) pu[i][k] = pu_tmp[par][k];
      set_sym(i, lf, int'(outs[i].sym));
      if (m == 2) tpm[i] = psat(tpm[i] + longint'(outs[i].pm));
      else tpm[i] = longint'(outs[i].pm);
      if (outs[i].pm != KEY_MAX) begin
        checks++;
        if (tree_cost(lp, int'(outs[i].sym)) != sym_cost(lp, int'(outs[i].sym))) begin
          failures++; $display("FAIL leaf metric mapping");
        end
      end
    end
    n_r2[m]++;
  endtask

  // rate-0 / rate-1 / repetition leaf: exhaustive expansion of each group
  task automatic other_leaf(int m, int lf, llr4x8_t l);
    automatic int gsize = (m == 0) ? 4 : (m == 1) ? 2 : 1;
    automatic logic [7:0] f = leaf_frz(lf);
    for (int i = 0; i < 4; i++) for (int k = 0; k < N; k++) pu_tmp[i][k] = pu[i][k];
    for (int g = 0; g < 4 / gsize; g++) begin
      automatic longint bk [$];
      automatic int bp [$], bs [$];
      for (int s = g * gsize; s < (g + 1) * gsize; s++) begin
        automatic llr8_t a;
        if (tpm[s] >= longint'(KEY_MAX) && gsize > 1) continue;
        for (int k = 0; k < 8; k++) a[k] = l[s][k];
        for (int u = 0; u < 256; u++) begin
          automatic longint c;
          automatic int at;
          if ((u & int'(f)) != 0) continue;
          c = tpm[s] + longint'(sym_cost(a, u));
          at = bk.size();
          for (int j = 0; j < bk.size(); j++) if (c < bk[j]) begin at = j; break; end
          if (at < gsize) begin
            bk.insert(at, c); bp.insert(at, s); bs.insert(at, u);
            if (bk.size() > gsize) begin void'(bk.pop_back()); void'(bp.pop_back()); void'(bs.pop_back()); end
          end
        end
      end
      for (int j = 0; j < gsize; j++) begin
        automatic int s = g * gsize + j;
        if (j < bk.size()) begin
          for (int k = 0; k < N; k++) pu[s][k] = pu_tmp[bp[j]][k];
          set_sym(s, lf, bs[j]);
          tpm[s] = psat(bk[j]);
        end else
          tpm[s] = longint'(KEY_MAX);
      end
    end
  endtask

  // repetition leaf in MODE-1 through the core's adder trees
  task automatic rep_leaf_sc(int lf, llr4x8_t l);
    @(negedge clk);
    rep_len16 = 0;
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 16; k++) rep_llr[i][k] = (k < 8) ? l[i][k] : '0;
    rep_valid = 1;
    @(negedge clk);
    rep_valid = 0;
    for (int i = 0; i < 4; i++) begin
      automatic int sum = 0, bit8;
      for (int k = 0; k < 8; k++) sum += int'(l[i][k]);
      checks++;
      if (!rep_sum_valid || int'(rep_sum[i]) != sum) begin failures++; $display("FAIL rep sum"); end
      bit8 = int'(rep_sum[i] < 0);
      begin
        automatic llr8_t a;
        for (int k = 0; k < 8; k++) a[k] = l[i][k];
        tpm[i] = psat(tpm[i] + longint'(sym_cost(a, bit8)));
      end
      set_sym(i, lf, bit8);
    end
    n_rep_rtl++;
  endtask

  // decodes the words in the CMEMs; mode m, switching to MODE-1 at bit theta
  task automatic decode(int m0, int theta, int kind);
    automatic int m = m0;
    read_channels(m0);
    @(negedge clk);
    mode_sel = 2'(m0);
    pm_init = 1;
    @(negedge clk);
    pm_init = 0;
    for (int i = 0; i < 4; i++) begin
      tpm[i] = (m0 == 0) ? ((i == 0) ? 0 : longint'(KEY_MAX))
             : (m0 == 1) ? ((i % 2 == 0) ? 0 : longint'(KEY_MAX)) : 0;
      checks++;
      if (pm[i] != key_t'(tpm[i])) begin failures++; $display("FAIL pm_init %0d", i); end
      for (int k = 0; k < N; k++) pu[i][k] = 0;
    end
    for (int lf = 0; lf < NLEAF; lf++) begin
      automatic llr4x8_t l;
      automatic int cat = category(leaf_frz(lf));
      if (m != 2 && theta > 0 && 8 * lf >= theta) begin
        m = 2;
        n_switch++;
      end
      for (int i = 0; i < 4; i++) begin
        automatic llr8_t a = leaf_alpha(i, lf);
        for (int k = 0; k < 8; k++) l[i][k] = a[k];
      end
      if (cat == 3) r2_leaf(m, lf, l);
      else if (cat == 2 && m == 2) rep_leaf_sc(lf, l);
      else begin
        other_leaf(m, lf, l);
        if (m != 2) load_pms();
      end
    end
    // pick the best path of each word and compare with the message
    for (int w = 0; w < 4; w++) begin
      automatic int gsize = (m0 == 0) ? 4 : (m0 == 1) ? 2 : 1;
      automatic int best = -1, errs = 0, src;
      if (w * gsize >= 4) break;
      for (int s = w * gsize; s < (w + 1) * gsize; s++)
        if (best < 0 || tpm[s] < tpm[best]) best = s;
      src = (m0 == 0) ? 0 : (m0 == 1) ? 2 * w : w;   // CMEM that holds this word
      for (int k = 0; k < N; k++) if (pu[best][k] != msg[src][k]) errs++;
      checks++;
      if (errs != 0) begin
        failures++;
        $display("FAIL word %0d of mode %0d (theta %0d): %0d bit errors", w, m0, theta, errs);
      end
      n_words[kind]++;
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      dcd_raddr[i] = '0;
      pm_load_val[i] = '0;
      for (int k = 0; k < 8; k++) llr[i][k] = '0;
      for (int k = 0; k < 16; k++) rep_llr[i][k] = '0;
    end
    construct();
    begin
      automatic int nf = 0;
      for (int i = 0; i < N; i++) nf += int'(frozen[i]);
      checks++;
      if (nf != N - K) begin failures++; $display("FAIL construction: %0d frozen", nf); end
    end
    for (int lf = 0; lf < NLEAF; lf++) begin
      automatic int c = category(leaf_frz(lf));
      checks++;
      if (c < 0) begin failures++; $display("FAIL leaf %0d pattern %b", lf, leaf_frz(lf)); end
      else n_cat[c]++;
    end
    $display("leaves: rate-0 %0d rate-1 %0d repetition %0d rate-R-2 %0d",
             n_cat[0], n_cat[1], n_cat[2], n_cat[3]);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // MODE-1: four words; MODE-2: two words; MODE-4; MODE-4_1 at two points
    for (int run = 0; run < 5; run++) begin
      for (int c = 0; c < 4; c++) make_word(c);
      load_cmems();
      decode((run == 0) ? 2 : (run == 1) ? 1 : 0,
             (run == 3) ? 656 : (run == 4) ? 312 : 0,
             (run < 3) ? run : 3);
    end

    $display("words decoded: MODE-1 %0d MODE-2 %0d MODE-4 %0d MODE-4_1 %0d",
             n_words[0], n_words[1], n_words[2], n_words[3]);
    $display("rate-R-2 leaves through the core: MODE-4 %0d MODE-2 %0d MODE-1 %0d",
             n_r2[0], n_r2[1], n_r2[2]);
    $display("mode switches %0d, repetition leaves on the adder trees %0d, pm_load %0d",
             n_switch, n_rep_rtl, n_pmload);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (n_words[k] == 0 || n_cat[k] == 0) failures++;
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (n_r2[k] == 0) failures++;
    end
    checks += 3;
    if (n_switch != 2) failures++;
    if (n_rep_rtl == 0) failures++;
    if (n_pmload == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
