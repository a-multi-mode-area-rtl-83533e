// tb_ref_pkg: reference model used by the testbenches.
//
// Everything here is computed from the definitions, not from the RTL
// structure: the code word of an 8-bit symbol is w = u B_8 F^{(x)3}, the
// metric of a symbol is the sum of |alpha_k| over code bits that disagree
// with the hard decision of alpha_k, and the stage-1 result of one list is
// computed with the divide-and-conquer steps 1-3 stated generically (group the
// symbols by the bits of the FD pairs, keep the min(q, 2^gamma) best T1 and
// T2 values per group, add them pairwise, keep the q best overall).
// best_valid is a plain exhaustive search over all 256 symbols, used for
// patterns outside the six and to cross-check stage1. check_step checks one
// whole MM-LC-AML operation (all four outputs, any mode) against stage1.
package tb_ref_pkg;
  import polar_pkg::*;

  typedef logic signed [LLR_W-1:0] llr8_t [8];

  function automatic int rev(int r, int nbits);
    int o = 0;
    for (int b = 0; b < nbits; b++) if (r & (1 << b)) o |= 1 << (nbits - 1 - b);
    return o;
  endfunction

  // code word of an n-bit (sub-)symbol u, u[n-1] is the first bit
  function automatic int encode(int u, int nbits);
    int n = 1 << nbits, x = 0;
    for (int k = 0; k < n; k++) begin
      bit acc = 0;
      for (int r = 0; r < n; r++)
        if ((r & k) == k) acc ^= (u >> (n - 1 - rev(r, nbits))) & 1;
      if (acc) x |= 1 << k;
    end
    return x;
  endfunction

  function automatic int absl(logic signed [LLR_W-1:0] a);
    return (a < 0) ? -int'(a) : int'(a);
  endfunction

  function automatic int sym_cost(llr8_t llr, int sym);
    int x = encode(sym, 3), c = 0;
    for (int k = 0; k < 8; k++)
      if (((x >> k) & 1) != (llr[k] < 0 ? 1 : 0)) c += absl(llr[k]);
    return c;
  endfunction

  function automatic int half_cost(llr8_t llr, int base, int v);
    int x = encode(v, 2), c = 0;
    for (int k = 0; k < 4; k++)
      if (((x >> k) & 1) != (llr[base+k] < 0 ? 1 : 0)) c += absl(llr[base+k]);
    return c;
  endfunction

  function automatic key_t ksat(longint a);
    return (a >= longint'(KEY_MAX)) ? KEY_MAX : key_t'(a);
  endfunction

  // q best stage-1 metrics (without PM) of one list, ascending
  function automatic void stage1(llr8_t llr, logic [7:0] frz, int q, ref int res[$]);
    int fd[$], pool[$];
    int ptype [4];   // 0 DD, 1 FD, 2 FF
    res.delete();
    for (int i = 0; i < 4; i++) begin
      bit f1 = frz[7-2*i], f2 = frz[6-2*i];
      ptype[i] = (f1 && f2) ? 2 : (f1 ? 1 : 0);
      if (ptype[i] == 1) fd.push_back(i);
    end
    for (int b = 0; b < (1 << fd.size()); b++) begin
      int t1[$], t2[$], k1, k2;
      for (int v = 0; v < 16; v++) begin
        bit ok = 1;
        for (int i = 0; i < 4; i++) begin
          int bitv = (v >> (3 - i)) & 1;
          if (ptype[i] == 2 && bitv != 0) ok = 0;
          if (ptype[i] == 1) begin
            int idx = 0;
            foreach (fd[j]) if (fd[j] == i) idx = j;
            if (bitv != ((b >> idx) & 1)) ok = 0;
          end
        end
        if (ok) begin
          t1.push_back(half_cost(llr, 0, v));
          t2.push_back(half_cost(llr, 4, v));
        end
      end
      t1.sort(); t2.sort();
      k1 = (q < t1.size()) ? q : t1.size();
      k2 = (q < t2.size()) ? q : t2.size();
      for (int x = 0; x < k1; x++)
        for (int y = 0; y < k2; y++) pool.push_back(t1[x] + t2[y]);
    end
    pool.sort();
    for (int k = 0; k < q && k < pool.size(); k++) res.push_back(pool[k]);
  endfunction

  // Brute force: the q smallest metrics over all 256 symbols that respect
  // frz, padded with the maximum key when fewer symbols are valid.
  function automatic void best_valid(llr8_t llr, logic [7:0] frz, int q, ref int res[$]);
    int pool[$];
    res.delete();
    for (int u = 0; u < 256; u++)
      if ((u & int'(frz)) == 0) pool.push_back(sym_cost(llr, u));
    pool.sort();
    for (int k = 0; k < q; k++) res.push_back((k < pool.size()) ? pool[k] : int'(KEY_MAX));
  endfunction

  localparam logic [7:0] PATS [6] = '{PAT_FDDDDDDD, PAT_FFDDDDDD, PAT_FFFDDDDD,
                                      PAT_FFFDFDDD, PAT_FFFFFDDD, PAT_FFFFFFDD};

  typedef logic signed [LLR_W-1:0] llr4x8_t [4][8];

  // Checks the survivors of one MM-LC-AML operation. pm_in are the path
  // metrics before it, outs the four outputs (SCLO_i for MODE-4 / MODE-2,
  // SCO_i for MODE-1). Adds to checks and fails.
  function automatic void check_step(mode_e mode, logic [7:0] frz, llr4x8_t llr,
                                     key_t pm_in [4], path_out_t outs [4],
                                     ref int checks, ref int fails);
    llr8_t l [4];
    for (int p = 0; p < 4; p++) for (int k = 0; k < 8; k++) l[p][k] = llr[p][k];
    if (mode == MODE1) begin
      for (int i = 0; i < 4; i++) begin
        int r[$];
        stage1(l[i], frz, 1, r);
        checks += 3;
        if (int'(outs[i].pm) != r[0]) begin fails++; $display("FAIL SC key path %0d", i); end
        if ((outs[i].sym & frz) != 0 || outs[i].parent != 2'(i)) begin fails++; $display("FAIL SC sym path %0d", i); end
        if (int'(outs[i].pm) != sym_cost(l[i], outs[i].sym)) begin fails++; $display("FAIL SC recompute path %0d", i); end
      end
    end else begin
      int q = (mode == MODE4) ? 4 : 2;
      int ngroups = (mode == MODE4) ? 1 : 2;
      for (int g = 0; g < ngroups; g++) begin
        int pool[$], got[$];
        int lists = 4 / ngroups;
        for (int p = g * lists; p < (g + 1) * lists; p++) begin
          int r[$];
          stage1(l[p], frz, q, r);
          foreach (r[k]) pool.push_back(int'(ksat(longint'(r[k]) + pm_in[p])));
        end
        pool.sort();
        for (int k = g * lists; k < (g + 1) * lists; k++) begin
          got.push_back(int'(outs[k].pm));
          checks++;
          if (int'(outs[k].parent) < g * lists || int'(outs[k].parent) >= (g + 1) * lists) begin
            fails++; $display("FAIL parent out of group: out %0d parent %0d", k, outs[k].parent);
          end
          if (outs[k].pm != KEY_MAX) begin
            checks += 2;
            if ((outs[k].sym & frz) != 0) begin fails++; $display("FAIL frozen bit out %0d", k); end
            if (outs[k].pm != ksat(longint'(sym_cost(l[outs[k].parent], outs[k].sym)) + pm_in[outs[k].parent])) begin
              fails++; $display("FAIL recompute out %0d", k);
            end
            for (int j = g * lists; j < k; j++)
              if (outs[j].parent == outs[k].parent && outs[j].sym == outs[k].sym && outs[j].pm != KEY_MAX) begin
                fails++; $display("FAIL duplicate survivor out %0d", k);
              end
          end
        end
        got.sort();
        checks++;
        for (int k = 0; k < lists; k++)
          if (got[k] != pool[k]) begin
            fails++; $display("FAIL survivor key set group %0d: got %p want %p", g, got, pool[0:lists-1]);
            break;
          end
      end
    end
  endfunction
endpackage
