// mm_lc_aml: multi-mode low-complexity approximate-ML (MM-LC-AML) decoding unit.
//
// It expands the L = 4 decoding paths by one 8-bit rate-R-2 symbol and keeps
// the survivors, in one of three modes chosen per operation by Mode_Sel:
//   MODE-4 (0): one codeword, list size 4. Each path's MM_MLD_S1 gives its
//               q = 4 best expansions; S16TO4 keeps the best 4 of the 16.
//   MODE-2 (1): two codewords, list size 2. Paths 1,2 belong to one codeword
//               and paths 3,4 to the other. Each MM_MLD_S1 gives q = 2; one
//               S4TO2 per codeword keeps the best 2 of 4.
//   MODE-1 (2): four codewords decoded by SC. Each path's MM_MLD_S1 gives its
//               single best symbol on SCO_i; no path metric is kept.
// The path-metric registers PM_1..PM_4 feed back into the four MM_MLD_S1
// blocks. A 2-to-1 mux in front of each PM register picks the S16TO4 result
// (0, MODE-4) or the S4TO2 result (1, MODE-2).
//
// Interface: an operation is started by in_valid with the 4 x 8 LLRs, the
// frozen-bit vector and the mode; only one operation may be in flight
// (ready low otherwise, checked by an assertion), because the next symbol's
// LLRs depend on the decisions. Survivors come out on sclo[k] (parent path,
// symbol, new PM) and the SC decisions on sco[i]. pm_init resets the PMs at
// the start of a codeword: path 1 (and path 3 in MODE-2, all paths in MODE-1)
// to 0, the others to the maximum so they are never chosen. pm_load writes
// all four PMs, for updates made by leaf decoders outside this unit.
//
// Timing: sclo_valid follows in_valid by 4 cycles in MODE-4 and 3 in MODE-2;
// sco_valid follows by 2 cycles in MODE-1.
//
// Structure (four MM_MLD_S1, S16TO4, two S4TO2, PM muxes and registers, the
// SCLO/SCO outputs) follows the MM-LC-AML drawing. The pipeline depths per mode
// (4, 3 and 2 register stages) follow the text. The PM initialisation, the
// pm_load port, the busy/ready handshake and keeping PMs unchanged in MODE-1
// are this design's choices.
module mm_lc_aml
  import polar_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  mode_e                   mode_sel,
  input  logic [7:0]              frz,
  input  logic signed [LLR_W-1:0] llr [4][8],   // LLRInV_1 .. LLRInV_4
  input  logic                    pm_init,
  input  logic                    pm_load,
  input  key_t                    pm_load_val [4],
  output logic                    ready,
  output logic                    sclo_valid,
  output path_out_t               sclo [4],      // SCLO_1 .. SCLO_4
  output logic                    sco_valid,
  output path_out_t               sco [4],       // SCO_1 .. SCO_4
  output key_t                    pm [4]
);
  logic  q4_v [4], q2_v [4], q1_v [4];
  cand_t q4 [4][4];
  cand_t q2 [4][2];
  cand_t q1 [4];

  for (genvar l = 0; l < 4; l++) begin : g_mld
    cand_t o4 [4];
    cand_t o2 [2];
    cand_t o1;
    logic  v4, v2, v1;
    logic signed [LLR_W-1:0] llr_l [8];
    for (genvar j = 0; j < 8; j++) begin : g_llr
      assign llr_l[j] = llr[l][j];
    end
    mm_mld_s1 u_mld (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_mode(mode_sel),
      .llr(llr_l), .frz(frz), .pm(pm[l]),
      .q4_valid(v4), .q4(o4), .q2_valid(v2), .q2(o2), .q1_valid(v1), .q1(o1));
    assign q4_v[l] = v4;
    assign q2_v[l] = v2;
    assign q1_v[l] = v1;
    assign q1[l]   = o1;
    for (genvar k = 0; k < 4; k++) begin : g_q4
      assign q4[l][k] = o4[k];
    end
    assign q2[l][0] = o2[0];
    assign q2[l][1] = o2[1];
  end

  // ---------------- stage 2 ----------------
  cand_t in16 [16];
  cand_t best16 [4];
  cand_t in2a [4], in2b [4];
  cand_t best2a [2], best2b [2];

  always_comb begin
    for (int l = 0; l < 4; l++)
      for (int k = 0; k < 4; k++) begin
        in16[4*l+k].key = q4[l][k].key;
        in16[4*l+k].tag = {2'(l), q4[l][k].tag[7:0]};
      end
    for (int k = 0; k < 2; k++) begin
      in2a[k]     = '{key: q2[0][k].key, tag: {2'd0, q2[0][k].tag[7:0]}};
      in2a[k+2]   = '{key: q2[1][k].key, tag: {2'd1, q2[1][k].tag[7:0]}};
      in2b[k]     = '{key: q2[2][k].key, tag: {2'd2, q2[2][k].tag[7:0]}};
      in2b[k+2]   = '{key: q2[3][k].key, tag: {2'd3, q2[3][k].tag[7:0]}};
    end
  end

  s16to4 u_s16to4 (.i(in16), .o(best16));
  s4to2  u_s4to2a (.x(in2a), .y(best2a));
  s4to2  u_s4to2b (.x(in2b), .y(best2b));

  logic  st2_valid, st2_mode2;
  cand_t st2 [4];   // PM mux outputs
  always_comb begin
    st2_valid = q4_v[0] || q2_v[0];
    st2_mode2 = q2_v[0];
    st2[0] = st2_mode2 ? best2a[0] : best16[0];
    st2[1] = st2_mode2 ? best2a[1] : best16[1];
    st2[2] = st2_mode2 ? best2b[0] : best16[2];
    st2[3] = st2_mode2 ? best2b[1] : best16[3];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclo_valid <= 1'b0;
      for (int k = 0; k < 4; k++) begin
        sclo[k] <= '0;
        pm[k]   <= '0;
      end
    end else begin
      sclo_valid <= st2_valid;
      if (st2_valid) begin
        for (int k = 0; k < 4; k++) begin
          sclo[k].valid  <= 1'b1;
          sclo[k].parent <= st2[k].tag[9:8];
          sclo[k].sym    <= st2[k].tag[7:0];
          sclo[k].pm     <= st2[k].key;
          pm[k]          <= st2[k].key;
        end
      end else if (pm_init) begin
        pm[0] <= '0;
        pm[1] <= (mode_sel == MODE1) ? '0 : KEY_MAX;
        pm[2] <= (mode_sel == MODE4) ? KEY_MAX : '0;
        pm[3] <= (mode_sel == MODE1) ? '0 : KEY_MAX;
      end else if (pm_load) begin
        for (int k = 0; k < 4; k++) pm[k] <= pm_load_val[k];
      end
      if (!st2_valid)
        for (int k = 0; k < 4; k++) sclo[k].valid <= 1'b0;
    end
  end

  // MODE-1 outputs come straight from the MLD_S1_q1 registers.
  always_comb begin
    sco_valid = q1_v[0];
    for (int i = 0; i < 4; i++) begin
      sco[i].valid  = q1_v[i];
      sco[i].parent = 2'(i);
      sco[i].sym    = q1[i].tag[7:0];
      sco[i].pm     = q1[i].key;
    end
  end

  // ---------------- one operation in flight ----------------
  logic busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       busy <= 1'b0;
    else if (in_valid)                busy <= 1'b1;
    else if (sclo_valid || sco_valid) busy <= 1'b0;
  end
  assign ready = !busy;

  a_one_in_flight: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("mm_lc_aml: new operation while one is in flight");
  a_no_init_in_flight: assert property (@(posedge clk) disable iff (!rst_n) (pm_init || pm_load) |-> !busy)
    else $error("mm_lc_aml: PM written while an operation is in flight");

endmodule
