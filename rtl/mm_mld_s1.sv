// mm_mld_s1: stage 1 of the multi-mode LC-AML unit for one decoding path.
//
// Given the eight LLRs alpha_0..alpha_7 of the next 8-bit symbol of one list,
// its path metric PM and the symbol's frozen-bit vector FrzInfVec, it returns
// the q best expansions of that list: q = 4 (MODE-4, the MLD_S1_q4 datapath),
// q = 2 (MODE-2, MLD_S1_q2) or q = 1 (MODE-1, MLD_S1_q1). Only the six
// rate-R-2 patterns FDDDDDDD, FFDDDDDD, FFFDDDDD, FFFDFDDD, FFFFFDDD and
// FFFFFFDD are supported; in MODE-4 any other pattern whose first three bits
// are frozen is also decoded exactly (control word 0 plus MSNG).
//
// How it works. The symbol is split as in recursive channel combination:
// v_i = u_{2i-1} ^ u_{2i} (four bits) and u_e = (u2,u4,u6,u8). Step 0: two RCC
// blocks give the 16 metrics a0..a15 of v (from alpha_0..3) and the 16
// metrics a16..a31 of u_e (from alpha_4..7); the metric of a full symbol is
// a[v] + a[16+u_e]. Step 1 keeps, for each value of the bits fixed by the
// pattern, only the best few T1 and T2 values (sorters plus pattern-driven
// muxes). Step 2 adds every kept T1 value to every kept T2 value. Step 3 sets
// the metrics of symbols that violate FrzInfVec to the maximum (MSNG), keeps
// the q smallest and adds PM. The three datapaths share Step 0 and the first
// sorter row: the four S8TO4 blocks of MODE-4 contain the S4 blocks whose
// sorted outputs MODE-2 uses and whose pair minima MODE-1 uses.
//
// Mux controls, from FrzInfVec:
//   q4: 1 for FDDDDDDD and FFDDDDDD, else 0;
//   q2: FFDDDDDD 0, FDDDDDDD 1, FFFDDDDD 2, others 3;
//   q1: FFDDDDDD and FDDDDDDD 0, FFFDDDDD 1, others 2.
// 'Z' and 'F' are the sub-symbols 0000 and 1111; they fill unused adder
// inputs, and their keys are the maximum so that any sum with them is
// invalid.
//
// Timing: the Step 0 results are registered (all modes). MODE-4 registers
// again after Step 1 and after Step 3, so q4_valid follows in_valid by 3
// cycles. MODE-2 and MODE-1 register after Step 3: q2_valid / q1_valid follow
// by 2 cycles. pm is read in the cycle of the final addition and must be
// stable while an operation is in flight. The q4 and q2 keys include PM; the
// q1 key is the symbol metric alone (SC needs no path metric). Outputs are
// unordered sets; tags carry the 8-bit symbol.
//
// The datapaths, mux control words, Z/F symbols and step structure follow the
// design description and its drawings of MLD_S1_q4/q2/q1. The exact register
// positions, the key value of Z/F and the Step-0 LLR interpretation (z_j =
// sign bit, x_j = |alpha_j|) are this design's choices.
module mm_mld_s1
  import polar_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  mode_e                   in_mode,
  input  logic signed [LLR_W-1:0] llr [8],   // alpha_0 .. alpha_7
  input  logic [7:0]              frz,       // f1 (bit 7) .. f8 (bit 0)
  input  key_t                    pm,
  output logic                    q4_valid,
  output cand_t                   q4 [4],
  output logic                    q2_valid,
  output cand_t                   q2 [2],
  output logic                    q1_valid,
  output cand_t                   q1
);
  localparam cand_t Z = '{key: KEY_MAX, tag: TAG_W'(4'b0000)};
  localparam cand_t F = '{key: KEY_MAX, tag: TAG_W'(4'b1111)};

  // ---------------- Step 0: RCC ----------------
  logic [3:0]       z_l, z_r;
  logic [MAG_W-1:0] x_l [4], x_r [4];
  cand_t            y_l [16], y_r [16];

  always_comb begin
    for (int j = 0; j < 4; j++) begin
      z_l[j] = llr[j][LLR_W-1];
      z_r[j] = llr[j+4][LLR_W-1];
      x_l[j] = llr[j][LLR_W-1]   ? MAG_W'(-llr[j])   : MAG_W'(llr[j]);
      x_r[j] = llr[j+4][LLR_W-1] ? MAG_W'(-llr[j+4]) : MAG_W'(llr[j+4]);
    end
  end

  rcc u_rcc_l (.z(z_l), .x(x_l), .y(y_l));
  rcc u_rcc_r (.z(z_r), .x(x_r), .y(y_r));

  cand_t      a [32];
  logic [7:0] frz_a;
  mode_e      mode_a;
  logic       valid_a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_a <= 1'b0;
      mode_a  <= MODE4;
      frz_a   <= '0;
      for (int k = 0; k < 32; k++) a[k] <= '0;
    end else begin
      valid_a <= in_valid;
      if (in_valid) begin
        mode_a <= in_mode;
        frz_a  <= frz;
        for (int k = 0; k < 16; k++) begin
          a[k]    <= y_l[k];
          a[k+16] <= y_r[k];
        end
      end
    end
  end

  // ---------------- Step 1: shared sorter row ----------------
  cand_t s8o  [4][4];   // S8TO4 outputs: b0..b15 of MLD_S1_q4
  cand_t s8ya [4][4];   // sorted a[8g+0..3]
  cand_t s8yb [4][4];   // sorted a[8g+4..7]
  cand_t s8lo [4][4];   // pair minima of a[8g..8g+7]

  for (genvar g = 0; g < 4; g++) begin : g_row
    cand_t in8 [8];
    cand_t o4 [4], ya [4], yb [4], lo [4];
    for (genvar k = 0; k < 8; k++) begin : g_in
      assign in8[k] = a[8*g+k];
    end
    s8to4 u_s8 (.i(in8), .o(o4), .ya(ya), .yb(yb), .lo(lo));
    for (genvar k = 0; k < 4; k++) begin : g_out
      assign s8o[g][k]  = o4[k];
      assign s8ya[g][k] = ya[k];
      assign s8yb[g][k] = yb[k];
      assign s8lo[g][k] = lo[k];
    end
  end

  // ================= MODE-4: MLD_S1_q4 =================
  logic  sel4;
  cand_t g4 [16];   // mux outputs, groups of four: (T1,u2=0) (T2,u2=0) (T1,u2=1) (T2,u2=1)

  always_comb begin
    sel4 = (frz_a == PAT_FDDDDDDD) || (frz_a == PAT_FFDDDDDD);
    for (int k = 0; k < 4; k++) begin
      g4[k]    = sel4 ? s8o[0][k] : a[k];
      g4[4+k]  = sel4 ? s8o[2][k] : a[16+k];
      g4[8+k]  = sel4 ? s8o[1][k] : a[4+k];
      g4[12+k] = sel4 ? s8o[3][k] : a[20+k];
    end
  end

  cand_t      g4_b [16];
  logic [7:0] frz_b;
  logic       valid_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_b <= 1'b0;
      frz_b   <= '0;
      for (int k = 0; k < 16; k++) g4_b[k] <= '0;
    end else begin
      valid_b <= valid_a && (mode_a == MODE4);
      if (valid_a && (mode_a == MODE4)) begin
        frz_b <= frz_a;
        g4_b  <= g4;
      end
    end
  end

  // Step 2: two 16-ADDERs; Step 3: MSNG, S32TO4, + PM
  cand_t add4_a [4], add4_b [4], add4_c [4], add4_d [4];
  cand_t sum4 [32];
  cand_t sum4_l [16], sum4_r [16];
  cand_t msk4 [32];
  cand_t best4 [4];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      add4_a[k] = g4_b[k];
      add4_b[k] = g4_b[4+k];
      add4_c[k] = g4_b[8+k];
      add4_d[k] = g4_b[12+k];
    end
  end
  cross_adder #(.NA(4), .NB(4)) u_add16_l (.a(add4_a), .b(add4_b), .o(sum4_l));
  cross_adder #(.NA(4), .NB(4)) u_add16_r (.a(add4_c), .b(add4_d), .o(sum4_r));
  always_comb begin
    for (int k = 0; k < 16; k++) begin
      sum4[k]    = sum4_l[k];
      sum4[16+k] = sum4_r[k];
    end
  end
  msng #(.N(32)) u_msng4 (.frz(frz_b), .i(sum4), .o(msk4));
  s32to4 u_s32to4 (.i(msk4), .o(best4));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q4_valid <= 1'b0;
      for (int k = 0; k < 4; k++) q4[k] <= '0;
    end else begin
      q4_valid <= valid_b;
      if (valid_b)
        for (int k = 0; k < 4; k++) begin
          q4[k].key <= sat_add(best4[k].key, pm);
          q4[k].tag <= best4[k].tag;
        end
    end
  end

  // ================= MODE-2: MLD_S1_q2 =================
  cand_t b2 [16];
  cand_t c2 [8];
  cand_t d2 [16];
  logic [1:0] ctl2;

  always_comb begin
    for (int g = 0; g < 4; g++) begin
      b2[4*g]   = s8ya[g][0];
      b2[4*g+1] = s8ya[g][1];
      b2[4*g+2] = s8yb[g][0];
      b2[4*g+3] = s8yb[g][1];
    end
  end

  for (genvar g = 0; g < 4; g++) begin : g_s4to2
    cand_t x [4];
    cand_t y [2];
    for (genvar k = 0; k < 4; k++) begin : g_in
      assign x[k] = b2[4*g+k];
    end
    s4to2 u (.x(x), .y(y));
    assign c2[2*g]   = y[0];
    assign c2[2*g+1] = y[1];
  end

  always_comb begin
    unique case (frz_a)
      PAT_FFDDDDDD: ctl2 = 2'd0;
      PAT_FDDDDDDD: ctl2 = 2'd1;
      PAT_FFFDDDDD: ctl2 = 2'd2;
      default:      ctl2 = 2'd3;
    endcase
    // first mux row: inputs 0 / 1 / 2 / 3
    case (ctl2)
      2'd0, 2'd1: begin
        d2[0] = c2[0]; d2[1] = c2[1]; d2[2] = c2[4]; d2[3] = c2[5];
      end
      2'd2: begin
        d2[0] = b2[0]; d2[1] = b2[1]; d2[2] = b2[8]; d2[3] = b2[9];
      end
      default: begin
        d2[0] = a[0];  d2[1] = a[1];  d2[2] = a[16]; d2[3] = a[17];
      end
    endcase
    case (ctl2)
      2'd0: begin
        d2[4] = Z; d2[5] = F; d2[6] = Z; d2[7] = F;
      end
      2'd1: begin
        d2[4] = c2[2]; d2[5] = c2[3]; d2[6] = c2[6]; d2[7] = c2[7];
      end
      2'd2: begin
        d2[4] = b2[2]; d2[5] = b2[3]; d2[6] = b2[10]; d2[7] = b2[11];
      end
      default: begin
        d2[4] = a[2];  d2[5] = a[3];  d2[6] = a[18]; d2[7] = a[19];
      end
    endcase
    // second mux row: Z/F unless control word 3
    if (ctl2 == 2'd3) begin
      d2[8]  = a[4];  d2[9]  = a[5];  d2[10] = a[20]; d2[11] = a[21];
      d2[12] = a[6];  d2[13] = a[7];  d2[14] = a[22]; d2[15] = a[23];
    end else begin
      d2[8]  = Z; d2[9]  = F; d2[10] = Z; d2[11] = F;
      d2[12] = Z; d2[13] = F; d2[14] = Z; d2[15] = F;
    end
  end

  // Step 2: four 4-ADDERs; Step 3: MSNG, S16TO2, + PM
  cand_t sum2 [16];
  for (genvar g = 0; g < 4; g++) begin : g_add4
    cand_t xa [2], xb [2], o [4];
    assign xa[0] = d2[4*g];
    assign xa[1] = d2[4*g+1];
    assign xb[0] = d2[4*g+2];
    assign xb[1] = d2[4*g+3];
    cross_adder #(.NA(2), .NB(2)) u (.a(xa), .b(xb), .o(o));
    for (genvar k = 0; k < 4; k++) begin : g_o
      assign sum2[4*g+k] = o[k];
    end
  end

  cand_t msk2 [16];
  cand_t best2 [2];
  msng #(.N(16)) u_msng2 (.frz(frz_a), .i(sum2), .o(msk2));
  s16to2 u_s16to2 (.i(msk2), .o(best2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q2_valid <= 1'b0;
      q2[0] <= '0;
      q2[1] <= '0;
    end else begin
      q2_valid <= valid_a && (mode_a == MODE2);
      if (valid_a && (mode_a == MODE2))
        for (int k = 0; k < 2; k++) begin
          q2[k].key <= sat_add(best2[k].key, pm);
          q2[k].tag <= best2[k].tag;
        end
    end
  end

  // ================= MODE-1: MLD_S1_q1 =================
  cand_t b1 [16];   // minima of pairs
  cand_t c1 [8];    // minima of fours
  cand_t d1 [4];    // minima of eights
  cand_t m1 [8];    // 3-to-1 mux outputs
  cand_t sum1 [4];
  cand_t msk1 [4];
  cand_t best1;
  logic [1:0] ctl1;

  always_comb begin
    for (int g = 0; g < 4; g++) begin
      for (int k = 0; k < 4; k++) b1[4*g+k] = s8lo[g][k];
      c1[2*g]   = s8ya[g][0];
      c1[2*g+1] = s8yb[g][0];
    end
  end

  for (genvar g = 0; g < 4; g++) begin : g_d1
    cand_t nd;
    logic  ne;
    s2 u (.a(c1[2*g]), .b(c1[2*g+1]), .c(d1[g]), .d(nd), .e(ne));
  end

  always_comb begin
    unique case (frz_a)
      PAT_FFDDDDDD, PAT_FDDDDDDD: ctl1 = 2'd0;
      PAT_FFFDDDDD:               ctl1 = 2'd1;
      default:                    ctl1 = 2'd2;
    endcase
    case (ctl1)
      2'd0: begin
        m1[0] = d1[0]; m1[1] = d1[2]; m1[2] = d1[1]; m1[3] = d1[3];
        m1[4] = Z;     m1[5] = F;     m1[6] = Z;     m1[7] = F;
      end
      2'd1: begin
        m1[0] = c1[0]; m1[1] = c1[4]; m1[2] = c1[1]; m1[3] = c1[5];
        m1[4] = Z;     m1[5] = F;     m1[6] = Z;     m1[7] = F;
      end
      default: begin
        m1[0] = b1[0]; m1[1] = b1[8]; m1[2] = b1[1]; m1[3] = b1[9];
        m1[4] = b1[2]; m1[5] = b1[10]; m1[6] = b1[3]; m1[7] = b1[11];
      end
    endcase
    for (int k = 0; k < 4; k++) sum1[k] = combine(m1[2*k], m1[2*k+1]);
  end

  msng #(.N(4)) u_msng1 (.frz(frz_a), .i(sum1), .o(msk1));
  s4to1 u_s4to1 (.x(msk1), .y(best1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q1_valid <= 1'b0;
      q1       <= '0;
    end else begin
      q1_valid <= valid_a && (mode_a == MODE1);
      if (valid_a && (mode_a == MODE1)) q1 <= best1;
    end
  end

endmodule
