// mm_scl_top: multi-mode SCL (MM-SCL) polar decoder core with n_d = 4
// decoding paths, M = 8 bit symbols.
//
// The decoder decodes P received words with list size L in parallel,
// P x L <= 4: one word with L = 4 (MODE-4), two words with L = 2 (MODE-2)
// or four words by SC, L = 1 (MODE-1). Mode_Sel may change between symbols
// of one word, e.g. MODE-4 for the first bits and MODE-1 for the rest.
//
// What is here:
//  * four channel memories CMEM_1..4, one per received word;
//  * the CMEM-to-DCD muxes that route the channel LLRs by mode:
//        DCD_1: CMEM_1 always
//        DCD_2: CMEM_1 (MODE-4, MODE-2) or CMEM_2 (MODE-1)
//        DCD_3: CMEM_1 (MODE-4) or CMEM_3 (MODE-2, MODE-1)
//        DCD_4: CMEM_1 (MODE-4), CMEM_3 (MODE-2) or CMEM_4 (MODE-1)
//    CMEM_i is read at the address given by DCD_i;
//  * the MM-LC-AML unit, which expands and prunes the paths for rate-R-2
//    leaf symbols and holds the path metrics;
//  * the output muxes that send SCLO_i (MODE-4, MODE-2) or SCO_i (MODE-1)
//    back to DCD_i and LMEM as path_out[i];
//  * one repetition-node adder tree per path.
// The processing and partial-sum units (DCD_i), the LLR memory LMEM, the
// rate-0 / rate-1 leaf decoders, the CRC and the tree scheduler are outside
// this core; their signals are ports: dcd_raddr / dcd_rdata towards the
// channel memories, llr / frz / aml_valid into the AML unit, path_out and
// pm back out, rep_llr / rep_sum for repetition nodes.
//
// Timing: CMEM reads return one cycle after the address. A rate-R-2 symbol
// takes 4 cycles from aml_valid to path_out_valid in MODE-4, 3 in MODE-2 and
// 2 in MODE-1; one symbol may be in flight (aml_ready). Repetition sums
// take one cycle.
//
// The block set, the CMEM mux numbering (0, 1, 2 = Mode_Sel) and the
// SCLO/SCO output muxes follow the top-level drawing of the decoder; the
// word width of the channel memories, the port-level interface and picking
// the output mux by the kind of result rather than by the live Mode_Sel
// (so that a mode change between symbols is safe) are this design's choices.
module mm_scl_top
  import polar_pkg::*;
#(
  parameter int N       = 1024,   // code length (the (1024,512) code)
  parameter int CM_PAR  = 8,      // channel LLRs per CMEM word (own choice)
  localparam int CM_AW  = $clog2(N / CM_PAR),
  localparam int CM_DW  = CM_PAR * CH_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [1:0]              mode_sel,        // Mode_Sel
  // channel memory load
  input  logic [3:0]              cm_we,           // one enable per CMEM
  input  logic [CM_AW-1:0]        cm_waddr,
  input  logic [CM_DW-1:0]        cm_wdata,
  // channel LLR reads by DCD_1..4
  input  logic [CM_AW-1:0]        dcd_raddr [4],
  output logic [CM_DW-1:0]        dcd_rdata [4],
  // rate-R-2 symbol from DCD_1..4
  input  logic                    aml_valid,
  output logic                    aml_ready,
  input  logic [7:0]              frz,             // FrzInfVec
  input  logic signed [LLR_W-1:0] llr [4][8],      // LLRInV_1..4
  input  logic                    pm_init,
  input  logic                    pm_load,
  input  key_t                    pm_load_val [4],
  output logic                    path_out_valid,
  output path_out_t               path_out [4],
  output key_t                    pm [4],
  // repetition nodes
  input  logic                    rep_valid,
  input  logic                    rep_len16,
  input  logic signed [LLR_W-1:0] rep_llr [4][16],
  output logic                    rep_sum_valid,
  output logic signed [LLR_W+3:0] rep_sum [4]
);
  mode_e mode;
  assign mode = mode_e'(mode_sel);

  // ---------------- channel memories ----------------
  logic [CM_DW-1:0] cm_rdata [4];
  for (genvar i = 0; i < 4; i++) begin : g_cmem
    cmem #(.N(N), .PAR(CM_PAR)) u_cmem (
      .clk(clk), .we(cm_we[i]), .waddr(cm_waddr), .wdata(cm_wdata),
      .raddr(dcd_raddr[i]), .rdata(cm_rdata[i]));
  end

  // The read data mux uses the mode of the cycle the address was given.
  mode_e mode_rd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode_rd <= MODE4;
    else        mode_rd <= mode;
  end

  always_comb begin
    dcd_rdata[0] = cm_rdata[0];
    unique case (mode_rd)
      MODE4: begin
        dcd_rdata[1] = cm_rdata[0];
        dcd_rdata[2] = cm_rdata[0];
        dcd_rdata[3] = cm_rdata[0];
      end
      MODE2: begin
        dcd_rdata[1] = cm_rdata[0];
        dcd_rdata[2] = cm_rdata[2];
        dcd_rdata[3] = cm_rdata[2];
      end
      default: begin
        dcd_rdata[1] = cm_rdata[1];
        dcd_rdata[2] = cm_rdata[2];
        dcd_rdata[3] = cm_rdata[3];
      end
    endcase
  end

  // ---------------- MM-LC-AML ----------------
  logic      sclo_valid, sco_valid;
  path_out_t sclo [4], sco [4];

  mm_lc_aml u_aml (
    .clk(clk), .rst_n(rst_n), .in_valid(aml_valid), .mode_sel(mode),
    .frz(frz), .llr(llr), .pm_init(pm_init), .pm_load(pm_load),
    .pm_load_val(pm_load_val), .ready(aml_ready),
    .sclo_valid(sclo_valid), .sclo(sclo), .sco_valid(sco_valid), .sco(sco),
    .pm(pm));

  // output muxes: SCLO_i for the list modes, SCO_i for SC
  always_comb begin
    path_out_valid = sclo_valid || sco_valid;
    for (int i = 0; i < 4; i++) path_out[i] = sco_valid ? sco[i] : sclo[i];
  end

  // ---------------- repetition nodes ----------------
  logic rep_v [4];
  for (genvar i = 0; i < 4; i++) begin : g_rep
    logic signed [LLR_W-1:0] rl [16];
    logic signed [LLR_W+3:0] rs;
    for (genvar j = 0; j < 16; j++) begin : g_in
      assign rl[j] = rep_llr[i][j];
    end
    rep_adder_tree u_rep (
      .clk(clk), .rst_n(rst_n), .in_valid(rep_valid), .len16(rep_len16),
      .llr(rl), .out_valid(rep_v[i]), .sum(rs));
    assign rep_sum[i] = rs;
  end
  assign rep_sum_valid = rep_v[0];

endmodule
