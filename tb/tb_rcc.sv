// tb_rcc: self-checking test of the RCC block. For random LLRs it checks every
// output y_i against the metric of sub-symbol i computed from the polar
// transform of a 4-bit word (tb_ref_pkg::half_cost), and that y_i carries tag i.
// It also checks the split used by the AML unit: for every 8-bit symbol u,
// metric(u) = y_left[v] + y_right[u_e], with v_i = u_{2i-1} ^ u_{2i}.
module tb_rcc;
  import polar_pkg::*;
  import tb_ref_pkg::*;
  logic [3:0]       zl, zr;
  logic [MAG_W-1:0] xl [4], xr [4];
  cand_t            yl [16], yr [16];
  int checks = 0, failures = 0;
  rcc dut_l (.z(zl), .x(xl), .y(yl));
  rcc dut_r (.z(zr), .x(xr), .y(yr));
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      automatic llr8_t llr;
      for (int k = 0; k < 8; k++) llr[k] = LLR_W'($urandom_range(0, 63));
      for (int j = 0; j < 4; j++) begin
        zl[j] = llr[j] < 0;      xl[j] = MAG_W'(absl(llr[j]));
        zr[j] = llr[j+4] < 0;    xr[j] = MAG_W'(absl(llr[j+4]));
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(yl[i].key) != half_cost(llr, 0, i) || int'(yr[i].key) != half_cost(llr, 4, i)
            || yl[i].tag != TAG_W'(i)) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d i=%0d got %0d want %0d", t, i, yl[i].key, half_cost(llr, 0, i));
        end
      end
      for (int u = 0; u < 256; u++) begin
        automatic int v = 0, ue = 0;
        for (int i = 0; i < 4; i++) begin
          automatic int uo_b = (u >> (7 - 2*i)) & 1, ue_b = (u >> (6 - 2*i)) & 1;
          v  |= (uo_b ^ ue_b) << (3 - i);
          ue |= ue_b << (3 - i);
        end
        checks++;
        if (int'(yl[v].key) + int'(yr[ue].key) != sym_cost(llr, u)) begin
          failures++;
          if (failures < 5) $display("FAIL split u=%02h", u);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
