// tb_rep_adder_tree: self-checking test of the repetition-node adder tree.
// Random LLRs including the extreme values; checks the 8- and 16-input sums
// against a plain loop sum and the one-cycle latency of out_valid.
module tb_rep_adder_tree;
  import polar_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, len16 = 0;
  logic signed [LLR_W-1:0] llr [16];
  logic out_valid;
  logic signed [LLR_W+3:0] sum;
  int checks = 0, failures = 0;
  rep_adder_tree dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int k = 0; k < 16; k++) llr[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      automatic int want = 0;
      @(negedge clk);
      len16 = t[0];
      for (int k = 0; k < 16; k++) begin
        llr[k] = (t % 50 == 1) ? LLR_W'(1 << (LLR_W-1)) : (t % 50 == 2) ? LLR_W'((1 << (LLR_W-1)) - 1)
                                : LLR_W'($urandom);
        if (k < 8 || len16) want += int'(llr[k]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(sum) != want) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d len16=%0d got %0d want %0d v=%0d", t, len16, sum, want, out_valid);
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
