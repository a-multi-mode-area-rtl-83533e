// tb_cmem: self-checking test of a channel memory. Fills all N/PAR words with
// random data, reads them back in random order one cycle after the address,
// and checks that a write does not disturb other words.
module tb_cmem;
  import polar_pkg::*;
  localparam int N = 1024, PAR = 8, DEPTH = N / PAR, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [PAR*CH_W-1:0] wdata = '0, rdata;
  logic [PAR*CH_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  cmem #(.N(N), .PAR(PAR)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3 * DEPTH; t++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      raddr = AW'(a);
      if (t % 5 == 0) begin   // concurrent write elsewhere
        we = 1; waddr = AW'((a + 1) % DEPTH); wdata = {$urandom, $urandom};
        model[(a + 1) % DEPTH] = wdata;
      end else we = 0;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        if (failures < 5) $display("FAIL addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
