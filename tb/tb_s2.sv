// tb_s2: self-checking test of the S2 compare-exchange element. Random and
// equal keys; checks c = smaller, d = larger, e = (a > b), tags follow keys.
module tb_s2;
  import polar_pkg::*;
  cand_t a, b, c, d;
  logic  e;
  int checks = 0, failures = 0;
  s2 dut (.a(a), .b(b), .c(c), .d(d), .e(e));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      a.key = key_t'($urandom_range(0, 300)); a.tag = 10'd1;
      b.key = (t % 7 == 0) ? a.key : key_t'($urandom_range(0, 300)); b.tag = 10'd2;
      #1;
      checks++;
      if (c.key != ((a.key < b.key) ? a.key : b.key) || d.key != ((a.key < b.key) ? b.key : a.key)
          || e != (a.key > b.key) || c.tag == d.tag
          || (c.tag == 10'd1 && c.key != a.key) || (c.tag == 10'd2 && c.key != b.key)) begin
        failures++;
        if (failures < 5) $display("FAIL a=%0d b=%0d c=%0d d=%0d e=%0d", a.key, b.key, c.key, d.key, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
