// tb_pbch_gen -- checks the PBCH filler: QPSK symbols of amplitude 1/sqrt(2) taken from the
// x^23 + x^18 + 1 LFSR advanced two steps per symbol, holding while `next` is low.
module tb_pbch_gen;
  import cs_pkg::*;
  logic clk = 0, rst = 1, next = 0;
  cplx16_t sym;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pbch_gen dut (.clk, .rst, .next, .sym);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit [22:0] l;
    int ones;
    l = 23'h5A5A5; ones = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int k = 0; k < 2000; k++) begin
      next <= (k % 3 != 2);
      #1;
      checks++;
      if (sym.re != (l[0] ? -16'sd11585 : 16'sd11585) || sym.im != (l[1] ? -16'sd11585 : 16'sd11585)) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d", k);
      end
      ones += l[0];
      @(posedge clk);
      if (k % 3 != 2) repeat (2) l = {l[21:0], l[22] ^ l[17]};
    end
    checks++;
    if (ones < 800 || ones > 1200) failures++;   // balanced pseudo-random bits
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
