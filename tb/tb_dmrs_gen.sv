// tb_dmrs_gen -- checks the 288-bit Gold PRBS and the 144 QPSK symbols of the PBCH DMRS
// generator against a bit-serial model for several (PCI, SS_i) pairs, and checks that the
// sequence is ready 60 clocks after start (50 clocks of offset skip + 9 of output + 1).
module tb_dmrs_gen;
  import cs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  logic [9:0] pci;
  logic [2:0] issb;
  logic busy, done;
  logic [287:0] prbs;
  cplx16_t sym [144];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dmrs_gen dut (.clk, .rst, .start, .pci, .issb, .busy, .done, .prbs, .sym);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  initial begin
    int pcis[6] = '{0, 1, 2, 3, 500, 1007};
    bit c[288];
    int lat;
    repeat (3) @(posedge clk);
    rst <= 0;
    foreach (pcis[a]) for (int i = 0; i < 8; i += 3) begin
      @(posedge clk);
      pci <= 10'(pcis[a]); issb <= 3'(i); start <= 1;
      @(posedge clk); start <= 0;
      lat = 0;
      while (!done) begin @(posedge clk); lat++; end
      chk(lat == 60, $sformatf("latency %0d", lat));
      dmrs_seq(pcis[a], i, c);
      for (int n = 0; n < 288; n++) chk(prbs[n] == c[n], $sformatf("bit pci=%0d i=%0d n=%0d", pcis[a], i, n));
      for (int m = 0; m < 144; m++) begin
        chk(sym[m].re == (c[2*m] ? -11585 : 11585) && sym[m].im == (c[2*m+1] ? -11585 : 11585),
            $sformatf("sym %0d", m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
