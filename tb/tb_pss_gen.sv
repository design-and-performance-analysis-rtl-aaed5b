// tb_pss_gen -- checks the PSS generator against the bit-serial reference for all three
// N_ID2 values (several PCIs each). Combinational: no clock, no latency check.
module tb_pss_gen;
  import tb_ref_pkg::*;
  logic [9:0]   pci;
  logic [126:0] pss;
  int checks = 0, failures = 0;
  pss_gen dut (.pci, .pss);
  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int p = 0; p < 1008; p += 37) begin
      pci = 10'(p); #1;
      for (int n = 0; n < 127; n++) begin
        checks++;
        if ((pss[n] ? -1 : 1) != pss_sym(p % 3, n)) begin
          failures++;
          if (failures < 5) $display("mismatch pci=%0d n=%0d", p, n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
