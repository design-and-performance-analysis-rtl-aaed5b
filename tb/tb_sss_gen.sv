// tb_sss_gen -- checks the SSS generator for all 1008 PCIs against the bit-serial reference.
module tb_sss_gen;
  import tb_ref_pkg::*;
  logic [9:0]   pci;
  logic [126:0] sss;
  int checks = 0, failures = 0;
  sss_gen dut (.pci, .sss);
  initial begin
    #10000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int p = 0; p < 1008; p++) begin
      pci = 10'(p); #1;
      for (int n = 0; n < 127; n++) begin
        checks++;
        if ((sss[n] ? -1 : 1) != sss_sym(p, n)) begin
          failures++;
          if (failures < 5) $display("mismatch pci=%0d n=%0d", p, n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
