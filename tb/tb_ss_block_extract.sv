// tb_ss_block_extract -- SS block extraction from four FFT output symbols (raster 37, an SS
// block that straddles no edge but sits above DC). Bin data encode symbol and bin number, so
// the test can check that the 127 SSS samples are symbol 2, subcarriers 56..182, and that
// after `pci_valid` the 144 DMRS samples follow in DMRS order for v = PCI mod 4 (index from
// tb_ref_pkg::re_kind), reduced to 16 bits by dropping the 8 low bits, then `done` (held until the next arm).
// Run twice (PCI 517 -> v = 1, PCI 1006 -> v = 2), re-armed between the runs.
module tb_ss_block_extract;
  import tb_ref_pkg::*;
  localparam int RASTER = 37;
  logic clk = 0, rst = 1, arm = 0, f_valid = 0, f_last = 0, pci_valid = 0;
  logic [5:0] raster = RASTER;
  logic signed [23:0] f_re = 0, f_im = 0;
  logic [9:0] pci = 0;
  logic sss_valid, dmrs_valid, done;
  logic signed [23:0] sss_re, sss_im; logic signed [15:0] dmrs_re, dmrs_im;
  int checks = 0, failures = 0, n_sss = 0, n_dmrs = 0, cur_pci = 0;
  int dsym[144], dsc[144];
  always #5 clk = ~clk;
  ss_block_extract dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // bin value: re = (sym*4096 + bin) << 8, im = -(bin << 8)
  function automatic int binof(input int sc);
    int off; off = sc + RASTER * 48 - 1638; return (off + 4096) % 4096;
  endfunction
  always @(posedge clk) begin
    if (!rst && sss_valid) begin
      checks++;
      if (sss_re != (2 * 4096 + binof(56 + n_sss)) * 256 || sss_im != -binof(56 + n_sss) * 256) begin
        failures++; if (failures < 5) $display("sss %0d: %0d", n_sss, sss_re);
      end
      n_sss++;
    end
    if (!rst && dmrs_valid) begin
      checks++;
      if (dmrs_re != 16'(dsym[n_dmrs] * 4096 + binof(dsc[n_dmrs])) || dmrs_im != -16'(binof(dsc[n_dmrs]))) begin
        failures++; if (failures < 5) $display("dmrs %0d: %0d exp sym %0d sc %0d", n_dmrs, dmrs_re, dsym[n_dmrs], dsc[n_dmrs]);
      end
      n_dmrs++;
    end
  end
  initial begin
    int pcis[2] = '{517, 1006};
    repeat (3) @(posedge clk); rst <= 0;
    for (int r = 0; r < 2; r++) begin
      cur_pci = pcis[r];
      for (int s = 1; s < 4; s++) for (int sc = 0; sc < 240; sc++) begin
        int d, k;
        k = tb_ref_pkg::re_kind(s, sc, cur_pci % 4, d);
        if (k == 3) begin dsym[d] = s; dsc[d] = sc; end
      end
      n_sss = 0; n_dmrs = 0;
      @(posedge clk); arm <= 1; @(posedge clk); arm <= 0;
      for (int s = 0; s < 4; s++) for (int b = 0; b < 4096; b++) begin
        f_valid <= 1; f_re <= 24'((s * 4096 + b) * 256); f_im <= -24'(b * 256); f_last <= (b == 4095);
        @(posedge clk);
      end
      f_valid <= 0; f_last <= 0;
      repeat (300) @(posedge clk);
      checks++; if (n_sss != 127 || n_dmrs != 0 || done) begin failures++; $display("sss count %0d", n_sss); end
      pci <= 10'(cur_pci); pci_valid <= 1; @(posedge clk); pci_valid <= 0;
      repeat (300) @(posedge clk);
      checks++; if (n_dmrs != 144 || !done) begin failures++; $display("dmrs count %0d done %0d", n_dmrs, done); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
