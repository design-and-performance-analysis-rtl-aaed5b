// tb_sss_search -- SSS search: for several PCIs the 127 received SSS samples are the BPSK
// sequence of tb_ref_pkg (amplitude 2^22) rotated by a random quarter-turn common phase plus
// random noise of up to a quarter of the amplitude; `start` carries PCI_2. The search must
// report PCI_1 = PCI / 3 and the full PCI, once per run.
module tb_sss_search;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0, r_valid = 0;
  logic [1:0] pci2 = 0;
  logic signed [23:0] r_re = 0, r_im = 0;
  logic pci_valid; logic [8:0] pci1; logic [9:0] pci; logic [63:0] peak_metric;
  int checks = 0, failures = 0, n_valid = 0;
  always #5 clk = ~clk;
  sss_search dut (.*);
  always @(posedge clk) if (pci_valid) n_valid++;
  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int pcis[5] = '{0, 517, 1007, 335, 672};
    repeat (3) @(posedge clk); rst <= 0;
    for (int r = 0; r < 5; r++) begin
      int p, rot;
      p = pcis[r]; rot = $urandom % 4;
      @(posedge clk); start <= 1; pci2 <= 2'(p % 3); n_valid = 0;
      @(posedge clk); start <= 0;
      for (int n = 0; n < 127; n++) begin
        int a, nr, ni;
        a = sss_sym(p, n) * (1 << 22);
        nr = int'($urandom % (1 << 21)) - (1 << 20); ni = int'($urandom % (1 << 21)) - (1 << 20);
        r_valid <= 1;
        case (rot)
          0: begin r_re <= 24'(a + nr);  r_im <= 24'(ni); end
          1: begin r_re <= 24'(nr);      r_im <= 24'(a + ni); end
          2: begin r_re <= 24'(-a + nr); r_im <= 24'(ni); end
          default: begin r_re <= 24'(nr); r_im <= 24'(-a + ni); end
        endcase
        @(posedge clk);
      end
      r_valid <= 0;
      while (!pci_valid) @(posedge clk);
      checks++;
      if (pci != 10'(p) || pci1 != 9'(p / 3)) begin failures++; $display("pci %0d: got %0d (%0d)", p, pci, pci1); end
      repeat (5) @(posedge clk);
      checks++; if (n_valid != 1) begin failures++; $display("valid pulses %0d", n_valid); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
