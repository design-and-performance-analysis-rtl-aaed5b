// tb_dmrs_search -- PBCH DMRS search: for two PCIs and every SS index 0..7 the 144 received
// DMRS samples are the QPSK sequence of tb_ref_pkg (Gold sequence written from the standard,
// amplitude 11585) with a random quarter-turn common phase and noise of up to a quarter of
// the amplitude. The search must return the SS index, once per run.
module tb_dmrs_search;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0, r_valid = 0;
  logic [9:0] pci = 0;
  logic signed [15:0] r_re = 0, r_im = 0;
  logic ssi_valid; logic [2:0] ssi; logic [63:0] peak_metric;
  int checks = 0, failures = 0, n_valid = 0;
  always #5 clk = ~clk;
  dmrs_search dut (.*);
  always @(posedge clk) if (ssi_valid) n_valid++;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit c[288];
    int pcis[2] = '{517, 86};
    repeat (3) @(posedge clk); rst <= 0;
    for (int r = 0; r < 16; r++) begin
      int p, issb, rot;
      p = pcis[r / 8]; issb = r % 8; rot = $urandom % 4;
      dmrs_seq(p, issb, c);
      @(posedge clk); start <= 1; pci <= 10'(p); n_valid = 0;
      @(posedge clk); start <= 0;
      for (int m = 0; m < 144; m++) begin
        int a, b, nr, ni;
        a = c[2*m] ? -11585 : 11585; b = c[2*m+1] ? -11585 : 11585;
        nr = int'($urandom % 5793) - 2896; ni = int'($urandom % 5793) - 2896;
        r_valid <= 1;
        case (rot)
          0: begin r_re <= 16'(a + nr);  r_im <= 16'(b + ni); end
          1: begin r_re <= 16'(-b + nr); r_im <= 16'(a + ni); end
          2: begin r_re <= 16'(-a + nr); r_im <= 16'(-b + ni); end
          default: begin r_re <= 16'(b + nr); r_im <= 16'(-a + ni); end
        endcase
        @(posedge clk);
      end
      r_valid <= 0;
      while (!ssi_valid) @(posedge clk);
      checks++;
      if (ssi != 3'(issb)) begin failures++; $display("pci %0d issb %0d: got %0d", p, issb, ssi); end
      repeat (5) @(posedge clk);
      checks++; if (n_valid != 1) begin failures++; $display("valid pulses %0d", n_valid); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
