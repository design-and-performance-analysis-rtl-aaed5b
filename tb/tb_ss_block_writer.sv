// tb_ss_block_writer -- builds SS blocks for two PCIs and checks every one of the 960 words
// against the TS 38.211 layout (PSS, SSS, DMRS of the right SS index, zero guard bands, PBCH
// filler of QPSK amplitude), and the region hand-over: a region of the next block is only
// written after the mapper has consumed it.
module tb_ss_block_writer;
  import cs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic [9:0] pci;
  logic [3:0] consumed = 0, region_valid;
  logic [2:0] wr_issb;
  logic wr_en; logic [9:0] wr_addr; cplx16_t wr_data;
  cplx16_t mem [960];
  int checks = 0, failures = 0;
  bit early_write;
  always #5 clk = ~clk;
  ss_block_writer dut (.*);
  always @(posedge clk) if (wr_en) mem[wr_addr] <= wr_data;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  task automatic check_block(input int p, input int issb);
    bit c[288];
    int didx, k;
    dmrs_seq(p, issb, c);
    for (int s = 0; s < 4; s++) for (int sc = 0; sc < 240; sc++) begin
      cplx16_t w;
      w = mem[s * 240 + sc];
      k = tb_ref_pkg::re_kind(s, sc, p % 4, didx);
      case (k)
        0: chk(w.re == 0 && w.im == 0, $sformatf("zero s%0d sc%0d", s, sc));
        1: chk(w.re == 16384 * pss_sym(p % 3, sc - 56) && w.im == 0, $sformatf("pss sc%0d", sc));
        2: chk(w.re == 16384 * sss_sym(p, sc - 56) && w.im == 0, $sformatf("sss sc%0d", sc));
        3: chk(w.re == (c[2*didx] ? -11585 : 11585) && w.im == (c[2*didx+1] ? -11585 : 11585),
               $sformatf("dmrs s%0d sc%0d issb%0d", s, sc, issb));
        default: chk((w.re == 11585 || w.re == -11585) && (w.im == 11585 || w.im == -11585),
               $sformatf("pbch s%0d sc%0d", s, sc));
      endcase
    end
  endtask
  initial begin
    pci = 10'd341;
    repeat (3) @(posedge clk); rst <= 0;
    wait (region_valid == 4'hF);
    @(posedge clk);
    check_block(341, 0);
    chk(wr_issb == 1, "next index");
    // nothing is written until region 0 is consumed
    early_write = 0;
    repeat (300) begin @(posedge clk); if (wr_en) early_write = 1; end
    chk(!early_write, "writer waits for the consumed pulse");
    for (int r = 0; r < 4; r++) begin
      if (r == 3) pci = 10'd1006;   // takes effect at the block after next
      consumed <= 4'(1 << r); @(posedge clk); consumed <= 0;
      #1 chk(region_valid[r] == 0, "region invalid after consume");
      repeat (300) @(posedge clk);
      chk(region_valid[r] == 1, "region rewritten");
    end
    check_block(341, 1);
    for (int r = 0; r < 4; r++) begin consumed <= 4'(1 << r); @(posedge clk); consumed <= 0; repeat (300) @(posedge clk); end
    check_block(1006, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
