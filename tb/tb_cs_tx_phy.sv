// tb_cs_tx_phy -- transmitter PHY: configures PCI 517 and GSCN 7716 (raster 5) over
// AXI4-Lite, enables the block and takes the first nine OFDM symbols of frame 0 off the stream
// under random back-pressure. Every bin is compared with an independent model of the SS block
// (PSS, SSS, DMRS of SS index 0 in symbols 4..7 and SS index 1 from symbol 8, PBCH QPSK
// elsewhere in the block, zero outside), `last`, the symbol index, underrun and frame index.
module tb_cs_tx_phy;
  import cs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic arvalid = 0, arready, rvalid, rready = 1;
  logic [3:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic m_valid, m_ready = 0, m_last; cplx16_t m_data; logic [3:0] m_sym;
  logic [9:0] frame_idx; logic underrun;
  int checks = 0, failures = 0;
  localparam int PCI = 517, RASTER = 5;
  always #5 clk = ~clk;
  cs_tx_phy dut (.*);
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(posedge clk); awvalid <= 1; awaddr <= a; wvalid <= 1; wdata <= d;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    do @(posedge clk); while (!bvalid);
  endtask
  function automatic bit expect_ok(input int sym, input int bin, input cplx16_t w);
    int off, rel, s, issb, didx, k;
    bit c[288];
    off = (bin < 2048) ? bin : bin - 4096;
    rel = off + 1638 - RASTER * 48;
    if (sym < 4 || rel < 0 || rel >= 240) return w.re == 0 && w.im == 0;
    s = (sym - 4) % 4; issb = (sym < 8) ? 0 : 1;
    k = tb_ref_pkg::re_kind(s, rel, PCI % 4, didx);
    case (k)
      0: return w.re == 0 && w.im == 0;
      1: return w.re == 16384 * pss_sym(PCI % 3, rel - 56) && w.im == 0;
      2: return w.re == 16384 * sss_sym(PCI, rel - 56) && w.im == 0;
      3: begin
        dmrs_seq(PCI, issb, c);
        return w.re == (c[2*didx] ? -11585 : 11585) && w.im == (c[2*didx+1] ? -11585 : 11585);
      end
      default: return (w.re == 11585 || w.re == -11585) && (w.im == 11585 || w.im == -11585);
    endcase
  endfunction
  initial begin
    int bin, sym, nz;
    repeat (3) @(posedge clk); rst <= 0;
    wr(4'h4, PCI); wr(4'h8, 7711 + RASTER); wr(4'h0, 1);
    bin = 0; sym = 0; nz = 0;
    while (sym < 9) begin
      m_ready <= ($urandom % 5) != 0;
      @(posedge clk);
      if (m_valid && m_ready) begin
        checks++;
        if (!expect_ok(sym, bin, m_data) || m_last != (bin == 4095) || m_sym != 4'(sym)) begin
          failures++;
          if (failures < 6) $display("mismatch sym %0d bin %0d: %0d %0d", sym, bin, m_data.re, m_data.im);
        end
        if (m_data.re != 0) nz++;
        bin++;
        if (bin == 4096) begin bin = 0; sym++; end
      end
    end
    checks++; if (nz != 127 + 240 + (127 + 96) + 240 + 127) begin failures++; $display("non-zero bins %0d", nz); end
    checks++; if (underrun || frame_idx != 0) begin failures++; $display("underrun/frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
