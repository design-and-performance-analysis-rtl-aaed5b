// tb_resource_mapper -- drives the mapper with the frame scheduler and an SS RAM filled with
// a marker pattern, takes nine OFDM symbols off the stream under random back-pressure and
// checks every bin: SS RAM words at the raster-selected subcarriers of symbols 4..8 (an SSB
// that straddles DC, raster 34), zero elsewhere, `last` on bin 4095, the symbol index, one
// consumed pulse per SS symbol and the underrun flag when a region is not ready.
module tb_resource_mapper;
  import cs_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic [5:0] raster = 6'd34;
  logic [11:0] sc_idx; logic [3:0] sym_idx, sf_idx; logic slot_idx; logic [9:0] frame_idx;
  logic [8:0] sym_in_frame; logic ss_active; logic [2:0] ss_idx; logic [1:0] ss_sym; logic sym_last;
  logic adv, rd_en, wr_en = 0; logic [9:0] rd_addr, wr_addr = 0;
  cplx16_t rd_data, wr_data;
  logic [3:0] region_valid = 4'hF, consumed;
  logic underrun;
  logic m_valid, m_ready = 0, m_last; cplx16_t m_data; logic [3:0] m_sym;
  int checks = 0, failures = 0, n_consumed = 0;
  always #5 clk = ~clk;
  frame_scheduler u_fs (.clk, .rst, .adv, .sc_idx, .sym_idx, .slot_idx, .sf_idx, .frame_idx,
                        .sym_in_frame, .ss_active, .ss_idx, .ss_sym, .sym_last);
  ss_ram u_ram (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);
  resource_mapper dut (.*);
  always @(posedge clk) if (!rst) n_consumed += $countones(consumed);
  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic cplx16_t pat(input int a);
    cplx16_t p; p.re = 16'(a + 1); p.im = 16'(-a); return p;
  endfunction
  initial begin
    int bin, sym;
    for (int a = 0; a < 960; a++) begin
      @(posedge clk); wr_en <= 1; wr_addr <= 10'(a); wr_data <= pat(a);
    end
    @(posedge clk); wr_en <= 0; rst <= 0;
    @(posedge clk); en <= 1;
    bin = 0; sym = 0;
    while (sym < 9) begin
      m_ready <= ($urandom % 4) != 0;
      if (sym == 7 && bin == 4000) region_valid <= 4'hE;  // block for SS 1 not ready
      @(posedge clk);
      if (m_valid && m_ready) begin
        cplx16_t e; int off, rel;
        off = (bin < 2048) ? bin : bin - 4096;
        rel = off + 1638 - 34 * 48;
        e = '0;
        if (sym >= 4 && rel >= 0 && rel < 240) e = pat(((sym - 4) % 4) * 240 + rel);
        checks++;
        if (m_data != e || m_last != (bin == 4095) || m_sym != 4'(sym)) begin
          failures++;
          if (failures < 5) $display("mismatch sym %0d bin %0d", sym, bin);
        end
        bin++;
        if (bin == 4096) begin bin = 0; sym++; end
      end
    end
    repeat (3) @(posedge clk);
    checks++; if (n_consumed != 5) begin failures++; $display("consumed %0d", n_consumed); end
    checks++; if (!underrun) begin failures++; $display("underrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
