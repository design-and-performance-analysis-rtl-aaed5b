// resource_mapper -- frequency-domain OFDM symbol stream of the cell-search transmitter.
//
// For every OFDM symbol it emits 4096 subcarrier values in natural FFT-bin order on an
// AXI-Stream style master port (valid/ready, last on bin 4095). Bin b is the frequency offset
// b or b-4096 from the carrier centre, i.e. active subcarrier s = offset + 1638. In the four
// symbols of an SS block the 240 subcarriers starting at s0 = raster * 48 are read from the SS
// RAM (address ss_sym*240 + s - s0); every other value is zero. The frame scheduler that
// drives `ss_active/ss_sym/sc_idx/sym_idx` is advanced by `adv`, once per value fetched.
// The RAM has one clock of read latency, so the mapper fetches one value ahead of the output
// register; the stream runs at one value per clock when `m_ready` is held high.
// When a symbol of the SS block has been fetched the mapper pulses `consumed[ss_sym]` so the
// writer may refill that region; `underrun` is set (sticky) if an SS symbol starts while the
// writer has not finished its region. The GSCN raster step of 48 subcarriers follows the
// paper's 1.44 MHz raster; placing raster 0 at the first active subcarrier is this design's
// choice. The symbol-in-slot index travels with the data (m_sym) for the CP insertion stage.
module resource_mapper
  import cs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [5:0]  raster,        // SSB raster position (GSCN - GSCN_BASE)
  // frame scheduler
  input  logic [11:0] sc_idx,
  input  logic [3:0]  sym_idx,
  input  logic        ss_active,
  input  logic [1:0]  ss_sym,
  output logic        adv,
  // SS RAM read port and writer handshake
  output logic        rd_en,
  output logic [9:0]  rd_addr,
  input  cplx16_t     rd_data,
  input  logic [3:0]  region_valid,
  output logic [3:0]  consumed,
  output logic        underrun,
  // AXI-Stream master
  output logic        m_valid,
  input  logic        m_ready,
  output cplx16_t     m_data,
  output logic        m_last,
  output logic [3:0]  m_sym
);
  logic        fetch;
  logic signed [13:0] off, rel;
  logic        in_ssb;
  logic        sel_q;

  assign fetch = en && (!m_valid || m_ready);
  assign adv   = fetch;

  always_comb begin
    off     = (sc_idx < 12'd2048) ? 14'(sc_idx) : 14'(sc_idx) - 14'sd4096;
    rel     = off + 14'(SC_CENTER) - 14'(raster) * 14'sd48;
    in_ssb  = ss_active && (rel >= 0) && (rel < 14'(SSB_SC));
    rd_en   = fetch && in_ssb;
    rd_addr = 10'(ss_sym) * 10'(SSB_SC) + 10'(rel);
  end

  always_ff @(posedge clk) begin
    consumed <= '0;
    if (rst) begin
      m_valid <= 1'b0; sel_q <= 1'b0; m_last <= 1'b0; m_sym <= '0; underrun <= 1'b0;
    end else begin
      if (m_valid && m_ready && !fetch) m_valid <= 1'b0;
      if (fetch) begin
        m_valid <= 1'b1;
        sel_q   <= in_ssb;
        m_last  <= (sc_idx == 12'(FFT_N - 1));
        m_sym   <= sym_idx;
        if (ss_active && sc_idx == 12'd0 && !region_valid[ss_sym]) underrun <= 1'b1;
        if (ss_active && sc_idx == 12'(FFT_N - 1)) consumed[ss_sym] <= 1'b1;
      end
    end
  end

  assign m_data = sel_q ? rd_data : '0;
endmodule
