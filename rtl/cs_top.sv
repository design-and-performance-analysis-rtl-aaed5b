// cs_top -- 5G NR cell search: gNB transmitter PHY and UE receiver PHY side by side.
//
// The transmitter (cs_tx_phy) produces frequency-domain OFDM symbols carrying SS bursts for
// the PCI and GSCN written over AXI4-Lite. OFDM modulation (4096-point IFFT, cyclic prefix
// insertion, windowing) and demodulation (4096-point FFT) are vendor IP in the reference
// design and are not part of this RTL: their streams are ports of this module, so a channel
// and the transforms can sit between tx_* and rx_*, and between fft_in_* and fft_out_*.
// The receiver (cs_rx_phy) finds GSCN, PCI and SS index blindly and produces the symbol,
// slot, subframe and frame ticks.
module cs_top
  import cs_pkg::*;
#(
  parameter int unsigned WL        = 24,
  parameter int unsigned D_PSS     = 10,
  parameter int unsigned NUM_GSCN  = N_RASTER,
  parameter int unsigned FIRST_G   = 0,
  parameter int unsigned SSS_LANES = 1
) (
  input  logic                 clk,
  input  logic                 rst,
  // transmitter configuration (AXI4-Lite)
  input  logic                 awvalid,
  output logic                 awready,
  input  logic [3:0]           awaddr,
  input  logic                 wvalid,
  output logic                 wready,
  input  logic [31:0]          wdata,
  output logic                 bvalid,
  input  logic                 bready,
  input  logic                 arvalid,
  output logic                 arready,
  input  logic [3:0]           araddr,
  output logic                 rvalid,
  input  logic                 rready,
  output logic [31:0]          rdata,
  // transmitter output: frequency-domain symbols to the IFFT / CP insertion
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output cplx16_t              tx_data,
  output logic                 tx_last,
  output logic [3:0]           tx_sym,
  output logic                 tx_underrun,
  // receiver input: time-domain samples
  input  logic                 rx_restart,
  input  logic [63:0]          pss_threshold,
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  logic signed [WL-1:0] rx_re,
  input  logic signed [WL-1:0] rx_im,
  // receiver FFT
  output logic                 fft_in_valid,
  output logic signed [WL-1:0] fft_in_re,
  output logic signed [WL-1:0] fft_in_im,
  output logic                 fft_in_last,
  input  logic                 fft_out_valid,
  input  logic signed [WL-1:0] fft_out_re,
  input  logic signed [WL-1:0] fft_out_im,
  input  logic                 fft_out_last,
  // receiver results
  output logic                 pss_found,
  output logic [1:0]           pci2,
  output logic [13:0]          gscn,
  output logic [31:0]          pss_pos,
  output logic [31:0]          n_tried,
  output logic                 pci_valid,
  output logic [9:0]           pci,
  output logic                 ssi_valid,
  output logic [2:0]           ssi,
  output logic                 locked,
  output logic [8:0]           sym_num,
  output logic                 symbol_tick,
  output logic                 slot_tick,
  output logic                 subframe_tick,
  output logic                 frame_tick,
  // status
  output logic [9:0]           tx_frame,
  output logic [63:0]          pss_metric,
  output logic [63:0]          sss_metric,
  output logic [63:0]          dmrs_metric,
  output logic [8:0]           pci1,
  output logic                 ext_busy,
  output logic                 blk_done
);

  cs_tx_phy u_tx (
    .clk, .rst, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready,
    .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
    .m_valid(tx_valid), .m_ready(tx_ready), .m_data(tx_data), .m_last(tx_last),
    .m_sym(tx_sym), .frame_idx(tx_frame), .underrun(tx_underrun));

  cs_rx_phy #(.WL(WL), .D_PSS(D_PSS), .NUM_GSCN(NUM_GSCN), .FIRST_G(FIRST_G),
              .SSS_LANES(SSS_LANES)) u_rx (
    .clk, .rst, .restart(rx_restart), .pss_threshold,
    .s_valid(rx_valid), .s_ready(rx_ready), .s_re(rx_re), .s_im(rx_im),
    .fft_in_valid, .fft_in_re, .fft_in_im, .fft_in_last,
    .fft_out_valid, .fft_out_re, .fft_out_im, .fft_out_last,
    .pss_found, .pci2, .gscn, .pss_pos, .pci_valid, .pci, .ssi_valid, .ssi,
    .locked, .sym_num, .symbol_tick, .slot_tick, .subframe_tick, .frame_tick,
    .pss_metric, .n_tried, .pci1, .sss_metric, .dmrs_metric, .ext_busy, .blk_done);
endmodule
