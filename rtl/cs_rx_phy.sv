// cs_rx_phy -- UE cell-search receiver PHY.
//
// Chain (the paper's receiver block diagram):
//   received samples -> PSS search (raster position / GSCN, PCI_2, PSS symbol position)
//   -> SS OFDM symbol extractor + CP removal (four symbols of the SS block, one burst later)
//   -> 4096-point FFT (outside this module: fft_in_* out, fft_out_* back)
//   -> SS block extraction -> SSS search (PCI_1; PCI = 3*PCI_1 + PCI_2)
//                          -> DMRS search (SS_i)  -> boundary search (ticks).
// The input is WL-bit complex samples (Q2.(WL-2)) with valid/ready; ready is low only while
// the PSS search computes. The blind cyclic-prefix detector in front of the PSS search is not
// part of this module: all samples go to the PSS search, which the paper allows when CP
// detection fails. Samples must arrive at most one per clock; the FFT must accept the
// extractor's output at that rate and return its bins in natural order with last on bin 4095.
// Lint: the extractor's symbol number is not needed (the block extractor counts symbols
// itself) and is left unused on purpose.
module cs_rx_phy
  import cs_pkg::*;
#(
  parameter int unsigned WL       = 24,
  parameter int unsigned D_PSS    = 10,
  parameter int unsigned NUM_GSCN = N_RASTER,
  parameter int unsigned FIRST_G  = 0,
  parameter int unsigned PERIOD   = SSB_PERIOD,
  parameter int unsigned SSS_LANES = 1,
  parameter int unsigned DMRS_WL  = 16,
  parameter int unsigned ADV      = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 restart,
  input  logic [63:0]          pss_threshold,
  // received baseband samples
  input  logic                 s_valid,
  output logic                 s_ready,
  input  logic signed [WL-1:0] s_re,
  input  logic signed [WL-1:0] s_im,
  // to the FFT
  output logic                 fft_in_valid,
  output logic signed [WL-1:0] fft_in_re,
  output logic signed [WL-1:0] fft_in_im,
  output logic                 fft_in_last,
  // from the FFT
  input  logic                 fft_out_valid,
  input  logic signed [WL-1:0] fft_out_re,
  input  logic signed [WL-1:0] fft_out_im,
  input  logic                 fft_out_last,
  // results
  output logic                 pss_found,
  output logic [1:0]           pci2,
  output logic [13:0]          gscn,
  output logic [31:0]          pss_pos,
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
  output logic [63:0]          pss_metric,
  output logic [31:0]          n_tried,
  output logic [8:0]           pci1,
  output logic [63:0]          sss_metric,
  output logic [63:0]          dmrs_metric,
  output logic                 ext_busy,
  output logic                 blk_done
);
  logic        s_fire, pss_det, ref_tick, arm;
  logic [5:0]  raster;
  logic [1:0]  ext_sym;
  logic        sss_v, dmrs_v;
  logic signed [WL-1:0] sss_re, sss_im;
  logic signed [DMRS_WL-1:0] dmrs_re, dmrs_im;

  assign s_fire = s_valid && s_ready;

  pss_search #(.WL(WL), .D_PSS(D_PSS), .NUM_GSCN(NUM_GSCN), .FIRST_G(FIRST_G)) u_pss (
    .clk, .rst, .restart, .threshold(pss_threshold), .s_valid, .s_ready, .s_re, .s_im,
    .detect(pss_det), .locked(pss_found), .pci2, .raster, .gscn, .pss_pos,
    .peak_metric(pss_metric), .n_tried);

  ss_symbol_extractor #(.WL(WL), .PERIOD(PERIOD), .ADV(ADV)) u_ext (
    .clk, .rst(rst || restart), .s_fire, .s_re, .s_im, .pss_detect(pss_det), .pss_pos,
    .m_valid(fft_in_valid), .m_re(fft_in_re), .m_im(fft_in_im), .m_last(fft_in_last),
    .m_sym(ext_sym), .ref_tick, .busy(ext_busy));

  assign arm = ref_tick;

  ss_block_extract #(.WL(WL), .DW(DMRS_WL)) u_blk (
    .clk, .rst, .arm, .raster, .f_valid(fft_out_valid), .f_re(fft_out_re), .f_im(fft_out_im),
    .f_last(fft_out_last), .sss_valid(sss_v), .sss_re, .sss_im, .pci_valid, .pci,
    .dmrs_valid(dmrs_v), .dmrs_re, .dmrs_im, .done(blk_done));

  sss_search #(.WL(WL), .LANES(SSS_LANES)) u_sss (
    .clk, .rst, .start(arm), .pci2, .r_valid(sss_v), .r_re(sss_re), .r_im(sss_im),
    .pci_valid, .pci1, .pci, .peak_metric(sss_metric));

  dmrs_search #(.WL(DMRS_WL)) u_dmrs (
    .clk, .rst, .start(pci_valid), .pci, .r_valid(dmrs_v), .r_re(dmrs_re), .r_im(dmrs_im),
    .ssi_valid, .ssi, .peak_metric(dmrs_metric));

  boundary_search #(.ADV(ADV)) u_bnd (
    .clk, .rst(rst || restart), .s_fire, .ref_tick, .ssi_valid, .ssi, .locked, .sym_num,
    .symbol_tick, .slot_tick, .subframe_tick, .frame_tick);
endmodule
