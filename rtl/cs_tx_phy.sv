// cs_tx_phy -- gNB cell-search transmitter PHY up to the IFFT (the paper's "SS scheduler").
//
// The MAC writes PCI, GSCN and an enable bit over AXI4-Lite. While enabled, the frame
// scheduler counts subcarriers, symbols, slots, subframes and frames; the SS block writer
// builds the next SS block (PSS, SSS, DMRS for the next SS index, PBCH filler) in the 960-word
// SS RAM, and the resource mapper streams 4096-bin frequency-domain OFDM symbols with the SS
// block placed on raster position GSCN - 7711 in symbols 4, 8, 16, 20, 32, 36, 44, 48 (+0..3)
// of every even frame. The stream (Q2.14 complex, valid/ready, last per symbol, symbol-in-slot
// index alongside) feeds the 4096-point IFFT, CP insertion and windowing, which are outside
// this module. Clearing enable (or reset) restarts the frame timing at frame 0, symbol 0.
// Lint: the frame scheduler's slot/subframe/frame-position outputs and the writer's SS index
// are not needed here and are left unused on purpose.
module cs_tx_phy
  import cs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite configuration
  input  logic        awvalid,
  output logic        awready,
  input  logic [3:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  input  logic        arvalid,
  output logic        arready,
  input  logic [3:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  // frequency-domain symbol stream to the IFFT
  output logic        m_valid,
  input  logic        m_ready,
  output cplx16_t     m_data,
  output logic        m_last,
  output logic [3:0]  m_sym,
  // status
  output logic [9:0]  frame_idx,
  output logic        underrun
);
  logic        enable;
  logic [9:0]  pci;
  logic [13:0] gscn;
  logic        run_rst;
  logic [5:0]  raster;

  logic [11:0] sc_idx;
  logic [3:0]  sym_idx, sf_idx;
  logic        slot_idx, ss_active, sym_last, adv;
  logic [8:0]  sym_in_frame;
  logic [2:0]  ss_idx, wr_issb;
  logic [1:0]  ss_sym;
  logic [3:0]  consumed, region_valid;
  logic        wr_en, rd_en;
  logic [9:0]  wr_addr, rd_addr;
  cplx16_t     wr_data, rd_data;

  axil_regs u_regs (.clk, .rst, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata,
                    .bvalid, .bready, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
                    .enable, .pci, .gscn);

  assign run_rst = rst || !enable;
  always_comb begin
    if (gscn < 14'(GSCN_BASE))                       raster = '0;
    else if (gscn > 14'(GSCN_BASE + N_RASTER - 1))   raster = 6'(N_RASTER - 1);
    else                                             raster = 6'(gscn - 14'(GSCN_BASE));
  end

  frame_scheduler u_fs (.clk, .rst(run_rst), .adv, .sc_idx, .sym_idx, .slot_idx, .sf_idx,
                        .frame_idx, .sym_in_frame, .ss_active, .ss_idx, .ss_sym, .sym_last);

  ss_block_writer u_wr (.clk, .rst(run_rst), .pci, .consumed, .region_valid, .wr_issb,
                        .wr_en, .wr_addr, .wr_data);

  ss_ram u_ram (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  resource_mapper u_map (.clk, .rst(run_rst), .en(enable), .raster, .sc_idx, .sym_idx,
                         .ss_active, .ss_sym, .adv, .rd_en, .rd_addr, .rd_data, .region_valid,
                         .consumed, .underrun, .m_valid, .m_ready, .m_data, .m_last, .m_sym);

  // The block the mapper is about to send must be the one the writer built for this SS index.
  assert property (@(posedge clk) disable iff (run_rst)
                   ss_active && sc_idx == 12'd0 && ss_sym == 2'd0 && adv |-> !underrun);
endmodule
