// ss_block_extract -- keeps the 960 resource elements of the SS block from the FFT output and
// hands the SSS and DMRS parts to their searches.
//
// The FFT delivers four symbols of 4096 bins in natural order (last on bin 4095). Bin b is
// the frequency offset b or b-4096, i.e. active subcarrier s = offset + 1638; bins with
// 0 <= s - 48*raster < 240 are written to a 960-word RAM at symbol*240 + (s - 48*raster).
// After the fourth symbol the block streams the 127 SSS samples (symbol 2, subcarriers
// 56..182) to the SSS search. When the PCI is known (`pci_valid`) it streams the 144 DMRS
// samples in DMRS order (symbol 1: sc = 4j+v; symbol 2: 4j+v below and 192+4j+v above the SSS;
// symbol 3: 4j+v; v = PCI mod 4), reduced to DW bits (most significant bits kept) for the
// DMRS search. `arm` (the extractor starting) restarts the symbol count. Streams carry one
// sample per clock. The RAM organisation and the hand-over order are this design's choices.
// Lint: only PCI mod 4 (the DMRS subcarrier offset v) is used; the upper PCI bits are
// unused on purpose.
module ss_block_extract
  import cs_pkg::*;
#(
  parameter int unsigned WL = 24,
  parameter int unsigned DW = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 arm,
  input  logic [5:0]           raster,
  input  logic                 f_valid,
  input  logic signed [WL-1:0] f_re,
  input  logic signed [WL-1:0] f_im,
  input  logic                 f_last,
  output logic                 sss_valid,
  output logic signed [WL-1:0] sss_re,
  output logic signed [WL-1:0] sss_im,
  input  logic                 pci_valid,
  input  logic [9:0]           pci,
  output logic                 dmrs_valid,
  output logic signed [DW-1:0] dmrs_re,
  output logic signed [DW-1:0] dmrs_im,
  output logic                 done
);
  typedef enum logic [1:0] {COLLECT, SSS_OUT, WAIT_PCI, DMRS_OUT} st_e;
  st_e st;
  logic [2*WL-1:0] ram [SSB_RE];
  logic [11:0] bin;
  logic [1:0]  sym;
  logic signed [13:0] rel;
  logic [7:0]  j;
  logic [9:0]  raddr;
  logic        rv_sss, rv_dmrs;
  logic [2*WL-1:0] rq;
  logic [1:0]  v;

  always_comb begin
    rel = ((bin < 12'd2048) ? 14'(bin) : 14'(bin) - 14'sd4096) + 14'(SC_CENTER) - 14'(raster) * 14'sd48;
  end

  always_ff @(posedge clk)
    if (st == COLLECT && f_valid && rel >= 0 && rel < 14'(SSB_SC))
      ram[10'(sym) * 10'(SSB_SC) + 10'(rel)] <= {f_re, f_im};

  // DMRS j -> RAM address
  always_comb begin
    if (st == SSS_OUT)  raddr = 10'(2 * SSB_SC + SEQ_OFF) + 10'(j);
    else if (j < 8'd60) raddr = 10'(SSB_SC) + 10'(j) * 10'd4 + 10'(v);
    else if (j < 8'd72) raddr = 10'(2 * SSB_SC) + 10'(j - 8'd60) * 10'd4 + 10'(v);
    else if (j < 8'd84) raddr = 10'(2 * SSB_SC + 192) + 10'(j - 8'd72) * 10'd4 + 10'(v);
    else                raddr = 10'(3 * SSB_SC) + 10'(j - 8'd84) * 10'd4 + 10'(v);
  end

  always_ff @(posedge clk) begin
    rv_sss  <= 1'b0;
    rv_dmrs <= 1'b0;
    rq      <= ram[raddr];
    if (rst || arm) begin
      st <= COLLECT; bin <= '0; sym <= '0; j <= '0; v <= '0; done <= 1'b0;
    end else begin
      case (st)
        COLLECT: if (f_valid) begin
          bin <= bin + 12'd1;
          if (f_last) begin
            bin <= '0;
            sym <= sym + 2'd1;
            if (sym == 2'd3) begin st <= SSS_OUT; j <= '0; end
          end
        end
        SSS_OUT: begin
          rv_sss <= 1'b1;
          j <= j + 8'd1;
          if (j == 8'(SEQ_LEN - 1)) begin st <= WAIT_PCI; j <= '0; end
        end
        WAIT_PCI: if (pci_valid) begin st <= DMRS_OUT; v <= pci[1:0]; j <= '0; end
        DMRS_OUT: begin
          rv_dmrs <= 1'b1;
          j <= j + 8'd1;
          if (j == 8'(N_DMRS - 1)) begin st <= COLLECT; done <= 1'b1; j <= '0; end
        end
        default: st <= COLLECT;
      endcase
    end
  end

  assign sss_valid  = rv_sss;
  assign sss_re     = rq[2*WL-1:WL];
  assign sss_im     = rq[WL-1:0];
  assign dmrs_valid = rv_dmrs;
  assign dmrs_re    = DW'($signed(rq[2*WL-1:WL]) >>> (WL - DW));
  assign dmrs_im    = DW'($signed(rq[WL-1:0]) >>> (WL - DW));
endmodule
