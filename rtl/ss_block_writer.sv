// ss_block_writer -- builds the upcoming SS block in the SS RAM.
//
// This is the "SS write address generator" (a mod-960 counter), the write-address decoder and
// the source multiplexer of the SS scheduler. For each SS block it latches the configured PCI,
// asks dmrs_gen for the DMRS of the next SS index (0..7, in burst order), then walks the 960
// resource elements in order (symbol-major, 240 subcarriers per symbol) and writes for each
// the PSS, SSS, DMRS, PBCH or zero symbol that TS 38.211 puts there:
//   symbol 0: PSS on subcarriers 56..182, zero elsewhere;
//   symbol 1 and 3: DMRS where sc mod 4 = PCI mod 4, PBCH elsewhere;
//   symbol 2: SSS on 56..182, zero on 48..55 and 183..191, DMRS/PBCH on 0..47 and 192..239.
// The RAM holds a single SS block, so the writer overwrites region r (one symbol, 240 words)
// of the next block only after the resource mapper reports that it has read region r of the
// current block (`consumed[r]` pulse). `region_valid[r]` tells the mapper that region r holds
// the block it is about to send. Flow control between the two is this design's own choice;
// the paper only says the counter stores the upcoming SS instance in the memory.
// Lint: dmrs_gen's busy flag and bit output are unused on purpose (the writer waits for
// `done` and takes the QPSK symbols).
module ss_block_writer
  import cs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [9:0]  pci,
  input  logic [3:0]  consumed,      // region r of the current block has been read
  output logic [3:0]  region_valid,  // region r holds the block to be sent next
  output logic [2:0]  wr_issb,       // SS index of the block being built
  output logic        wr_en,
  output logic [9:0]  wr_addr,
  output cplx16_t     wr_data
);
  typedef enum logic [1:0] {S_START, S_DMRS, S_WRITE} st_e;
  st_e st;
  logic [9:0]  pci_q;
  logic [2:0]  issb;
  logic [1:0]  sym;
  logic [7:0]  sc;
  logic [3:0]  free;            // region may be overwritten
  logic        dmrs_start, dmrs_busy, dmrs_done;
  logic [2*N_DMRS-1:0] dmrs_bits;
  cplx16_t     dmrs_sym [N_DMRS];
  cplx16_t     pbch_sym;
  logic        pbch_next;
  logic [SEQ_LEN-1:0] pss, sss;
  re_kind_e    kind;

  pss_gen u_pss (.pci(pci_q), .pss(pss));
  sss_gen u_sss (.pci(pci_q), .sss(sss));
  dmrs_gen u_dmrs (.clk, .rst, .start(dmrs_start), .pci(pci), .issb(issb),
                   .busy(dmrs_busy), .done(dmrs_done), .prbs(dmrs_bits), .sym(dmrs_sym));
  pbch_gen u_pbch (.clk, .rst, .next(pbch_next), .sym(pbch_sym));

  logic write_ok;
  assign write_ok   = (st == S_WRITE) && free[sym];
  assign kind       = re_kind(32'(sym), 32'(sc), pci_q[1:0]);
  assign pbch_next  = write_ok && (kind == RE_PBCH);
  assign dmrs_start = (st == S_START);

  always_comb begin
    wr_data = '0;
    unique case (kind)
      RE_PSS:  begin
        wr_data.re = pss[7'(sc - 8'(SEQ_OFF))] ? -16'(BPSK_AMP) : 16'(BPSK_AMP);
      end
      RE_SSS:  begin
        wr_data.re = sss[7'(sc - 8'(SEQ_OFF))] ? -16'(BPSK_AMP) : 16'(BPSK_AMP);
      end
      RE_DMRS: wr_data = dmrs_sym[dmrs_index(32'(sym), 32'(sc))];
      RE_PBCH: wr_data = pbch_sym;
      default: wr_data = '0;
    endcase
  end

  assign wr_en   = write_ok;
  assign wr_addr = 10'(sym) * 10'(SSB_SC) + 10'(sc);
  assign wr_issb = issb;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_START; pci_q <= '0; issb <= '0; sym <= '0; sc <= '0;
      free <= '1; region_valid <= '0;
    end else begin
      for (int r = 0; r < 4; r++) if (consumed[r]) begin free[r] <= 1'b1; region_valid[r] <= 1'b0; end
      case (st)
        S_START: begin pci_q <= pci; st <= S_DMRS; end
        S_DMRS:  if (dmrs_done) begin st <= S_WRITE; sym <= '0; sc <= '0; end
        S_WRITE: if (free[sym]) begin
          if (sc == 8'(SSB_SC - 1)) begin
            sc <= '0;
            free[sym]         <= 1'b0;
            region_valid[sym] <= 1'b1;
            if (sym == 2'd3) begin
              issb <= issb + 3'd1;
              st   <= S_START;
            end
            sym <= sym + 2'd1;
          end else begin
            sc <= sc + 8'd1;
          end
        end
        default: st <= S_START;
      endcase
    end
  end
endmodule
