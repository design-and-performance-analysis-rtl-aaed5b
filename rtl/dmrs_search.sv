// dmrs_search -- PBCH DMRS search: SS block index (SS_i) detection.
//
// The 144 received DMRS samples (WL-bit, here 16) are stored in the DMRS Rx buffer. The DMRS
// search scheduler steps SS_i_temp = 0..7; for each, dmrs_gen produces the reference QPSK
// sequence for the detected PCI and SS_i_temp, and the correlator forms
// corr = sum_m r(m) * conj(q(m)) with q(m) = (a + j b), a, b = +-1 (the 1/sqrt(2) scale is
// dropped), one sample per clock. The DMRS detector keeps the index with the largest |corr|^2.
// Latency: 8 * (60 + 144 + 3) clocks after the buffer is full, roughly 1 650.
// Interface: `start` with the detected PCI clears the buffer; 144 `r_valid` samples follow;
// `ssi_valid` pulses with `ssi` (0..7, the position of the block in the burst).
// Lint: dmrs_gen's QPSK output is unused on purpose; the search uses its bit output.
module dmrs_search
  import cs_pkg::*;
#(
  parameter int unsigned WL = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [9:0]           pci,
  input  logic                 r_valid,
  input  logic signed [WL-1:0] r_re,
  input  logic signed [WL-1:0] r_im,
  output logic                 ssi_valid,
  output logic [2:0]           ssi,
  output logic [63:0]          peak_metric
);
  localparam int unsigned AW = WL + 10;
  typedef enum logic [2:0] {IDLE, FILL, GEN, CORR, CMP, OUT} st_e;
  st_e st;
  logic signed [WL-1:0] buf_re [N_DMRS];
  logic signed [WL-1:0] buf_im [N_DMRS];
  logic [9:0]  pci_q;
  logic [7:0]  m;
  logic [2:0]  cand;
  logic        g_start, g_busy, g_done;
  logic [2*N_DMRS-1:0] bits;
  cplx16_t     g_sym [N_DMRS];
  logic signed [AW-1:0] acc_re, acc_im;
  logic [63:0] met, best;
  logic [2:0]  best_i;

  dmrs_gen u_gen (.clk, .rst, .start(g_start), .pci(pci_q), .issb(cand),
                  .busy(g_busy), .done(g_done), .prbs(bits), .sym(g_sym));

  assign g_start = (st == GEN) && !g_busy && !g_done;
  assign met     = 64'(acc_re * acc_re) + 64'(acc_im * acc_im);

  logic signed [AW-1:0] rr, ri;
  logic a_neg, b_neg;
  always_comb begin
    rr    = AW'(buf_re[m]);
    ri    = AW'(buf_im[m]);
    a_neg = bits[2*m];      // real part of reference is -1
    b_neg = bits[2*m+1];    // imaginary part of reference is -1
  end

  always_ff @(posedge clk) begin
    ssi_valid <= 1'b0;
    if (rst) begin
      st <= IDLE; m <= '0; cand <= '0; pci_q <= '0; best <= '0; best_i <= '0;
      acc_re <= '0; acc_im <= '0; ssi <= '0; peak_metric <= '0;
    end else if (start) begin
      st <= FILL; m <= '0; pci_q <= pci;
    end else begin
      case (st)
        IDLE: ;
        FILL: if (r_valid) begin
          buf_re[m] <= r_re;
          buf_im[m] <= r_im;
          m <= m + 8'd1;
          if (m == 8'(N_DMRS - 1)) begin st <= GEN; cand <= '0; best <= '0; end
        end
        GEN: if (g_done) begin st <= CORR; m <= '0; acc_re <= '0; acc_im <= '0; end
        CORR: begin
          // r * conj(a + jb) = (rr*a + ri*b) + j(ri*a - rr*b)
          acc_re <= acc_re + (a_neg ? -rr : rr) + (b_neg ? -ri : ri);
          acc_im <= acc_im + (a_neg ? -ri : ri) - (b_neg ? -rr : rr);
          m <= m + 8'd1;
          if (m == 8'(N_DMRS - 1)) st <= CMP;
        end
        CMP: begin
          if (met > best || cand == 3'd0) begin best <= met; best_i <= cand; end
          if (cand == 3'd7) st <= OUT;
          else begin cand <= cand + 3'd1; st <= GEN; end
        end
        OUT: begin
          ssi         <= best_i;
          peak_metric <= best;
          ssi_valid   <= 1'b1;
          st          <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
