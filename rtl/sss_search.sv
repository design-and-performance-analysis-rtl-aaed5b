// sss_search -- secondary synchronisation signal search (PCI_1 = N_ID1 detection).
//
// The 127 received SSS samples are stored in the SSS Rx buffer. The SSS search scheduler then
// steps the candidate N_ID1 = 0..335 (PCI_temp = 3*N_ID1 + PCI_2); for each candidate the SSS
// generator produces the reference sequence and the correlator forms
// corr = sum_n (1 - 2*sss(n)) * r(n), one sample per clock per lane. The SSS detector keeps
// the candidate with the largest |corr|^2 and reports PCI_1 and PCI = 3*PCI_1 + PCI_2.
// LANES generators/correlators work side by side on consecutive candidates, the paper's
// serial-parallel option; LANES = 1 is the sequential architecture of the paper's figure
// and takes 336*127 clocks plus a few (ceil(336/LANES)*(127+2) in general).
// Interface: 127 `r_valid` samples fill the buffer, then the search starts by itself;
// `pci_valid` pulses when PCI_1/PCI are ready. `start` clears the buffer fill count.
module sss_search
  import cs_pkg::*;
#(
  parameter int unsigned WL    = 24,
  parameter int unsigned LANES = 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [1:0]           pci2,
  input  logic                 r_valid,
  input  logic signed [WL-1:0] r_re,
  input  logic signed [WL-1:0] r_im,
  output logic                 pci_valid,
  output logic [8:0]           pci1,
  output logic [9:0]           pci,
  output logic [63:0]          peak_metric
);
  localparam int unsigned AW = WL + 8;
  typedef enum logic [1:0] {FILL, CORR, CMP, OUT} st_e;
  st_e st;
  logic signed [WL-1:0] buf_re [SEQ_LEN];
  logic signed [WL-1:0] buf_im [SEQ_LEN];
  logic [6:0]  n;
  logic [8:0]  base;
  logic signed [AW-1:0] acc_re [LANES];
  logic signed [AW-1:0] acc_im [LANES];
  logic [SEQ_LEN-1:0]   ref_seq [LANES];
  logic [63:0]          met [LANES];
  logic [63:0]          best;
  logic [8:0]           best_id;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [9:0] cand_pci;
    assign cand_pci = 10'(base + 9'(l)) * 10'd3 + 10'(pci2);
    sss_gen u_gen (.pci(cand_pci), .sss(ref_seq[l]));
    assign met[l] = 64'(acc_re[l] * acc_re[l]) + 64'(acc_im[l] * acc_im[l]);
  end

  always_ff @(posedge clk) begin
    pci_valid <= 1'b0;
    if (rst || start) begin
      st <= FILL; n <= '0; base <= '0; best <= '0; best_id <= '0;
      pci1 <= '0; pci <= '0; peak_metric <= '0;
      for (int l = 0; l < LANES; l++) begin acc_re[l] <= '0; acc_im[l] <= '0; end
    end else begin
      case (st)
        FILL: if (r_valid) begin
          buf_re[n] <= r_re;
          buf_im[n] <= r_im;
          n <= n + 7'd1;
          if (n == 7'(SEQ_LEN - 1)) begin st <= CORR; n <= '0; base <= '0; best <= '0; end
        end
        CORR: begin
          for (int l = 0; l < LANES; l++) begin
            acc_re[l] <= ((n == 0) ? '0 : acc_re[l]) +
                         (ref_seq[l][n] ? -AW'(buf_re[n]) : AW'(buf_re[n]));
            acc_im[l] <= ((n == 0) ? '0 : acc_im[l]) +
                         (ref_seq[l][n] ? -AW'(buf_im[n]) : AW'(buf_im[n]));
          end
          n <= n + 7'd1;
          if (n == 7'(SEQ_LEN - 1)) begin st <= CMP; n <= '0; end
        end
        CMP: begin
          // SSS detector: best candidate so far (lowest N_ID1 wins a tie)
          automatic logic [63:0] b = best;
          automatic logic [8:0]  bi = best_id;
          for (int l = 0; l < LANES; l++) begin
            if (32'(base) + l < 336 && met[l] > b) begin b = met[l]; bi = base + 9'(l); end
          end
          best <= b; best_id <= bi;
          if (32'(base) + LANES >= 336) st <= OUT;
          else begin base <= base + 9'(LANES); st <= CORR; end
        end
        OUT: begin
          pci1        <= best_id;
          pci         <= 10'(best_id) * 10'd3 + 10'(pci2);
          peak_metric <= best;
          pci_valid   <= 1'b1;
          st          <= FILL;
        end
        default: st <= FILL;
      endcase
    end
  end
endmodule
