// ss_symbol_extractor -- picks the four OFDM symbols of one SS block out of the received
// stream and removes their cyclic prefixes (the paper's "SS OFDM symbol extractor" followed
// by "cyclic prefix removal").
//
// The stream is observed, never stalled: every accepted sample (`s_fire`) is counted from
// reset, the same count the PSS search uses for `pss_pos`. When the PSS search reports a PSS
// whose OFDM-symbol body starts at sample P, the PSS symbol itself has already gone by, so the
// extractor takes the same SS block one SS burst period later (PERIOD = 20 ms = 2 457 600
// samples): bodies start at P + PERIOD + i*(4096 + 288), i = 0..3 (no SS block symbol is the
// first of a slot, so all four have the 288-sample prefix). The PSS search knows P only to
// about +-D/2 samples. Each 4096-sample window is taken ADV samples early, inside the cyclic
// prefix: an early window adds a phase ramp across the bins (2*pi*k*shift/4096), a late one
// catches a few samples of the next symbol's prefix; both cost little for shifts of a few
// samples, and ADV = 2 balances them (this design's choice). Each 4096-sample window is sent
// on the output (valid, last on the 4096th, symbol number 0..3) towards the FFT; the output
// has no ready, the FFT must accept one sample per clock. `ref_tick` pulses with the first
// sample of the PSS symbol window (P + PERIOD - ADV), the boundary search's timing reference.
// Waiting for the next repetition is this design's choice; the paper only says the block extracts the
// four symbols of one SS instance using the PSS tick.
module ss_symbol_extractor
  import cs_pkg::*;
#(
  parameter int unsigned WL     = 24,
  parameter int unsigned PERIOD = SSB_PERIOD,
  parameter int unsigned ADV    = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 s_fire,
  input  logic signed [WL-1:0] s_re,
  input  logic signed [WL-1:0] s_im,
  input  logic                 pss_detect,
  input  logic [31:0]          pss_pos,
  output logic                 m_valid,
  output logic signed [WL-1:0] m_re,
  output logic signed [WL-1:0] m_im,
  output logic                 m_last,
  output logic [1:0]           m_sym,
  output logic                 ref_tick,
  output logic                 busy
);
  typedef enum logic [1:0] {IDLE, WAIT, BODY, GAP} st_e;
  st_e st;
  logic [31:0] cnt, target;
  logic [11:0] k;
  logic [8:0]  gap;
  logic [1:0]  sym;
  logic        take;

  assign take = s_fire && ((st == BODY) || (st == WAIT && cnt == target));
  assign busy = (st != IDLE);

  always_ff @(posedge clk) begin
    m_valid  <= 1'b0;
    m_last   <= 1'b0;
    ref_tick <= 1'b0;
    if (rst) begin
      st <= IDLE; cnt <= '0; target <= '0; k <= '0; gap <= '0; sym <= '0;
      m_re <= '0; m_im <= '0; m_sym <= '0;
    end else begin
      if (s_fire) cnt <= cnt + 32'd1;
      if (take) begin
        m_valid <= 1'b1;
        m_re    <= s_re;
        m_im    <= s_im;
        m_sym   <= sym;
        m_last  <= (k == 12'(FFT_N - 1));
      end
      case (st)
        IDLE: if (pss_detect) begin
          target <= pss_pos + 32'(PERIOD) - 32'(ADV);
          st     <= WAIT;
          sym    <= '0;
        end
        WAIT: if (take) begin
          st <= BODY; k <= 12'd1;
          ref_tick <= 1'b1;
        end
        BODY: if (s_fire) begin
          k <= k + 12'd1;
          if (k == 12'(FFT_N - 1)) begin
            k <= '0;
            if (sym == 2'd3) st <= IDLE;
            else begin st <= GAP; gap <= 9'(CP_NORM); sym <= sym + 2'd1; end
          end
        end
        GAP: if (s_fire) begin
          gap <= gap - 9'd1;
          if (gap == 9'd1) st <= BODY;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
