// pss_search -- blind PSS search over all synchronisation raster positions.
//
// The receiver does not know where (in frequency) the SS block is, nor where the OFDM
// symbols start. The search keeps the last two 4096-sample packets of the received stream
// (WIN = 8192 samples) and, for each candidate raster position g in turn (the "PSS search
// scheduler"):
//   1. DDC: mixes the window so that the PSS centre of raster g (subcarrier 48*g - 1519 from
//      the carrier centre) lands on DC, boxcar-filters and decimates by D_PSS (M = WIN/D words);
//   2. correlates the decimated window against the three reference PSS (pss_corr x3) at every
//      lag 0..M-L, one multiply-accumulate per clock per correlator (L = 4096/D);
//   3. PSS detector: keeps the largest |corr|^2 over lags and sequences; if it exceeds
//      `threshold` the PSS is found: N_ID2 (PCI_2) is the sequence, GSCN = 7711 + g, and the
//      SS symbol position detector reports the absolute index of the first body sample of the
//      PSS OFDM symbol, window start + D*lag (resolution D samples).
// A peak at the last lag is not accepted: it may be a PSS that only partly lies in the window
// (its correlation grows up to the window edge); the next window holds it completely.
// If no raster position passes, one more packet is taken in (the window slides by 4096) and
// the scheduler starts again at g = 0. While the search computes, `s_ready` is low: the input
// stream is held. After a detection `s_ready` stays high and samples keep being counted, so the
// sample index in `pss_pos` stays comparable with the stream; `restart` starts a new search.
// Per raster position the search takes WIN + (M-L+1)*L clocks plus a few of pipeline
// (176 317 at D = 10). The paper gives the structure (scheduler, DDC, three correlators,
// detector, position detector); the window, the threshold test on |corr|^2 and the metric
// scaling are this design's choices. The paper searches 340 GSCNs over the whole n78 band;
// one 4096-point carrier holds 64 raster positions, the default of NUM_GSCN.
module pss_search
  import cs_pkg::*;
#(
  parameter int unsigned WL       = 24,
  parameter int unsigned D_PSS    = 10,
  parameter int unsigned NUM_GSCN = N_RASTER,
  parameter int unsigned FIRST_G  = 0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 restart,
  input  logic [63:0]          threshold,
  input  logic                 s_valid,
  output logic                 s_ready,
  input  logic signed [WL-1:0] s_re,
  input  logic signed [WL-1:0] s_im,
  output logic                 detect,      // one-clock pulse: PSS found
  output logic                 locked,
  output logic [1:0]           pci2,
  output logic [5:0]           raster,
  output logic [13:0]          gscn,
  output logic [31:0]          pss_pos,     // sample index of the PSS symbol body start
  output logic [63:0]          peak_metric,
  output logic [31:0]          n_tried      // raster positions searched so far
);
  localparam int unsigned WIN  = 2 * FFT_N;
  localparam int unsigned PKT  = FFT_N;
  localparam int unsigned L    = FFT_N / D_PSS;
  localparam int unsigned M    = WIN / D_PSS;
  localparam int unsigned NLAG = M - L + 1;
  localparam int unsigned YW   = WL + $clog2(D_PSS) + 1;
  localparam int unsigned SH   = WL - 2 + $clog2(D_PSS);
  localparam int unsigned MAW  = $clog2(M);
  localparam int unsigned LAW  = $clog2(L);

  typedef enum logic [2:0] {FILL, DDC, CORR, DRAIN, DECIDE, DONE} st_e;
  st_e st;

  // window buffer (circular) and decimated buffer
  logic [2*WL-1:0] win [WIN];
  logic [YW*2-1:0] dsb [M];
  logic [12:0]     wp;
  logic [13:0]     need;
  logic [31:0]     smp_cnt, win_start;
  logic [5:0]      g;

  logic            s_fire;
  assign s_ready = (st == FILL) || (st == DONE);
  assign s_fire  = s_valid && s_ready;

  always_ff @(posedge clk) if (s_fire && st == FILL) win[wp] <= {s_re, s_im};

  // ---------------- DDC phase
  logic [13:0]     rd_cnt;
  logic            rd_v;
  logic [2*WL-1:0] rd_q;
  logic            ddc_start, ddc_ov;
  logic signed [YW-1:0] ddc_re, ddc_im;
  logic [MAW:0]    ds_cnt;
  logic [11:0]     phase_inc;
  assign phase_inc = 12'(1519 - 48 * int'(g));

  always_ff @(posedge clk) begin
    rd_v <= (st == DDC) && (rd_cnt < 14'(WIN));
    if ((st == DDC) && (rd_cnt < 14'(WIN))) rd_q <= win[wp + 13'(rd_cnt)];
  end

  ddc #(.WL(WL), .D_PSS(D_PSS), .OW(YW)) u_ddc (
    .clk, .rst, .start(ddc_start), .phase_inc, .in_valid(rd_v),
    .in_re(rd_q[2*WL-1:WL]), .in_im(rd_q[WL-1:0]),
    .out_valid(ddc_ov), .out_re(ddc_re), .out_im(ddc_im));

  always_ff @(posedge clk) if (ddc_ov && ds_cnt < (MAW+1)'(M)) dsb[ds_cnt[MAW-1:0]] <= {ddc_re, ddc_im};

  // ---------------- correlation phase
  logic [MAW-1:0]  lag;
  logic [LAW-1:0]  m;
  logic            iss;
  logic            p1_v, p1_first, p1_last;
  logic [MAW-1:0]  p1_lag, p2_lag;
  logic [YW*2-1:0] y_q;
  logic [2:0]      cv;
  logic signed [63:0] c_re [3];
  logic signed [63:0] c_im [3];
  assign iss = (st == CORR);

  always_ff @(posedge clk) begin
    p1_v     <= iss;
    p1_first <= (m == '0);
    p1_last  <= (m == LAW'(L - 1));
    p1_lag   <= lag;
    p2_lag   <= p1_lag;
    if (iss) y_q <= dsb[lag + MAW'(m)];
  end

  for (genvar k = 0; k < 3; k++) begin : g_corr
    pss_corr #(.WL(WL), .D_PSS(D_PSS), .NID2(k), .YW(YW), .L(L), .AW(64)) u_corr (
      .clk, .rd(iss), .addr(m), .mac(p1_v), .first(p1_first), .last(p1_last),
      .y_re(y_q[2*YW-1:YW]), .y_im(y_q[YW-1:0]),
      .corr_valid(cv[k]), .corr_re(c_re[k]), .corr_im(c_im[k]));
  end

  // |corr|^2 after scaling to 32 bits (saturating)
  function automatic logic signed [31:0] sat32(input logic signed [63:0] v);
    logic signed [63:0] s;
    s = v >>> SH;
    if (s > 64'sd2147483647)       return 32'sh7fffffff;
    else if (s < -64'sd2147483647) return -32'sh7fffffff;
    else                           return 32'(s);
  endfunction
  logic [63:0] met [3];
  always_comb for (int k = 0; k < 3; k++) begin
    met[k] = 64'(sat32(c_re[k]) * sat32(c_re[k])) + 64'(sat32(c_im[k]) * sat32(c_im[k]));
  end

  // PSS detector: strongest of the three correlators at this lag
  logic [63:0] met_max;
  logic [1:0]  k_max;
  always_comb begin
    met_max = met[0];
    k_max   = 2'd0;
    if (met[1] > met_max) begin met_max = met[1]; k_max = 2'd1; end
    if (met[2] > met_max) begin met_max = met[2]; k_max = 2'd2; end
  end

  logic [63:0]    best;
  logic [1:0]     best_k;
  logic [MAW-1:0] best_lag;
  logic [2:0]     drain;

  // ---------------- control
  always_ff @(posedge clk) begin
    detect <= 1'b0;
    if (rst || restart) begin
      st <= FILL; wp <= '0; need <= 14'(WIN); smp_cnt <= '0; g <= 6'(FIRST_G);
      rd_cnt <= '0; ds_cnt <= '0; lag <= '0; m <= '0; drain <= '0;
      best <= '0; best_k <= '0; best_lag <= '0; locked <= 1'b0; n_tried <= '0;
      pci2 <= '0; raster <= '0; gscn <= '0; pss_pos <= '0; peak_metric <= '0; win_start <= '0;
    end else begin
      if (s_fire) smp_cnt <= smp_cnt + 32'd1;
      if ((&cv) && met_max > best) begin
        best     <= met_max;
        best_k   <= k_max;
        best_lag <= p2_lag;
      end
      case (st)
        FILL: if (s_fire) begin
          wp   <= wp + 13'd1;
          need <= need - 14'd1;
          if (need == 14'd1) begin
            st        <= DDC;
            win_start <= smp_cnt + 32'd1 - 32'(WIN);
            rd_cnt    <= '0;
            ds_cnt    <= '0;
          end
        end
        DDC: begin
          if (rd_cnt < 14'(WIN)) rd_cnt <= rd_cnt + 14'd1;
          if (ddc_ov) ds_cnt <= ds_cnt + 1'b1;
          if (rd_cnt == 14'(WIN) && ds_cnt == (MAW+1)'(M)) begin
            st <= CORR; lag <= '0; m <= '0; best <= '0;
          end
        end
        CORR: begin
          if (m == LAW'(L - 1)) begin
            m <= '0;
            if (lag == MAW'(NLAG - 1)) begin st <= DRAIN; drain <= '0; end
            else lag <= lag + 1'b1;
          end else m <= m + 1'b1;
        end
        DRAIN: begin
          drain <= drain + 3'd1;
          if (drain == 3'd3) st <= DECIDE;
        end
        DECIDE: begin
          n_tried <= n_tried + 32'd1;
          if (best > threshold && best_lag != MAW'(NLAG - 1)) begin
            st          <= DONE;
            detect      <= 1'b1;
            locked      <= 1'b1;
            pci2        <= best_k;
            raster      <= g;
            gscn        <= 14'(GSCN_BASE) + 14'(g);
            pss_pos     <= win_start + 32'(best_lag) * 32'(D_PSS);
            peak_metric <= best;
          end else if (g == 6'(FIRST_G + NUM_GSCN - 1)) begin
            g    <= 6'(FIRST_G);
            st   <= FILL;
            need <= 14'(PKT);
          end else begin
            g      <= g + 6'd1;
            st     <= DDC;
            rd_cnt <= '0;
            ds_cnt <= '0;
          end
        end
        DONE: ;
        default: st <= FILL;
      endcase
    end
  end

  assign ddc_start = (st == FILL) || (st == DECIDE);
endmodule
