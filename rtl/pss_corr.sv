// pss_corr -- one PSS correlator (Corr_PSS_k) of the PSS search.
//
// Holds the time-domain reference of PSS sequence N_ID2 = NID2 as it appears after the DDC:
// the 127 PSS symbols on subcarriers -63..63 around DC, transformed to 4096 time samples,
// summed in blocks of D (the DDC's boxcar) and scaled so that the largest possible value is
// 1.0 = 2^(WL-2). The table (L = 4096/D complex words) is a constant computed when the design is
// elaborated/initialised. Correlation is sequential, one complex multiply-accumulate per clock,
// as the paper describes ("realized in a sequential manner due to the limited number of memory
// ports"): corr = sum_m y(m) * conj(ref(m)).
// Interface: `rd` with `addr` = m reads ref(m) into a register; on the next clock `mac` with
// the matching sample `y` accumulates it (`first` restarts the sum, `last` marks the end).
// `corr_valid` pulses one clock after the `last` MAC with the finished sum in corr_re/corr_im.
module pss_corr #(
  parameter int unsigned WL    = 24,
  parameter int unsigned D_PSS = 10,
  parameter int unsigned NID2  = 0,
  parameter int unsigned YW    = WL + $clog2(D_PSS) + 1,
  parameter int unsigned L     = 4096 / D_PSS,
  parameter int unsigned AW    = 64
) (
  input  logic                        clk,
  input  logic                        rd,
  input  logic [$clog2(L)-1:0]        addr,
  input  logic                        mac,
  input  logic                        first,
  input  logic                        last,
  input  logic signed [YW-1:0]        y_re,
  input  logic signed [YW-1:0]        y_im,
  output logic                        corr_valid,
  output logic signed [AW-1:0]        corr_re,
  output logic signed [AW-1:0]        corr_im
);
  // ref(m) = scale * sum_d sum_k a_k exp(j*2*pi*k*(m*D+d)/4096)
  //        = scale * sum_k a_k G_k u^k,  u = exp(j*2*pi*m*D/4096),
  //   G_k = sum_d b^(k*d) = (1 - b^(k*D)) / (1 - b^k),  b = exp(j*2*pi/4096),  G_0 = D.
  // a_k*G_k is tabulated once; u^k is stepped by complex multiplication inside the k loop,
  // which keeps the elaboration-time evaluation short. Each word is {re, im}.
  typedef logic [2*WL-1:0] rom_t [L];
  function automatic rom_t mk_ref();
    localparam real TWO_PI_N = 2.0 * 3.14159265358979 / 4096.0;
    logic [126:0] seq;
    real ga_r [127];
    real ga_i [127];
    real nr, ni, dr, di, den, a, ur, ui, sur, sui, sr, si, t, scale;
    rom_t r;
    seq   = cs_pkg::rot127(cs_pkg::pss_ref(), 7'((43 * NID2) % 127));
    scale = (2.0 ** (WL - 2)) / (127.0 * D_PSS);
    for (int k = -63; k <= 63; k++) begin
      a = seq[k + 63] ? -1.0 : 1.0;
      if (k == 0) begin
        ga_r[63] = a * D_PSS; ga_i[63] = 0.0;
      end else begin
        nr = 1.0 - $cos(TWO_PI_N * k * D_PSS); ni = -$sin(TWO_PI_N * k * D_PSS);
        dr = 1.0 - $cos(TWO_PI_N * k);         di = -$sin(TWO_PI_N * k);
        den = dr * dr + di * di;
        ga_r[k + 63] = a * (nr * dr + ni * di) / den;
        ga_i[k + 63] = a * (ni * dr - nr * di) / den;
      end
    end
    for (int m = 0; m < L; m++) begin
      sur = $cos(TWO_PI_N * m * D_PSS);         sui = $sin(TWO_PI_N * m * D_PSS);
      ur  = $cos(-63.0 * TWO_PI_N * m * D_PSS); ui  = $sin(-63.0 * TWO_PI_N * m * D_PSS);
      sr = 0.0; si = 0.0;
      for (int k = 0; k < 127; k++) begin
        sr += ga_r[k] * ur - ga_i[k] * ui;
        si += ga_r[k] * ui + ga_i[k] * ur;
        t = ur * sur - ui * sui; ui = ur * sui + ui * sur; ur = t;
      end
      r[m] = {WL'($rtoi($floor(sr * scale + 0.5))), WL'($rtoi($floor(si * scale + 0.5)))};
    end
    return r;
  endfunction

  localparam rom_t REF = mk_ref();

  logic signed [WL-1:0] rr, ri;
  logic signed [AW-1:0] acc_re, acc_im;
  logic signed [YW+WL:0] pr, pi;

  always_ff @(posedge clk) if (rd) begin {rr, ri} <= REF[addr]; end

  // y * conj(ref)
  always_comb begin
    pr = (YW+WL+1)'(y_re * rr) + (YW+WL+1)'(y_im * ri);
    pi = (YW+WL+1)'(y_im * rr) - (YW+WL+1)'(y_re * ri);
  end

  always_ff @(posedge clk) begin
    corr_valid <= 1'b0;
    if (mac) begin
      acc_re <= (first ? '0 : acc_re) + AW'(pr);
      acc_im <= (first ? '0 : acc_im) + AW'(pi);
      if (last) corr_valid <= 1'b1;
    end
  end
  assign corr_re = acc_re;
  assign corr_im = acc_im;
endmodule
