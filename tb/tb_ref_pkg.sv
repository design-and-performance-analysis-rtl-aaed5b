// tb_ref_pkg -- independent reference models used by the testbenches.
//
// Bit-serial versions of the 3GPP TS 38.211 sequences (PSS, SSS, Gold PRBS of the PBCH DMRS)
// written straight from the standard's recurrences, without the cyclic part selects and
// word-parallel stepping that the RTL uses, plus small helpers and behavioural OFDM
// transforms (direct DFT/IDFT) that replace the FFT/IFFT cores in system tests.
package tb_ref_pkg;

  function automatic int pss_sym(input int nid2, input int n);   // +1 / -1
    int x[0:133];
    x[0] = 0; x[1] = 1; x[2] = 1; x[3] = 0; x[4] = 1; x[5] = 1; x[6] = 1;
    for (int i = 0; i < 127; i++) x[i+7] = (x[i+4] + x[i]) % 2;
    return 1 - 2 * x[(n + 43 * nid2) % 127];
  endfunction

  function automatic int sss_sym(input int pci, input int n);
    int x0[0:133];
    int x1[0:133];
    int nid1, nid2, m0, m1;
    nid1 = pci / 3; nid2 = pci % 3;
    for (int i = 0; i < 7; i++) begin x0[i] = (i == 0); x1[i] = (i == 0); end
    for (int i = 0; i < 127; i++) begin
      x0[i+7] = (x0[i+4] + x0[i]) % 2;
      x1[i+7] = (x1[i+1] + x1[i]) % 2;
    end
    m0 = 15 * (nid1 / 112) + 5 * nid2;
    m1 = nid1 % 112;
    return (1 - 2 * x0[(n + m0) % 127]) * (1 - 2 * x1[(n + m1) % 127]);
  endfunction

  // c(n), n = 0..287, for c_init of the PBCH DMRS of (pci, issb)
  function automatic bit dmrs_bit(input int pci, input int issb, input int n);
    bit x1[0:1600+288+31];
    bit x2[0:1600+288+31];
    longint cinit;
    cinit = (longint'(1) << 11) * (issb + 1) * (pci / 4 + 1) + (longint'(1) << 6) * (issb + 1) + (pci % 4);
    for (int i = 0; i < 31; i++) begin
      x1[i] = (i == 0);
      x2[i] = bit'((cinit >> i) & 1);
    end
    for (int i = 0; i < 1600 + n + 1; i++) begin
      x1[i+31] = x1[i+3] ^ x1[i];
      x2[i+31] = x2[i+3] ^ x2[i+2] ^ x2[i+1] ^ x2[i];
    end
    return x1[n+1600] ^ x2[n+1600];
  endfunction

  function automatic void dmrs_seq(input int pci, input int issb, output bit c[288]);
    for (int n = 0; n < 288; n++) c[n] = dmrs_bit(pci, issb, n);
  endfunction

  // Kind of SSB resource element: 0 zero, 1 PSS, 2 SSS, 3 DMRS, 4 PBCH; and DMRS index.
  function automatic int re_kind(input int sym, input int sc, input int v, output int didx);
    didx = -1;
    if (sym == 0) return (sc >= 56 && sc <= 182) ? 1 : 0;
    if (sym == 2) begin
      if (sc >= 56 && sc <= 182) return 2;
      if (sc >= 48 && sc <= 191) return 0;
      if (sc % 4 == v) begin didx = (sc < 48) ? 60 + sc / 4 : 72 + (sc - 192) / 4; return 3; end
      return 4;
    end
    if (sc % 4 == v) begin didx = (sym == 1) ? sc / 4 : 84 + sc / 4; return 3; end
    return 4;
  endfunction

  function automatic int ss_start(input int i);
    int t[8] = '{4, 8, 16, 20, 32, 36, 44, 48};
    return t[i];
  endfunction
  // ---- behavioural OFDM transforms standing in for the vendor IFFT/FFT ----------------------
  // Transmit: x(n) = 4 * sum_b X(b) exp(+j*2*pi*b*n/4096) maps Q2.14 bins to Q2.22 samples
  // (an IFFT scaled by 1/64); receive: Y(b) = (1/64) * sum_n x(n) exp(-j*2*pi*b*n/4096), so a
  // bin comes back as 256 * X, i.e. in Q2.22. Results are rounded and saturated to 24 bits.
  real ct[4096];
  real st[4096];
  bit  tab_ok = 0;
  function automatic void init_tab();
    for (int i = 0; i < 4096; i++) begin
      ct[i] = $cos(2.0 * 3.14159265358979 * i / 4096.0);
      st[i] = $sin(2.0 * 3.14159265358979 * i / 4096.0);
    end
    tab_ok = 1;
  endfunction
  function automatic int sat24(input real v);
    int r;
    r = $rtoi($floor(v + 0.5));
    if (r > 8388607) r = 8388607;
    if (r < -8388607) r = -8388607;
    return r;
  endfunction
  function automatic void idft(input int xr[4096], input int xi[4096], output int yr[4096], output int yi[4096]);
    real ar[4096];
    real ai[4096];
    if (!tab_ok) init_tab();
    for (int n = 0; n < 4096; n++) begin ar[n] = 0.0; ai[n] = 0.0; end
    for (int b = 0; b < 4096; b++) if (xr[b] != 0 || xi[b] != 0)
      for (int n = 0; n < 4096; n++) begin
        automatic int k = (b * n) & 4095;
        ar[n] += xr[b] * ct[k] - xi[b] * st[k];
        ai[n] += xr[b] * st[k] + xi[b] * ct[k];
      end
    for (int n = 0; n < 4096; n++) begin yr[n] = sat24(4.0 * ar[n]); yi[n] = sat24(4.0 * ai[n]); end
  endfunction
  function automatic void dft(input int xr[4096], input int xi[4096], output int yr[4096], output int yi[4096]);
    if (!tab_ok) init_tab();
    for (int b = 0; b < 4096; b++) begin
      real sr, si;
      sr = 0.0; si = 0.0;
      for (int n = 0; n < 4096; n++) begin
        automatic int k = (b * n) & 4095;
        sr += xr[n] * ct[k] + xi[n] * st[k];
        si += xi[n] * ct[k] - xr[n] * st[k];
      end
      yr[b] = sat24(sr / 64.0); yi[b] = sat24(si / 64.0);
    end
  endfunction
endpackage
