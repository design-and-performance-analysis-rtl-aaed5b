// tb_pss_corr -- one PSS correlator (N_ID2 = 1, D = 10): reads single reference words back
// through unit impulses (corr = conj(ref(m0))) and compares them with a reference computed
// here by the direct double sum over subcarriers and boxcar samples (+-2 LSB for the different
// rounding path), then checks that a full correlation of the matched reference is far larger
// than that of the other two sequences.
module tb_pss_corr;
  import tb_ref_pkg::*;
  localparam int WL = 24, D = 10, L = 4096 / D, YW = WL + 5;
  logic clk = 0, rd = 0, mac = 0, first = 0, last = 0;
  logic [8:0] addr = 0;
  logic signed [YW-1:0] y_re = 0, y_im = 0;
  logic corr_valid; logic signed [63:0] corr_re, corr_im;
  int checks = 0, failures = 0;
  int yv_re[L], yv_im[L];
  always #5 clk = ~clk;
  pss_corr #(.WL(WL), .D_PSS(D), .NID2(1)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void ref_word(input int nid2, input int m, output int rr, output int ri);
    real sr, si, w, scale;
    sr = 0.0; si = 0.0;
    for (int d = 0; d < D; d++)
      for (int k = -63; k <= 63; k++) begin
        w = 2.0 * 3.14159265358979 * k * (m * D + d) / 4096.0;
        sr += pss_sym(nid2, k + 63) * $cos(w);
        si += pss_sym(nid2, k + 63) * $sin(w);
      end
    scale = 4194304.0 / (127.0 * D);
    rr = $rtoi($floor(sr * scale + 0.5)); ri = $rtoi($floor(si * scale + 0.5));
  endfunction
  // one correlation over L words of yv_*; returns the result
  task automatic run(output longint cr, output longint ci);
    for (int m = 0; m < L; m++) begin
      @(posedge clk);
      rd <= 1; addr <= 9'(m);
      mac <= (m > 0); first <= (m == 1); last <= 0;
      if (m > 0) begin y_re <= YW'(yv_re[m-1]); y_im <= YW'(yv_im[m-1]); end
    end
    @(posedge clk); rd <= 0; mac <= 1; first <= 0; last <= 1;
    y_re <= YW'(yv_re[L-1]); y_im <= YW'(yv_im[L-1]);
    @(posedge clk); mac <= 0; last <= 0;
    while (!corr_valid) @(posedge clk);
    cr = corr_re; ci = corr_im;
  endtask
  initial begin
    longint cr, ci, e[3];
    int rr, ri;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 12; t++) begin
      automatic int m0 = (t == 0) ? 0 : (t == 1) ? L - 1 : $urandom % L;
      for (int m = 0; m < L; m++) begin yv_re[m] = 0; yv_im[m] = 0; end
      yv_re[m0] = 1;
      run(cr, ci);
      ref_word(1, m0, rr, ri);
      checks++;
      if (cr - rr > 2 || rr - cr > 2 || -ci - ri > 2 || ri + ci > 2) begin
        failures++; $display("ref(%0d): got %0d %0d exp %0d %0d", m0, cr, -ci, rr, ri);
      end
    end
    for (int n = 0; n < 3; n++) begin
      for (int m = 0; m < L; m++) begin ref_word(n, m, rr, ri); yv_re[m] = rr; yv_im[m] = ri; end
      run(cr, ci);
      e[n] = (cr >>> 26) * (cr >>> 26) + (ci >>> 26) * (ci >>> 26);
    end
    $display("metrics %0d %0d %0d", e[0], e[1], e[2]);
    checks++; if (!(e[1] > 20 * e[0] && e[1] > 20 * e[2])) begin failures++; $display("matched not dominant"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
