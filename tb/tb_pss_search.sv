// tb_pss_search -- PSS search over raster positions 4 and 5 (NUM_GSCN = 2, FIRST_G = 4).
// The stream holds one PSS OFDM symbol of N_ID2 = 2 on raster position 5 (IDFT model of
// tb_ref_pkg) whose body starts at sample 9000, zeros elsewhere. Expected course: window
// [0, 8192) empty, window [4096, 12288) holds the PSS only partly (peak at the last lag, which
// must be rejected), window [8192, 16384) holds it completely: detection at position 5 after
// 6 raster trials, N_ID2 = 2, GSCN 7716, position within +-8 samples. Then a restart with an
// unreachable threshold must slide windows and count trials without detecting.
module tb_pss_search;
  import cs_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 9000, RASTER = 5, NID2 = 2;
  logic clk = 0, rst = 1, restart = 0;
  logic [63:0] threshold = 64'd1 << 46;
  logic s_valid = 0, s_ready; logic signed [23:0] s_re = 0, s_im = 0;
  logic detect, locked; logic [1:0] pci2; logic [5:0] raster; logic [13:0] gscn;
  logic [31:0] pss_pos, n_tried; logic [63:0] peak_metric;
  int checks = 0, failures = 0, n_det = 0, sent = 0;
  int xr[4096], xi[4096], tr[4096], ti[4096];
  always #5 clk = ~clk;
  pss_search #(.NUM_GSCN(2), .FIRST_G(4)) dut (.*);
  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog: tried %0d sent %0d", n_tried, sent);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic int sample(input int n, input bit re);
    if (n < P || n >= P + 4096) return 0;
    return re ? tr[n - P] : ti[n - P];
  endfunction
  always @(posedge clk) begin
    if (s_valid && s_ready) sent++;
    if (!rst && detect) n_det++;
  end
  always @(negedge clk) begin
    s_valid <= !rst;
    s_re <= 24'(sample(sent, 1)); s_im <= 24'(sample(sent, 0));
  end
  initial begin
    for (int b = 0; b < 4096; b++) begin xr[b] = 0; xi[b] = 0; end
    for (int n = 0; n < 127; n++) begin
      automatic int off = RASTER * 48 - 1638 + 56 + n;
      xr[(off + 4096) % 4096] = 16384 * pss_sym(NID2, n);
    end
    idft(xr, xi, tr, ti);
    repeat (3) @(posedge clk); rst <= 0;
    wait (detect);
    @(posedge clk);
    chk(pci2 == NID2, $sformatf("pci2 %0d", pci2));
    chk(raster == RASTER && gscn == 7711 + RASTER, $sformatf("raster %0d gscn %0d", raster, gscn));
    chk(int'(pss_pos) >= P - 8 && int'(pss_pos) <= P + 8, $sformatf("pss_pos %0d", pss_pos));
    chk(n_tried == 6, $sformatf("n_tried %0d", n_tried));
    chk(locked && peak_metric > threshold, "locked / metric");
    $display("pos %0d metric %0d", pss_pos, peak_metric);
    repeat (100) @(posedge clk);
    chk(s_ready, "stream flows after detection");
    // restart: no detection possible
    threshold <= '1;
    @(posedge clk); restart <= 1; @(posedge clk); restart <= 0; #1;
    chk(!locked && n_tried == 0, "restart clears");
    wait (n_tried == 3);
    chk(!s_ready, "stream held while computing");
    chk(n_det == 1 && !locked, "no detection over threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
