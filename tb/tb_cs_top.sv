// tb_cs_top -- end-to-end test of the cell search: transmitter configured over AXI4-Lite with PCI
// 517 on GSCN 7716, receiver searching a reduced raster (GSCN 7714..7717) to keep the run short.
//
// Behavioural stand-ins for the parts that are not RTL: the transmitter's frequency-domain
// symbols go through a direct IDFT (scaled as described in tb_ref_pkg) and get their cyclic
// prefix (352 samples on the first symbol of a slot, 288 otherwise) before being queued as the
// receiver's input stream; the receiver's extracted symbols go through a direct DFT and come
// back on the FFT-output port one bin per clock. The channel is ideal. The first received
// sample is transmitted sample DROP of frame 0.
// Every mechanism is counted and a test fails if one never happens: AXI configuration, SS block
// symbols on air, SS RAM region refill (more than four blocks), raster stepping, window
// sliding, PSS detection (N_ID2 and GSCN checked), symbol extraction (four FFT inputs), SSS
// search (PCI checked), DMRS search (SS index checked), boundary lock, and symbol/slot/
// subframe/frame ticks, each compared with the true sample position (+-8 samples).
module tb_cs_top;
  import cs_pkg::*;
  import tb_ref_pkg::*;
  localparam int PCI = 517, RASTER = 5, TOL = 8, DROP = 0, SSI = 0;
  logic clk = 0, rst = 1;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic arvalid = 0, arready, rvalid, rready = 1;
  logic [3:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic tx_valid, tx_ready = 0, tx_last, tx_underrun; cplx16_t tx_data; logic [3:0] tx_sym;
  logic rx_restart = 0; logic [63:0] pss_threshold = 64'd1 << 46;
  logic rx_valid = 0, rx_ready; logic signed [23:0] rx_re = 0, rx_im = 0;
  logic fft_in_valid, fft_in_last; logic signed [23:0] fft_in_re, fft_in_im;
  logic fft_out_valid = 0, fft_out_last = 0; logic signed [23:0] fft_out_re = 0, fft_out_im = 0;
  logic pss_found, pci_valid, ssi_valid, locked, symbol_tick, slot_tick, subframe_tick, frame_tick;
  logic [1:0] pci2; logic [13:0] gscn; logic [31:0] pss_pos, n_tried; logic [9:0] pci;
  logic [2:0] ssi; logic [8:0] sym_num;
  logic [9:0] tx_frame; logic [63:0] pss_metric, sss_metric, dmrs_metric; logic [8:0] pci1;
  logic ext_busy, blk_done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cs_top #(.NUM_GSCN(4), .FIRST_G(3)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    $display("watchdog: rx samples %0d", rx_cnt);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- transmitter side: bins -> IDFT -> CP -> receive queue
  int tx_re_b[4096], tx_im_b[4096], t_re[4096], t_im[4096];
  int q_re[$], q_im[$];
  int tx_bin = 0, n_ss_sym = 0, n_ss_blocks = 0, n_axi = 0, tx_total = 0;
  // the first DROP transmitted samples never reach the receiver
  function automatic void push(input int re, input int im);
    if (tx_total >= DROP) begin q_re.push_back(re); q_im.push_back(im); end
    tx_total++;
  endfunction
  bit sym_nz;
  always @(posedge clk) if (!rst && tx_valid && tx_ready) begin
    tx_re_b[tx_bin] = tx_data.re; tx_im_b[tx_bin] = tx_data.im;
    if (tx_data.re != 0 || tx_data.im != 0) sym_nz = 1;
    tx_bin++;
    if (tx_last) begin
      int cp;
      chk(tx_bin == 4096, "tx symbol length");
      cp = (tx_sym == 0) ? 352 : 288;
      if (sym_nz) begin
        idft(tx_re_b, tx_im_b, t_re, t_im);
        n_ss_sym++;
        if (n_ss_sym % 4 == 1) n_ss_blocks++;
      end else
        for (int n = 0; n < 4096; n++) begin t_re[n] = 0; t_im[n] = 0; end
      for (int n = 4096 - cp; n < 4096; n++) push(t_re[n], t_im[n]);
      for (int n = 0; n < 4096; n++) push(t_re[n], t_im[n]);
      tx_bin = 0; sym_nz = 0;
    end
  end
  always @(posedge clk) if (!rst && bvalid && bready) n_axi++;

  // ---------------- receiver input
  int rx_cnt = 0;
  always @(posedge clk) if (!rst && rx_valid && rx_ready) begin
    void'(q_re.pop_front()); void'(q_im.pop_front());
    rx_cnt++;
  end
  always @(negedge clk) begin
    tx_ready <= !rst && (q_re.size() < 20000);
    rx_valid <= q_re.size() > 0;
    if (q_re.size() > 0) begin rx_re <= 24'(q_re[0]); rx_im <= 24'(q_im[0]); end
  end

  // ---------------- FFT model
  int f_re[4096], f_im[4096], g_re[4096], g_im[4096];
  int fo_re[$], fo_im[$];
  int f_idx = 0, n_fft_sym = 0;
  always @(posedge clk) if (!rst && fft_in_valid) begin
    f_re[f_idx] = fft_in_re; f_im[f_idx] = fft_in_im; f_idx++;
    if (fft_in_last) begin
      chk(f_idx == 4096, "fft input length");
      dft(f_re, f_im, g_re, g_im);
      for (int b = 0; b < 4096; b++) begin fo_re.push_back(g_re[b]); fo_im.push_back(g_im[b]); end
      f_idx = 0; n_fft_sym++;
    end
  end
  int fo_cnt = 0;
  always @(negedge clk) begin
    fft_out_valid <= fo_re.size() > 0;
    if (fo_re.size() > 0) begin
      fft_out_re <= 24'(fo_re.pop_front()); fft_out_im <= 24'(fo_im.pop_front());
      fft_out_last <= (fo_cnt % 4096) == 4095; fo_cnt++;
    end else fft_out_last <= 0;
  end

  // ---------------- result and mechanism monitors
  int n_detect = 0, n_pci = 0, n_ssi = 0, n_lock = 0, n_sym_tick = 0, n_slot_tick = 0;
  int n_sf_tick = 0, n_frame_tick = 0, max_tried = 0;
  int true_pss = 352 + 4096 + (ss_start(SSI) - 1) * (288 + 4096) + 288 - DROP;  // PSS body, rx index
  function automatic int wrapdist(input int a, input int period);
    int r; r = a % period; return (r > period / 2) ? period - r : r;
  endfunction
  bit pss_found_q = 0;
  always @(posedge clk) begin
    pss_found_q <= pss_found;
    if (!rst && pss_found && !pss_found_q) begin
      n_detect++;
      chk(pci2 == PCI % 3, $sformatf("pci2 %0d", pci2));
      chk(gscn == 7711 + RASTER, $sformatf("gscn %0d", gscn));
      chk(wrapdist(int'(pss_pos) - true_pss, 4384) <= TOL, $sformatf("pss_pos %0d", pss_pos));
      max_tried = n_tried;
      $display("PSS found at %0t: pci2 %0d gscn %0d pos %0d tried %0d metric %0d", $time, pci2, gscn, pss_pos, n_tried, pss_metric);
    end
    if (!rst && pci_valid) begin
      n_pci++; chk(pci == PCI, $sformatf("pci %0d", pci));
      $display("PCI %0d (pci1 %0d) metric %0d", pci, pci1, sss_metric);
    end
    if (!rst && ssi_valid) begin
      n_ssi++; chk(ssi == SSI, $sformatf("ssi %0d", ssi));
      $display("SS index %0d metric %0d", ssi, dmrs_metric);
    end
    if (!rst && rx_valid && rx_ready && locked) begin
      if (symbol_tick) n_sym_tick++;
      if (slot_tick) begin n_slot_tick++; chk(wrapdist(rx_cnt + DROP, SLOT_LEN) <= TOL, $sformatf("slot tick at %0d", rx_cnt)); end
      if (subframe_tick) begin n_sf_tick++; chk(wrapdist(rx_cnt + DROP, 2 * SLOT_LEN) <= TOL, $sformatf("subframe tick at %0d", rx_cnt)); end
      if (frame_tick) begin
        n_frame_tick++; chk(wrapdist(rx_cnt + DROP, FRAME_LEN) <= TOL, $sformatf("frame tick at %0d", rx_cnt));
        chk(sym_num == 0, "sym_num at frame tick");
        $display("frame tick at sample %0d (transmitted %0d)", rx_cnt, rx_cnt + DROP);
      end
    end
  end
  always @(posedge locked) if (!rst) n_lock++;

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(posedge clk); awvalid <= 1; awaddr <= a; wvalid <= 1; wdata <= d;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    do @(posedge clk); while (!bvalid);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    wr(4'h4, PCI); wr(4'h8, 7711 + RASTER); wr(4'h0, 1);
    wait (n_frame_tick >= 1 && n_sf_tick >= 2);
    repeat (10) @(posedge clk);
    chk(n_axi == 3, "AXI writes");
    chk(n_ss_sym >= 4, "SS block symbols transmitted");
    chk(n_ss_blocks > 4, "SS RAM regions refilled");
    chk(!tx_underrun, "no transmitter underrun");
    chk(max_tried > 1, "raster stepping");
    chk(max_tried > int'(dut.NUM_GSCN), "window sliding");
    chk(n_detect == 1, "PSS detection");
    chk(n_fft_sym == 4, "SS symbol extraction");
    chk(n_pci == 1, "SSS search");
    chk(n_ssi == 1, "DMRS search");
    chk(n_lock == 1, "boundary lock");
    chk(n_sym_tick > 0 && n_slot_tick > 0 && n_sf_tick > 0 && n_frame_tick > 0, "ticks");
    $display("blocks %0d tried %0d ticks sym %0d slot %0d sf %0d frame %0d", n_ss_blocks, max_tried,
             n_sym_tick, n_slot_tick, n_sf_tick, n_frame_tick);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
