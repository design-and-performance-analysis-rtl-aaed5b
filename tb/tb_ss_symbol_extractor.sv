// tb_ss_symbol_extractor -- extractor with a short period (PERIOD = 10000): the stream carries
// its own sample index as data and has random gaps. After a PSS report at P = 1234 the four
// output windows must be samples P + PERIOD - ADV + i*4384 + k (k = 0..4095, i = 0..3) with
// `last` on k = 4095, symbol number i, `ref_tick` with the very first output sample, `busy`
// until the last one, and nothing else on the output.
module tb_ss_symbol_extractor;
  localparam int PERIOD = 10000, ADV = 2, P = 1234;
  logic clk = 0, rst = 1, s_fire = 0, pss_detect = 0;
  logic signed [23:0] s_re = 0, s_im = 0;
  logic [31:0] pss_pos = 0;
  logic m_valid, m_last, ref_tick, busy; logic signed [23:0] m_re, m_im; logic [1:0] m_sym;
  int checks = 0, failures = 0, n_out = 0, n_tick = 0, idx = 0;
  always #5 clk = ~clk;
  ss_symbol_extractor #(.PERIOD(PERIOD), .ADV(ADV)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst) begin
    if (m_valid) begin
      int i, k, e;
      i = n_out / 4096; k = n_out % 4096;
      e = P + PERIOD - ADV + i * 4384 + k;
      checks++;
      if (m_re != e || m_im != -e || m_last != (k == 4095) || m_sym != 2'(i) || ref_tick != (n_out == 0)) begin
        failures++; if (failures < 5) $display("out %0d: got %0d exp %0d", n_out, m_re, e);
      end
      n_out++;
    end
    if (ref_tick) n_tick++;
  end
  always @(negedge clk) begin
    if (s_fire) idx++;
    s_fire <= !rst && ($urandom % 4 != 0);
    s_re <= 24'(idx); s_im <= -24'(idx);
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    wait (idx == 3000);
    @(posedge clk); pss_detect <= 1; pss_pos <= P; @(posedge clk); pss_detect <= 0;
    #1 checks++; if (!busy) begin failures++; $display("not busy"); end
    wait (idx > P + PERIOD + 4 * 4384 + 100);
    repeat (5) @(posedge clk);
    checks++; if (n_out != 4 * 4096 || n_tick != 1 || busy) begin
      failures++; $display("n_out %0d ticks %0d busy %0d", n_out, n_tick, busy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
