// tb_frame_scheduler -- runs the counters over three frames (one sample per clock) and checks
// every symbol boundary against a frame model: subcarrier/symbol/slot/subframe/frame
// indices, and the SS block flags (SS_i, symbol within the block) of the even frames.
module tb_frame_scheduler;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, adv = 0;
  logic [11:0] sc_idx; logic [3:0] sym_idx; logic slot_idx; logic [3:0] sf_idx;
  logic [9:0] frame_idx; logic [8:0] sym_in_frame; logic ss_active; logic [2:0] ss_idx;
  logic [1:0] ss_sym; logic sym_last;
  int checks = 0, failures = 0, ss_syms = 0;
  always #5 clk = ~clk;
  frame_scheduler dut (.*);
  initial begin
    repeat (4000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < 3; f++) for (int s = 0; s < 280; s++) begin
      bit exp_ss; int exp_i, exp_k;
      #1;
      exp_ss = 0; exp_i = 0; exp_k = 0;
      for (int i = 0; i < 8; i++)
        if (f % 2 == 0 && s >= ss_start(i) && s < ss_start(i) + 4) begin exp_ss = 1; exp_i = i; exp_k = s - ss_start(i); end
      checks++;
      if (sc_idx != 0 || sym_idx != s % 14 || slot_idx != (s / 14) % 2 || sf_idx != s / 28 ||
          frame_idx != f || sym_in_frame != s || ss_active != exp_ss ||
          (exp_ss && (ss_idx != exp_i || ss_sym != exp_k))) begin
        failures++;
        if (failures < 5) $display("mismatch frame %0d sym %0d", f, s);
      end
      ss_syms += ss_active;
      // advance one symbol, with a few idle clocks inside
      for (int n = 0; n < 4096; n++) begin
        adv <= (n != 100);
        @(posedge clk);
        if (n == 100) begin adv <= 1; @(posedge clk); end
      end
      adv <= 0;
    end
    checks++;
    if (ss_syms != 64) failures++;   // 32 SS symbols in each of the two even frames
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
