// tb_boundary_search -- boundary search on a gapped sample stream whose sample 0 is the start
// of a frame. The reference tick is given the way the extractor gives it: one clock after the
// sample P - ADV was accepted, P being the PSS body start of SS block SS_i; SS_i follows about
// 30000 samples later. Runs for SS_i = 3 (PSS in symbol 20) and SS_i = 6 (symbol 44). Once
// locked, on every accepted sample symbol_tick must be high exactly at symbol starts (352 +
// 4096 for the first symbol of a slot, 288 + 4096 otherwise), slot/subframe/frame ticks
// exactly at multiples of 61440 / 122880 / 1228800 samples, and sym_num must be the symbol's
// number in the frame. At least one frame tick must be seen.
module tb_boundary_search;
  import cs_pkg::*;
  import tb_ref_pkg::*;
  localparam int ADV = 2;
  logic clk = 0, rst = 1, s_fire = 0, ref_tick = 0, ssi_valid = 0;
  logic [2:0] ssi = 0;
  logic locked, symbol_tick, slot_tick, subframe_tick, frame_tick; logic [8:0] sym_num;
  int checks = 0, failures = 0, idx = 0, n_frame = 0, n_sym = 0, ref_at = -1;
  always #5 clk = ~clk;
  boundary_search #(.ADV(ADV)) dut (.*);
  initial begin
    repeat (4000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int sym_start_no(input int n);   // symbol number in frame, or -1
    int r, s, slot;
    slot = (n % FRAME_LEN) / SLOT_LEN; r = n % SLOT_LEN;
    if (r == 0) return slot * 14;
    if (r < 4448 || (r - 4448) % 4384 != 0) return -1;
    return slot * 14 + 1 + (r - 4448) / 4384;
  endfunction
  always @(posedge clk) if (s_fire) begin
    if (locked) begin
      int e;
      e = sym_start_no(idx);
      checks++;
      if (symbol_tick != (e >= 0) || slot_tick != (idx % SLOT_LEN == 0) ||
          subframe_tick != (idx % (2 * SLOT_LEN) == 0) || frame_tick != (idx % FRAME_LEN == 0) ||
          (e >= 0 && sym_num != 9'(e))) begin
        failures++;
        if (failures < 6) $display("sample %0d: ticks %b%b%b%b sym %0d exp %0d", idx, symbol_tick,
                                   slot_tick, subframe_tick, frame_tick, sym_num, e);
      end
      if (frame_tick) n_frame++;
      if (symbol_tick) n_sym++;
    end
    idx++;
  end
  always @(negedge clk) begin
    s_fire <= !rst && ($urandom % 8 != 0);
    ref_tick <= (ref_at >= 0) && (idx == ref_at + 1) && !ref_tick && (idx != 0);
  end
  initial begin
    int runs[2] = '{3, 6};
    for (int r = 0; r < 2; r++) begin
      int sym, p;
      rst <= 1; idx = 0; ref_at = -1; n_frame = 0; n_sym = 0;
      repeat (3) @(posedge clk); rst <= 0;
      sym = ss_start(runs[r]);
      p = (sym / 14) * SLOT_LEN + 4448 + (sym % 14 - 1) * 4384 + 288;
      ref_at = p - ADV;
      wait (idx > p + 30000);
      @(posedge clk); ssi <= 3'(runs[r]); ssi_valid <= 1; @(posedge clk); ssi_valid <= 0;
      wait (idx > FRAME_LEN + 2000);
      checks++; if (!locked || n_frame != 1 || n_sym < 200) begin
        failures++; $display("run %0d: locked %0d frames %0d symbols %0d", r, locked, n_frame, n_sym);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
