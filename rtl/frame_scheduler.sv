// frame_scheduler -- 5G NR frame timing counters of the cell-search transmitter.
//
// A chain of counters advanced by `adv` (one per frequency-domain sample handed to the IFFT):
// subcarrier mod 4096 -> OFDM symbol mod 14 -> slot mod 2 -> subframe mod 10 -> frame mod 1024,
// as the paper describes. A symbol-in-frame counter (mod 280) is kept alongside; from it and
// the frame parity the scheduler derives whether the current symbol belongs to an SS block,
// which one (ss_idx = SS_i, 0..7) and which of its four symbols (ss_sym). SS blocks start at
// symbols 4, 8, 16, 20, 32, 36, 44, 48 of every even frame (SS burst every 20 ms).
// All outputs are registers that describe the sample that the next `adv` consumes.
// The paper draws the counters as separate units and says they share hardware; here they are
// a plain cascade. Reset (synchronous, active high) returns every counter to zero.
module frame_scheduler
  import cs_pkg::*;
#(
  parameter int unsigned FFT_N_P      = FFT_N,
  parameter int unsigned SYM_PER_SLOT_P = SYM_PER_SLOT
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        adv,
  output logic [11:0] sc_idx,       // sample within the OFDM symbol
  output logic [3:0]  sym_idx,      // OFDM symbol within the slot
  output logic        slot_idx,     // slot within the subframe
  output logic [3:0]  sf_idx,       // subframe within the frame
  output logic [9:0]  frame_idx,    // system frame number
  output logic [8:0]  sym_in_frame, // 0..279
  output logic        ss_active,    // current symbol carries an SS block
  output logic [2:0]  ss_idx,       // SS_i of that block
  output logic [1:0]  ss_sym,       // symbol within the SS block
  output logic        sym_last      // adv now ends the OFDM symbol
);
  logic sym_wrap, slot_wrap, sf_wrap, frm_wrap;
  assign sym_last  = (sc_idx == 12'(FFT_N_P - 1));
  assign sym_wrap  = sym_last && (sym_idx == 4'(SYM_PER_SLOT_P - 1));
  assign slot_wrap = sym_wrap && slot_idx;
  assign sf_wrap   = slot_wrap && (sf_idx == 4'd9);
  assign frm_wrap  = sf_wrap;

  always_ff @(posedge clk) begin
    if (rst) begin
      sc_idx <= '0; sym_idx <= '0; slot_idx <= 1'b0; sf_idx <= '0; frame_idx <= '0;
      sym_in_frame <= '0;
    end else if (adv) begin
      sc_idx <= sym_last ? '0 : sc_idx + 12'd1;
      if (sym_last) begin
        sym_idx      <= sym_wrap ? '0 : sym_idx + 4'd1;
        sym_in_frame <= frm_wrap ? '0 : sym_in_frame + 9'd1;
      end
      if (sym_wrap)  slot_idx  <= ~slot_idx;
      if (slot_wrap) sf_idx    <= sf_wrap ? '0 : sf_idx + 4'd1;
      if (frm_wrap)  frame_idx <= frame_idx + 10'd1;   // wraps mod 1024
    end
  end

  // SS index from symbol-in-frame and frame parity.
  always_comb begin
    ss_active = 1'b0;
    ss_idx    = '0;
    ss_sym    = '0;
    for (int i = 0; i < N_SSB; i++) begin
      if (!frame_idx[0] && sym_in_frame >= 9'(ss_start_sym(i)) &&
          sym_in_frame < 9'(ss_start_sym(i) + SSB_SYM)) begin
        ss_active = 1'b1;
        ss_idx    = 3'(i);
        ss_sym    = 2'(sym_in_frame - 9'(ss_start_sym(i)));
      end
    end
  end
endmodule
