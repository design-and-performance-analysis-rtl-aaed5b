// boundary_search -- symbol, slot, subframe and frame tick generation.
//
// Reference: `ref_tick` marks the first sample of the extracted PSS symbol window, which the
// extractor takes ADV samples before the body start (sample 288 - ADV of that symbol counting
// from its cyclic prefix). From then on every received sample (`s_fire`)
// is counted. When the DMRS search reports SS_i, a look-up table gives
//   N_slot_edge = 14 - (first symbol of SS block SS_i mod 14)  = 10, 6, 12, 8, 10, 6, 12, 8,
// the number of OFDM symbols from the PSS symbol to the next slot start (the paper's example:
// SS_i = 2 in 1-based numbering, PSS at symbol 8, N_slot_edge = 6). A down counter loaded
// with N_slot_edge counts symbol boundaries (all with the 288-sample prefix, since no slot
// edge lies in between); when it reaches 0 the mod-280 symbol counter is loaded with the
// symbol number of that slot start and from there follows the frame: symbol lengths are
// 4096 + 352 for the first symbol of a slot and 4096 + 288 otherwise. Because SS_i arrives
// long after the reference, the samples counted meanwhile are first consumed one symbol per
// clock (catch-up) and the block then tracks the live stream. The symbol number itself is
// also counted from the PSS symbol on, so symbol ticks are given before the slot edge too;
// at the edge the mod-280 counter is (re)loaded from the look-up table.
// Outputs are one-clock pulses in the same clock as the accepted sample that starts a symbol
// (its first cyclic-prefix sample): symbol_tick on every symbol, slot_tick when the symbol
// number is a multiple of 14, subframe_tick of 28, frame_tick at symbol 0.
// The paper draws the mod-280 counter as reset by the down counter and decodes 0, 28 and 14;
// its text asks for a slot tick every 14 symbols, a subframe tick every 2 slot ticks and a
// frame tick every 10 subframe ticks. This design follows the text, loading the counter with
// the frame position of the slot edge so that the frame tick marks symbol 0 of the frame.
module boundary_search
  import cs_pkg::*;
#(
  parameter int unsigned ADV = 2
)
(
  input  logic       clk,
  input  logic       rst,
  input  logic       s_fire,
  input  logic       ref_tick,
  input  logic       ssi_valid,
  input  logic [2:0] ssi,
  output logic       locked,
  output logic [8:0] sym_num,      // symbol number in the frame, valid when locked
  output logic       symbol_tick,
  output logic       slot_tick,
  output logic       subframe_tick,
  output logic       frame_tick
);
  typedef enum logic [1:0] {IDLE, COUNT, CATCHUP, TRACK} st_e;
  st_e st;
  logic [31:0] elapsed;       // samples since the start of the current symbol
  logic [3:0]  dcnt;          // down counter to the slot edge
  logic [8:0]  edge_sym;      // symbol number of that slot edge
  logic [12:0] len;           // length of the current symbol
  logic [31:0] inc;

  function automatic logic [3:0] n_slot_edge(input logic [2:0] i);
    return 4'(SYM_PER_SLOT - (ss_start_sym(32'(i)) % SYM_PER_SLOT));
  endfunction

  assign len = (dcnt != 0) ? 13'(FFT_N + CP_NORM)
                           : 13'(FFT_N) + 13'(cp_len(32'(sym_num) % SYM_PER_SLOT));
  assign inc = s_fire ? 32'd1 : 32'd0;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= IDLE; elapsed <= '0; dcnt <= '0; edge_sym <= '0; sym_num <= '0; locked <= 1'b0;
    end else begin
      case (st)
        IDLE, COUNT, TRACK: if (ref_tick) begin
          st <= COUNT; elapsed <= 32'(CP_NORM) - 32'(ADV) + 32'd1 + inc; locked <= 1'b0;
        end else if (st == COUNT) begin
          elapsed <= elapsed + inc;
          if (ssi_valid) begin
            st       <= CATCHUP;
            dcnt     <= n_slot_edge(ssi);
            edge_sym <= 9'(ss_start_sym(32'(ssi))) + 9'(n_slot_edge(ssi));
            sym_num  <= 9'(ss_start_sym(32'(ssi)));
          end
        end else if (st == TRACK) begin
          if (s_fire) begin
            if (elapsed + 32'd1 == 32'(len)) begin
              elapsed <= '0;
              if (dcnt == 4'd1) begin dcnt <= '0; sym_num <= edge_sym; end
              else begin
                if (dcnt != 0) dcnt <= dcnt - 4'd1;
                sym_num <= (sym_num == 9'(SYM_PER_FRAME - 1)) ? '0 : sym_num + 9'd1;
              end
            end else elapsed <= elapsed + 32'd1;
          end
        end
        CATCHUP: begin
          if (elapsed + inc >= 32'(len)) begin
            elapsed <= elapsed + inc - 32'(len);
            if (dcnt == 4'd1) begin dcnt <= '0; sym_num <= edge_sym; end
            else begin
              if (dcnt != 0) dcnt <= dcnt - 4'd1;
              sym_num <= (sym_num == 9'(SYM_PER_FRAME - 1)) ? '0 : sym_num + 9'd1;
            end
          end else begin
            elapsed <= elapsed + inc;
            st      <= TRACK;
            locked  <= 1'b1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  // The accepted sample starts a new symbol when the count has just wrapped to 0.
  assign symbol_tick   = (st == TRACK) && s_fire && (elapsed == 32'd0);
  assign slot_tick     = symbol_tick && (sym_num % 9'd14 == 9'd0);
  assign subframe_tick = symbol_tick && (sym_num % 9'd28 == 9'd0);
  assign frame_tick    = symbol_tick && (sym_num == 9'd0);
endmodule
