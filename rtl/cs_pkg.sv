// cs_pkg -- constants, types and helper functions shared by the 5G NR cell-search
// transmitter and receiver PHY.
//
// The numerology is the n78 / 30 kHz configuration: a 4096-point OFDM symbol, 3276 active
// subcarriers (273 resource blocks), 14 symbols per slot, 2 slots per subframe, 10 subframes
// per frame (280 symbols). The cyclic prefix is 352 samples on the first symbol of a slot and
// 288 on the others (2.86 us and 2.34 us at 122.88 Msps). The SS block (PSS, PBCH, SSS, PBCH)
// occupies 240 subcarriers x 4 symbols and starts at symbols 4, 8, 16, 20, 32, 36, 44, 48 of
// an even frame. These numbers follow 3GPP TS 38.211 as summarised by the paper.
//
// Design choices of this implementation (not from the paper):
//  * The SS block can be placed on 64 raster positions, 48 subcarriers (1.44 MHz) apart,
//    inside the 3276 active subcarriers; raster position 0 starts at active subcarrier 0.
//  * Frequency-domain samples are carried in natural FFT-bin order; bin b is the frequency
//    offset b (b < 2048) or b-4096 from the carrier centre.
//  * Transmit samples are 16-bit fixed point with 2 integer bits (Q2.14).
package cs_pkg;

  localparam int FFT_N         = 4096;
  localparam int N_SC_ACT      = 3276;
  localparam int SC_CENTER     = N_SC_ACT / 2;   // active subcarrier that sits on DC
  localparam int SSB_SC        = 240;
  localparam int SSB_SYM       = 4;
  localparam int SSB_RE        = SSB_SC * SSB_SYM; // 960
  localparam int SEQ_LEN       = 127;
  localparam int SEQ_OFF       = 56;             // first PSS/SSS subcarrier inside the SSB
  localparam int N_DMRS        = 144;
  localparam int CP_LONG       = 352;
  localparam int CP_NORM       = 288;
  localparam int SYM_PER_SLOT  = 14;
  localparam int SYM_PER_FRAME = 280;
  localparam int SLOT_LEN      = SYM_PER_SLOT * FFT_N + CP_LONG + (SYM_PER_SLOT - 1) * CP_NORM;
  localparam int FRAME_LEN     = 20 * SLOT_LEN;  // 10 ms
  localparam int SSB_PERIOD    = 2 * FRAME_LEN;  // SS burst every other frame (20 ms)
  localparam int N_SSB         = 8;              // SS blocks per burst
  localparam int RASTER_SC     = 48;             // 1.44 MHz / 30 kHz
  localparam int N_RASTER      = (N_SC_ACT - SSB_SC) / RASTER_SC + 1; // 64
  localparam int GSCN_BASE     = 7711;           // lowest GSCN of n78
  localparam int TX_WL         = 16;
  localparam int QPSK_AMP      = 11585;          // round(2^14 / sqrt(2))
  localparam int BPSK_AMP      = 16384;          // 1.0 in Q2.14

  typedef struct packed {
    logic signed [TX_WL-1:0] re;
    logic signed [TX_WL-1:0] im;
  } cplx16_t;

  // First OFDM symbol (within the frame) of SS block i, i = 0..7.
  function automatic int unsigned ss_start_sym(input int unsigned i);
    case (i)
      0: return 4;   1: return 8;   2: return 16;  3: return 20;
      4: return 32;  5: return 36;  6: return 44;  default: return 48;
    endcase
  endfunction

  // Cyclic prefix length of symbol s of a slot.
  function automatic int unsigned cp_len(input int unsigned sym_in_slot);
    return (sym_in_slot == 0) ? CP_LONG : CP_NORM;
  endfunction

  // Length-127 m-sequences of TS 38.211 7.4.2.2 / 7.4.2.3.
  // taps = 4: x(i+7) = x(i+4) ^ x(i);  taps = 1: x(i+7) = x(i+1) ^ x(i).
  function automatic logic [SEQ_LEN-1:0] mseq127(input logic [6:0] init, input int unsigned tap);
    logic [SEQ_LEN-1:0] x;
    x = '0;
    x[6:0] = init;
    for (int i = 0; i < SEQ_LEN - 7; i++) x[i+7] = x[i+tap] ^ x[i];
    return x;
  endfunction

  function automatic logic [SEQ_LEN-1:0] pss_ref();
    return mseq127(7'b1110110, 4);   // x(6..0) = 1,1,1,0,1,1,0
  endfunction
  function automatic logic [SEQ_LEN-1:0] sss_ref0();
    return mseq127(7'b0000001, 4);
  endfunction
  function automatic logic [SEQ_LEN-1:0] sss_ref1();
    return mseq127(7'b0000001, 1);
  endfunction

  // Cyclic part select: y(n) = x((n + s) mod 127).
  function automatic logic [SEQ_LEN-1:0] rot127(input logic [SEQ_LEN-1:0] x, input logic [6:0] s);
    logic [2*SEQ_LEN-1:0] xx;
    xx = {x, x};
    return xx[8'(s) +: SEQ_LEN];
  endfunction

  // Gold sequence (TS 38.211 5.2.1). States hold x(n)..x(n+30) in bits 0..30.
  function automatic logic [30:0] x1_step(input logic [30:0] s);
    return {s[3] ^ s[0], s[30:1]};
  endfunction
  function automatic logic [30:0] x2_step(input logic [30:0] s);
    return {s[3] ^ s[2] ^ s[1] ^ s[0], s[30:1]};
  endfunction
  function automatic logic [30:0] x1_after_nc();
    logic [30:0] s;
    s = 31'd1;
    for (int i = 0; i < 1600; i++) s = x1_step(s);
    return s;
  endfunction

  // PBCH DMRS initial value (TS 38.211 7.4.1.4.1, L_max = 8, first half frame).
  function automatic logic [30:0] dmrs_cinit(input logic [9:0] pci, input logic [2:0] issb);
    logic [31:0] i1, n1;
    i1 = 32'(issb) + 32'd1;
    n1 = 32'(pci >> 2) + 32'd1;
    return 31'((i1 * n1 << 11) + (i1 << 6) + 32'(pci[1:0]));
  endfunction

  function automatic cplx16_t qpsk(input logic b0, input logic b1);
    cplx16_t y;
    y.re = b0 ? -16'(QPSK_AMP) : 16'(QPSK_AMP);
    y.im = b1 ? -16'(QPSK_AMP) : 16'(QPSK_AMP);
    return y;
  endfunction

  // Position of resource element (sym, sc) of the SS block (sym 0..3, sc 0..239).
  typedef enum logic [2:0] {RE_ZERO, RE_PSS, RE_SSS, RE_DMRS, RE_PBCH} re_kind_e;

  function automatic re_kind_e re_kind(input int unsigned sym, input int unsigned sc,
                                       input logic [1:0] v);
    logic in_seq;
    in_seq = (sc >= SEQ_OFF) && (sc < SEQ_OFF + SEQ_LEN);
    case (sym)
      0: return in_seq ? RE_PSS : RE_ZERO;
      2: begin
        if (in_seq) return RE_SSS;
        if (sc >= 48 && sc < 192) return RE_ZERO;
        return (sc[1:0] == v) ? RE_DMRS : RE_PBCH;
      end
      default: return (sc[1:0] == v) ? RE_DMRS : RE_PBCH;
    endcase
  endfunction

  // Index into the 144-symbol DMRS sequence of a DMRS resource element (valid for RE_DMRS).
  function automatic int unsigned dmrs_index(input int unsigned sym, input int unsigned sc);
    case (sym)
      1: return sc / 4;
      2: return (sc < 48) ? 60 + sc / 4 : 72 + (sc - 192) / 4;
      default: return 84 + sc / 4;
    endcase
  endfunction

endpackage
