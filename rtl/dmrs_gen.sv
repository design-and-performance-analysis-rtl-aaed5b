// dmrs_gen -- PBCH DMRS generator (TS 38.211 7.4.1.4.1).
//
// Three stages, as in the paper's architecture:
//  1. PRBS init: c_init = 2^11*(SS_i+1)*(floor(PCI/4)+1) + 2^6*(SS_i+1) + (PCI mod 4).
//  2. Gold PRBS: c(n) = x1(n+1600) ^ x2(n+1600), two length-31 LFSRs held in 32-bit
//     registers and advanced WORD steps per clock. x1 starts from a constant (its state after
//     the 1600-step offset), x2 is loaded with c_init and stepped 1600 times (50 clocks at
//     WORD = 32), then 288 bits are collected (9 clocks).
//  3. QPSK: r(m) = (1-2c(2m))/sqrt(2) + j(1-2c(2m+1))/sqrt(2), 144 symbols in Q2.14.
// The paper jumps the offset with parity ROMs; stepping the LFSR in a loop is this design's
// simpler equivalent. Interface: pulse `start` with pci/issb valid; `done` pulses when `prbs`
// and `sym` hold the new sequence (60 clocks later at WORD = 32). `busy` is high in between.
module dmrs_gen
  import cs_pkg::*;
#(
  parameter int unsigned WORD    = 32,
  parameter int unsigned SEQ_BITS = 2 * N_DMRS
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic [9:0]          pci,
  input  logic [2:0]          issb,
  output logic                busy,
  output logic                done,
  output logic [SEQ_BITS-1:0] prbs,     // bit n = c(n)
  output cplx16_t             sym [SEQ_BITS/2]
);
  localparam int unsigned SKIP_WORDS = (1600 + WORD - 1) / WORD;
  localparam int unsigned SKIP_REM   = SKIP_WORDS * WORD - 1600;  // extra steps to undo: 0 at WORD=32
  localparam int unsigned OUT_WORDS  = (SEQ_BITS + WORD - 1) / WORD;
  localparam logic [30:0] X1_NC = x1_after_nc();

  typedef enum logic [1:0] {IDLE, SKIP, GEN} st_e;
  st_e st;
  logic [30:0] x1, x2;
  logic [7:0]  cnt;
  logic [OUT_WORDS*WORD-1:0] acc;

  // WORD steps of both LFSRs and the WORD output bits produced on the way.
  logic [30:0]     x1_n, x2_n;
  logic [WORD-1:0] c_w;
  always_comb begin
    x1_n = x1;
    x2_n = x2;
    for (int i = 0; i < WORD; i++) begin
      c_w[i] = x1_n[0] ^ x2_n[0];
      x1_n   = x1_step(x1_n);
      x2_n   = x2_step(x2_n);
    end
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      st <= IDLE; cnt <= '0; x1 <= '0; x2 <= '0;
    end else begin
      case (st)
        IDLE: if (start) begin
          x1  <= X1_NC;
          x2  <= dmrs_cinit(pci, issb);
          cnt <= '0;
          st  <= SKIP;
        end
        SKIP: begin
          x2  <= x2_n;        // x1 already sits at offset 1600
          cnt <= cnt + 8'd1;
          if (cnt == 8'(SKIP_WORDS - 1)) begin cnt <= '0; st <= GEN; end
        end
        GEN: begin
          x1 <= x1_n;
          x2 <= x2_n;
          acc[cnt*WORD +: WORD] <= c_w;
          cnt <= cnt + 8'd1;
          if (cnt == 8'(OUT_WORDS - 1)) begin st <= IDLE; done <= 1'b1; end
        end
        default: st <= IDLE;
      endcase
    end
  end

  assign busy = (st != IDLE);
  assign prbs = acc[SEQ_BITS-1:0];
  always_comb for (int m = 0; m < SEQ_BITS/2; m++) sym[m] = qpsk(prbs[2*m], prbs[2*m+1]);

  initial assert (SKIP_REM == 0) else $error("WORD must divide 1600");
endmodule
