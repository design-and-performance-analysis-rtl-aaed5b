// pbch_gen -- filler symbols for the PBCH resource elements.
//
// Cell search does not decode the PBCH, so (as the paper does) its 432 resource elements per
// SS block carry pseudo-random QPSK symbols. Here they come from a 23-bit maximal-length LFSR
// (x^23 + x^18 + 1) that advances two steps each time `next` is high; the two newest bits are
// mapped to one QPSK symbol (Q2.14). The LFSR choice and seed are this design's own.
// `sym` is valid in the same cycle as `next`; the following symbol appears one clock later.
module pbch_gen
  import cs_pkg::*;
#(
  parameter logic [22:0] SEED = 23'h5A5A5
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    next,
  output cplx16_t sym
);
  logic [22:0] lfsr;
  logic [22:0] lfsr_n;
  always_comb begin
    lfsr_n = lfsr;
    for (int i = 0; i < 2; i++) lfsr_n = {lfsr_n[21:0], lfsr_n[22] ^ lfsr_n[17]};
  end
  always_ff @(posedge clk) begin
    if (rst)       lfsr <= SEED;
    else if (next) lfsr <= lfsr_n;
  end
  assign sym = qpsk(lfsr[0], lfsr[1]);
endmodule
