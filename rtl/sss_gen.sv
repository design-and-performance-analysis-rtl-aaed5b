// sss_gen -- secondary synchronisation signal generator (TS 38.211 7.4.2.3).
//
// SSS(n) = [1-2*x0((n+m0) mod 127)] * [1-2*x1((n+m1) mod 127)] with
// N_ID1 = PCI/3, N_ID2 = PCI mod 3, m0 = 15*floor(N_ID1/112) + 5*N_ID2, m1 = N_ID1 mod 112.
// Both reference m-sequences are constants; each is cyclically part-selected and the two
// BPSK sequences are multiplied element by element, which for bits is an XOR. Output bit n is
// 1 where the symbol is -1. Purely combinational.
// The paper's equation writes floor(PCI/336), which equals floor(N_ID1/112). Its block diagram
// adds a "+1" after the mod-127 of the m0 path; the equation has none, so none is added here
// (the +1 reads as 1-based indexing of the drawing tool).
module sss_gen
  import cs_pkg::*;
(
  input  logic [9:0]         pci,
  output logic [SEQ_LEN-1:0] sss
);
  localparam logic [SEQ_LEN-1:0] REF0 = sss_ref0();
  localparam logic [SEQ_LEN-1:0] REF1 = sss_ref1();
  logic [8:0] nid1;
  logic [1:0] nid2;
  logic [6:0] m0, m1;
  always_comb begin
    nid1 = 9'(pci / 10'd3);
    nid2 = 2'(pci % 10'd3);
    m0   = 7'((7'd15 * 7'(nid1 / 9'd112) + 7'd5 * 7'(nid2)) % 7'd127);
    m1   = 7'(nid1 % 9'd112);
    sss  = rot127(REF0, m0) ^ rot127(REF1, m1);
  end
endmodule
