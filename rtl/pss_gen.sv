// pss_gen -- primary synchronisation signal generator (TS 38.211 7.4.2.2).
//
// PSS(n) = 1 - 2*x((n + 43*(PCI mod 3)) mod 127). The 127-bit reference m-sequence x is a
// constant (the "127-bit ROM"); PCI mod 3 is scaled by 43, reduced mod 127 and used as the
// cyclic part-select offset, exactly as drawn in the paper. Output bit n is 1 where the BPSK
// symbol is -1. Purely combinational.
module pss_gen
  import cs_pkg::*;
(
  input  logic [9:0]         pci,
  output logic [SEQ_LEN-1:0] pss     // bit n: 1 -> symbol -1, 0 -> symbol +1
);
  localparam logic [SEQ_LEN-1:0] REF = pss_ref();
  logic [1:0] nid2;
  logic [6:0] x;
  always_comb begin
    nid2 = 2'(pci % 10'd3);
    x    = 7'((7'd43 * 7'(nid2)) % 7'd127);
    pss  = rot127(REF, x);
  end
endmodule
