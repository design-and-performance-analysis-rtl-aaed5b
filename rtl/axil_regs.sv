// axil_regs -- AXI4-Lite configuration registers written by the MAC layer.
//
// Register map (32-bit, byte addresses):
//   0x0 CTRL  bit 0: enable the transmitter
//   0x4 PCI   bits 9:0: physical cell identity N_ID^cell (0..1007)
//   0x8 GSCN  bits 13:0: synchronisation raster number of the SS block (7711..)
// Writes complete when both the address and the data channel are valid (accepted together,
// one write at a time); reads return the register in the cycle after the address handshake.
// Responses are always OKAY. The register map and handshake are this design's own; the paper
// only states that PCI and GSCN reach internal registers through AXI-Lite.
// Lint: the two byte-offset address bits and the data bits above each register's width are
// ignored on purpose (32-bit aligned accesses only).
module axil_regs (
  input  logic        clk,
  input  logic        rst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [3:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  input  logic        arvalid,
  output logic        arready,
  input  logic [3:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic        enable,
  output logic [9:0]  pci,
  output logic [13:0] gscn
);
  logic wr_go;
  assign wr_go   = awvalid && wvalid && !bvalid;
  assign awready = wr_go;
  assign wready  = wr_go;
  assign arready = !rvalid;

  always_ff @(posedge clk) begin
    if (rst) begin
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
      enable <= 1'b0; pci <= '0; gscn <= 14'd7711;
    end else begin
      if (bvalid && bready) bvalid <= 1'b0;
      if (wr_go) begin
        bvalid <= 1'b1;
        case (awaddr[3:2])
          2'd0: enable <= wdata[0];
          2'd1: pci    <= wdata[9:0];
          2'd2: gscn   <= wdata[13:0];
          default: ;
        endcase
      end
      if (rvalid && rready) rvalid <= 1'b0;
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        case (araddr[3:2])
          2'd0: rdata <= {31'd0, enable};
          2'd1: rdata <= {22'd0, pci};
          2'd2: rdata <= {18'd0, gscn};
          default: rdata <= '0;
        endcase
      end
    end
  end

  // AXI rule: a response stays valid until it is accepted.
  assert property (@(posedge clk) disable iff (rst) bvalid && !bready |=> bvalid);
  assert property (@(posedge clk) disable iff (rst) rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
