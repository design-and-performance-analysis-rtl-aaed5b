// ss_ram -- memory for one SS block: 960 complex words (4 symbols x 240 subcarriers).
//
// Simple dual-port RAM, one synchronous write port and one read port with a registered
// output (one clock read latency), which maps onto an FPGA block RAM. Contents are not reset.
module ss_ram
  import cs_pkg::*;
#(
  parameter int unsigned DEPTH = SSB_RE,
  parameter int unsigned W     = 2 * TX_WL
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
