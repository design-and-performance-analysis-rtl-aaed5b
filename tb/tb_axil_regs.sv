// tb_axil_regs -- AXI4-Lite register block: writes with address/data presented in either
// order, back-pressured responses, read-back of every register and the decoded outputs.
module tb_axil_regs;
  logic clk = 0, rst = 1;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [3:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic enable; logic [9:0] pci; logic [13:0] gscn;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  axil_regs dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [3:0] a, input logic [31:0] d, input int skew, input int bdelay);
    @(posedge clk);
    if (skew >= 0) begin awvalid <= 1; awaddr <= a; end
    if (skew <= 0) begin wvalid <= 1; wdata <= d; end
    if (skew != 0) begin
      repeat (2) @(posedge clk);
      chk(!bvalid, "no response before both channels");
      awvalid <= 1; awaddr <= a; wvalid <= 1; wdata <= d;
    end
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    repeat (bdelay) begin @(posedge clk); chk(bvalid, "bvalid held"); end
    bready <= 1;
    do @(posedge clk); while (!bvalid);
    bready <= 0;
  endtask
  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(posedge clk); arvalid <= 1; araddr <= a;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    repeat (2) @(posedge clk);
    rready <= 1;
    do @(posedge clk); while (!rvalid);
    d = rdata; rready <= 0;
  endtask
  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk); #1;
    chk(enable == 0 && pci == 0 && gscn == 7711, "reset values");
    wr(4'h4, 32'd517, 0, 2);
    wr(4'h8, 32'd7730, 1, 0);
    wr(4'h0, 32'd1, -1, 3);
    @(posedge clk); #1;
    chk(enable == 1 && pci == 517 && gscn == 7730, "decoded outputs");
    rd(4'h0, d); chk(d == 1, "read CTRL");
    rd(4'h4, d); chk(d == 517, "read PCI");
    rd(4'h8, d); chk(d == 7730, "read GSCN");
    rd(4'hC, d); chk(d == 0, "read unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
