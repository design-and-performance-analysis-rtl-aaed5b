// tb_ss_ram -- writes all 960 words, reads them back in a different order, checks the
// one-clock read latency and that the output holds while rd_en is low.
module tb_ss_ram;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [9:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [31:0] model [960];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ss_ram dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 960; a++) begin
      @(posedge clk);
      wr_en <= 1; wr_addr <= 10'(a); wr_data <= $urandom; 
      #1 model[a] = wr_data;
    end
    @(posedge clk) wr_en <= 0;
    for (int k = 0; k < 960; k++) begin
      int a;
      a = (k * 7) % 960;
      @(posedge clk); rd_en <= 1; rd_addr <= 10'(a);
      @(posedge clk); rd_en <= 0; rd_addr <= 10'((a + 1) % 960);
      #1;
      checks++;
      if (rd_data !== model[a]) failures++;
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[a]) failures++;   // held
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
