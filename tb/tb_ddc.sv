// tb_ddc -- digital down converter: random complex input at random phase increments; the
// expected decimated outputs come from an independent model of the mixer (cos/sin table built
// with the same rounding), the truncation to WL+1 bits and the D-sample integrate-and-dump.
// Also checks the output count, back-to-back and gapped input, and that `start` clears state.
module tb_ddc;
  localparam int WL = 24, D = 10, OW = WL + $clog2(D) + 1;
  logic clk = 0, rst = 1, start = 0, in_valid = 0;
  logic [11:0] phase_inc = 0;
  logic signed [WL-1:0] in_re = 0, in_im = 0;
  logic out_valid; logic signed [OW-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  longint exp_re[$], exp_im[$];
  always #5 clk = ~clk;
  ddc #(.WL(WL), .D_PSS(D)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint tabv(input int i, input bit s);
    real w; w = 2.0 * 3.14159265358979 * i / 4096.0;
    return longint'($rtoi($floor((s ? $sin(w) : $cos(w)) * 4194304.0 + 0.5)));
  endfunction
  always @(posedge clk) if (out_valid) begin
    checks++;
    if (exp_re.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      longint er, ei;
      er = exp_re.pop_front(); ei = exp_im.pop_front();
      if (out_re != er || out_im != ei) begin
        failures++; if (failures < 5) $display("got %0d %0d exp %0d %0d", out_re, out_im, er, ei);
      end
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    for (int run = 0; run < 6; run++) begin
      int ph; longint ar, ai;
      automatic int inc = (run == 0) ? 0 : $urandom % 4096;
      @(posedge clk); start <= 1; phase_inc <= 12'(inc);
      @(posedge clk); start <= 0;
      ph = 0; ar = 0; ai = 0;
      for (int n = 0; n < 40 * D; n++) begin
        int xr, xi; longint c, s, pr, pi;
        xr = int'($urandom % (1 << 23)) - (1 << 22); xi = int'($urandom % (1 << 23)) - (1 << 22);
        c = tabv(ph, 0); s = tabv(ph, 1);
        pr = (xr * c - xi * s) >>> 22; pi = (xr * s + xi * c) >>> 22;
        ar += pr; ai += pi;
        if (n % D == D - 1) begin exp_re.push_back(ar); exp_im.push_back(ai); ar = 0; ai = 0; end
        ph = (ph + inc) % 4096;
        if (run % 2 == 1) while ($urandom % 3 == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1; in_re <= 24'(xr); in_im <= 24'(xi);
        @(posedge clk);
      end
      in_valid <= 0;
      // a partial block that must be discarded by the next start
      in_valid <= 1; repeat (3) @(posedge clk); in_valid <= 0;
      repeat (3) @(posedge clk);
      checks++; if (exp_re.size() != 0) begin failures++; $display("missing outputs"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
