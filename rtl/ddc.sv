// ddc -- digital down converter of the PSS search.
//
// Mixes the complex input with an NCO, x(n) * exp(j*2*pi*phase_inc*n/4096), which moves the
// PSS of the candidate raster position to DC, then low-pass filters and decimates by D with
// an integrate-and-dump (boxcar) filter: every D inputs one output, the sum of the last D
// mixed samples. The 12-bit phase accumulator is exact for shifts by whole subcarriers of the
// 4096-point grid. The NCO is a 4096-entry cos/sin table of WL-bit values (1.0 = 2^(WL-2)).
// The paper names the three steps (down-conversion, low-pass filter, down-sampling by D_PSS);
// the boxcar filter is the simplest filter that does the job and is this design's choice.
// Interface: pulse `start` (with phase_inc) to clear the NCO phase and the accumulator; then
// each `in_valid` consumes one sample. `out_valid` pulses one clock after the D-th sample.
module ddc #(
  parameter int unsigned WL    = 24,
  parameter int unsigned D_PSS = 10,
  parameter int unsigned OW    = WL + $clog2(D_PSS) + 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [11:0]          phase_inc,
  input  logic                 in_valid,
  input  logic signed [WL-1:0] in_re,
  input  logic signed [WL-1:0] in_im,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_re,
  output logic signed [OW-1:0] out_im
);
  localparam int unsigned FRAC = WL - 2;
  typedef logic signed [WL-1:0] nco_t [4096];
  function automatic nco_t mk_nco(input bit want_sin);
    nco_t t;
    real w;
    for (int i = 0; i < 4096; i++) begin
      w = 2.0 * 3.14159265358979 * i / 4096.0;
      t[i] = WL'($rtoi($floor((want_sin ? $sin(w) : $cos(w)) * (2.0 ** FRAC) + 0.5)));
    end
    return t;
  endfunction
  localparam nco_t COS_T = mk_nco(1'b0);
  localparam nco_t SIN_T = mk_nco(1'b1);

  logic [11:0] phase;
  logic [$clog2(D_PSS+1)-1:0] cnt;
  logic signed [2*WL-1:0] pr, pi;
  logic signed [WL:0] mr, mi;
  logic signed [OW-1:0] acc_re, acc_im;

  always_comb begin
    pr = in_re * COS_T[phase] - in_im * SIN_T[phase];
    pi = in_re * SIN_T[phase] + in_im * COS_T[phase];
    mr = (WL+1)'(pr >>> FRAC);
    mi = (WL+1)'(pi >>> FRAC);
  end

  always_ff @(posedge clk) begin
    out_valid <= 1'b0;
    if (rst || start) begin
      phase <= '0; cnt <= '0; acc_re <= '0; acc_im <= '0;
      out_re <= '0; out_im <= '0;
    end else if (in_valid) begin
      phase <= phase + phase_inc;
      if (cnt == ($clog2(D_PSS+1))'(D_PSS - 1)) begin
        cnt       <= '0;
        out_re    <= acc_re + OW'(mr);
        out_im    <= acc_im + OW'(mi);
        out_valid <= 1'b1;
        acc_re    <= '0;
        acc_im    <= '0;
      end else begin
        cnt    <= cnt + 1'b1;
        acc_re <= acc_re + OW'(mr);
        acc_im <= acc_im + OW'(mi);
      end
    end
  end
endmodule
