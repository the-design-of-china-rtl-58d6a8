// comp_fir: CIC compensation filter with decimation by two, for complex
// samples.
//
// The paper places a "Compensation Filter" after the CIC filter; its design
// is not given. This design uses a symmetric TAPS-tap FIR, decimating by 2,
// whose coefficients are computed at elaboration by frequency sampling with
// a Hamming window: the target response is 1/|sinc(f)|^CIC_N up to the
// pass-band edge FPASS (in cycles per input sample, the output Nyquist being
// 0.25) and zero above, which undoes the droop of an N-stage CIC. The
// coefficients are quantised to Q1.17 with DC gain normalised to one.
// The same filter runs on I and Q.
//
// Timing: one output per two valid inputs, registered on the clock after
// the second input of the pair.
module comp_fir
  import crane_pkg::*;
#(
  parameter int  TAPS  = 31,
  parameter int  CIC_N = 4,
  parameter real FPASS = 0.2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clr,
  input  logic    in_valid,
  input  cplx16_t in,
  output logic    out_valid,
  output cplx16_t out
);
  localparam real PI = 3.14159265358979323846;
  localparam int  CW = 18;

  logic signed [CW-1:0] coef [TAPS];

  initial begin
    real h [TAPS];
    real sum, f, hf, s, c;
    sum = 0.0;
    for (int n = 0; n < TAPS; n++) begin
      c = n - (TAPS - 1) / 2.0;
      h[n] = 0.0;
      for (int k = 0; k < 512; k++) begin
        f = (k + 0.5) / 1024.0;              // 0 .. 0.5 cycles/sample
        if (f < FPASS) begin
          s  = PI * f;
          hf = 1.0;
          for (int j = 0; j < CIC_N; j++) hf = hf * s / $sin(s);
          h[n] = h[n] + hf * $cos(2.0 * PI * f * c);
        end
      end
      h[n] = h[n] * (0.54 + 0.46 * $cos(2.0 * PI * c / (TAPS - 1)));
      sum = sum + h[n];
    end
    for (int n = 0; n < TAPS; n++)
      coef[n] = CW'($rtoi($floor(h[n] / sum * 131072.0 + 0.5)));
  end

  logic signed [DDC_W-1:0] dre [TAPS];
  logic signed [DDC_W-1:0] dim [TAPS];
  logic                    ph;
  // one-clock delayed "pair complete" strobe so the sum sees the new sample
  logic ph_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ph_q <= 1'b0;
    else        ph_q <= in_valid && ph && !clr;
  logic signed [DDC_W+CW+5:0] acc_re, acc_im;

  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int n = 0; n < TAPS; n++) begin
      acc_re += (DDC_W+CW+6)'(coef[n] * dre[n]);
      acc_im += (DDC_W+CW+6)'(coef[n] * dim[n]);
    end
  end

  function automatic logic signed [DDC_W-1:0] sat(input logic signed [DDC_W+CW+5:0] v);
    logic signed [DDC_W+CW+5:0] r;
    r = v >>> (CW - 1);
    if (r > (DDC_W+CW+6)'(2**(DDC_W-1) - 1))   return DDC_W'(2**(DDC_W-1) - 1);
    if (r < -(DDC_W+CW+6)'(2**(DDC_W-1)))      return DDC_W'(-(2**(DDC_W-1)));
    return DDC_W'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < TAPS; n++) begin dre[n] <= '0; dim[n] <= '0; end
      ph <= 1'b0; out_valid <= 1'b0; out <= '0;
    end else if (clr) begin
      for (int n = 0; n < TAPS; n++) begin dre[n] <= '0; dim[n] <= '0; end
      ph <= 1'b0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        dre[0] <= in.re;
        dim[0] <= in.im;
        for (int n = 1; n < TAPS; n++) begin dre[n] <= dre[n-1]; dim[n] <= dim[n-1]; end
        ph <= ~ph;
      end
      // output once per pair, from the delay line as it stands after the pair
      if (ph_q) begin
        out_valid <= 1'b1;
        out.re <= sat(acc_re);
        out.im <= sat(acc_im);
      end
    end
  end

endmodule
