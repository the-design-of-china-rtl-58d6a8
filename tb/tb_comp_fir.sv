// tb_comp_fir: checks the compensation filter by its behaviour: unity DC
// gain, a symmetric impulse response, pass-band gain 1/sinc^4(f) at f=0.1
// (the CIC droop it must undo), strong attenuation of a tone at f=0.4 that
// would alias, and one output per two inputs.
module tb_comp_fir;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int TAPS = 31;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, out_valid;
  cplx16_t in = '0, out;
  int checks = 0, failures = 0;
  int outs_re [$], outs_im [$];

  comp_fir #(.TAPS(TAPS), .CIC_N(4)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && rst_n) begin outs_re.push_back(out.re); outs_im.push_back(out.im); end

  task automatic feed(input int n, input real f, input real amp, input int impulse_at);
    outs_re.delete(); outs_im.delete();
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    for (int i = 0; i < n; i++) begin
      if (impulse_at >= 0) begin
        in.re <= (i == impulse_at) ? 16'sd16384 : 16'sd0;
        in.im <= '0;
      end else begin
        in.re <= 16'($rtoi(amp * $cos(2.0*PI*f*i)));
        in.im <= 16'($rtoi(amp * $sin(2.0*PI*f*i)));
      end
      in_valid <= 1'b1; @(posedge clk);
      in_valid <= 1'b0; @(posedge clk);
    end
    repeat (4) @(posedge clk);
  endtask

  function automatic real amp_of(int from);
    real s;
    s = 0;
    for (int i = from; i < outs_re.size(); i++) s += real'(outs_re[i])**2 + real'(outs_im[i])**2;
    return $sqrt(s / (outs_re.size() - from));
  endfunction

  initial begin
    real h [TAPS];
    real a, g;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // impulse responses at even and odd phase give the even and odd taps
    feed(64, 0, 0, 20);
    for (int k = 0; k < outs_re.size(); k++) begin
      int t;
      t = 2*k + 1 - 20;              // output k sees the pair ending at 2k+1
      if (t >= 0 && t < TAPS) h[t] = outs_re[k] / 16384.0;
    end
    feed(64, 0, 0, 21);
    for (int k = 0; k < outs_re.size(); k++) begin
      int t;
      t = 2*k + 1 - 21;
      if (t >= 0 && t < TAPS) h[t] = outs_re[k] / 16384.0;
    end
    checks++;
    begin
      int bad = 0; real sum = 0;
      for (int t = 0; t < TAPS; t++) begin
        sum += h[t];
        if ((h[t] - h[TAPS-1-t]) > 0.0005 || (h[TAPS-1-t] - h[t]) > 0.0005) bad++;
      end
      if (bad != 0) begin failures++; $display("FAIL impulse response not symmetric (%0d)", bad); end
      checks++;
      if (sum < 0.99 || sum > 1.01) begin failures++; $display("FAIL tap sum %f", sum); end
    end
    // DC
    feed(100, 0.0, 10000.0, -1);
    checks++;
    if (outs_re[40] < 9950 || outs_re[40] > 10050) begin failures++; $display("FAIL DC %0d", outs_re[40]); end
    checks++;
    if (outs_re.size() != 50) begin failures++; $display("FAIL %0d outputs for 100 inputs", outs_re.size()); end
    // pass band: gain 1/sinc^4(0.1)
    feed(200, 0.1, 8000.0, -1);
    a = amp_of(30);
    g = (PI*0.1/$sin(PI*0.1))**4;
    checks++;
    if (a < 8000.0*g*0.97 || a > 8000.0*g*1.03) begin failures++; $display("FAIL passband amp %f exp %f", a, 8000.0*g); end
    // stop band
    feed(200, 0.4, 8000.0, -1);
    a = amp_of(30);
    checks++;
    if (a > 400.0) begin failures++; $display("FAIL stopband amp %f", a); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
