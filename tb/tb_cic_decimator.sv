// tb_cic_decimator: compares cic_decimator with a direct convolution by the
// N-fold boxcar of length R, sampled at n = R*m + R-1 - (N-1), shifted and
// saturated. Runs two rates with random input gaps, and counts outputs.
module tb_cic_decimator;
  localparam int N = 4, RMAX = 16, IN_W = 16, OUT_W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, out_valid;
  logic [$clog2(RMAX):0] rate;
  logic [5:0] shift;
  logic signed [IN_W-1:0] in_smp = '0;
  logic signed [OUT_W-1:0] out_smp;
  int checks = 0, failures = 0;

  cic_decimator #(.N(N), .RMAX(RMAX), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint x [4096];
  longint h [256];
  longint exp_q [$];
  int nout;

  always @(posedge clk) if (out_valid && rst_n) begin
    longint e;
    e = exp_q.pop_front();
    checks++;
    if (longint'(out_smp) != e) begin failures++; $display("FAIL out %0d exp %0d", out_smp, e); end
    nout++;
  end

  task automatic run(input int r, input int sh, input int amp);
    int len, nin;
    longint y, ys;
    // impulse response: boxcar of length r convolved N times
    for (int i = 0; i < 256; i++) h[i] = 0;
    for (int i = 0; i < r; i++) h[i] = 1;
    len = r;
    for (int s = 1; s < N; s++) begin
      longint t [256];
      for (int i = 0; i < 256; i++) t[i] = 0;
      for (int i = 0; i < len; i++) for (int j = 0; j < r; j++) t[i+j] += h[i];
      len = len + r - 1;
      h = t;
    end
    nin = 64 * r;
    for (int i = 0; i < nin; i++) x[i] = longint'($urandom_range(0, 2*amp)) - amp;
    for (int m = 0; m < 64; m++) begin
      int n;
      n = r * m + r - 1 - (N - 1);   // the pipelined integrators add N-1 samples of delay
      y = 0;
      for (int k = 0; k < len; k++) if (n - k >= 0) y += h[k] * x[n-k];
      ys = y >>> sh;
      if (ys > 32767) ys = 32767;
      if (ys < -32768) ys = -32768;
      exp_q.push_back(ys);
    end
    rate <= ($clog2(RMAX)+1)'(r); shift <= 6'(sh);
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    nout = 0;
    for (int i = 0; i < nin; i++) begin
      in_smp <= IN_W'(x[i]); in_valid <= 1'b1; @(posedge clk);
      if ($urandom_range(0, 2) == 0) begin in_valid <= 1'b0; @(posedge clk); end
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != 64) begin failures++; $display("FAIL %0d outputs for rate %0d", nout, r); end
  endtask

  initial begin
    rate = 8; shift = 12;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(8, 12, 30000);     // gain 8^4 = 2^12: unity
    run(5, 9, 3000);       // gain 625, shift 9: some saturation
    run(16, 14, 2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
