// tb_pfb_fir: polyphase front end with NMAX = 32 and 4 taps. The expected
// output is the weighted overlap-add sum computed here from its own copy of
// the prototype (Hamming-windowed sinc, Q1.17) and the input history; it is
// checked exactly for N = 32 and for the run-time size N = 8 (prototype
// read with stride 4), together with the priming of TAPS-1 frames and the
// frame-start flag.
module tb_pfb_fir;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int LMAX = 5, TAPS = 4, NMAX = 1 << LMAX;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, out_valid, out_first;
  logic [$clog2(LMAX+1)-1:0] log2n;
  logic signed [SMP_W-1:0] in_smp = '0;
  logic signed [17:0] out_smp;
  int checks = 0, failures = 0;

  pfb_fir #(.LOG2N_MAX(LMAX), .TAPS(TAPS), .OUT_W(18)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint h [TAPS*NMAX];
  int x [2048];
  int nin, nout, n, lg;

  always @(posedge clk) if (out_valid && rst_n) begin
    longint acc;
    int i, k, m;
    i = nout + (TAPS - 1) * n;        // input index of the newest sample
    k = i % n;
    acc = 0;
    for (int t = 0; t < TAPS; t++)
      acc += h[(t * n + k) * (NMAX / n)] * x[i - (TAPS - 1 - t) * n];
    checks++;
    if (longint'(out_smp) != (acc >>> 12) || out_first != (k == 0)) begin
      failures++; $display("FAIL n=%0d out %0d: %0d exp %0d", n, nout, out_smp, acc >>> 12);
    end
    nout++;
  end

  task automatic run(input int lgn, input int frames);
    lg = lgn; n = 1 << lgn;
    log2n <= ($clog2(LMAX+1))'(lgn);
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    nout = 0;
    for (int i = 0; i < frames * n; i++) begin
      x[i] = int'($urandom_range(0, 4094)) - 2047;
      in_smp <= SMP_W'(x[i]); in_valid <= 1'b1; @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin in_valid <= 1'b0; @(posedge clk); end
    end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (nout != (frames - TAPS + 1) * n) begin failures++; $display("FAIL %0d outputs, expected %0d", nout, (frames - TAPS + 1) * n); end
  endtask

  initial begin
    for (int j = 0; j < TAPS*NMAX; j++) begin
      real u, s, w;
      u = (j - TAPS*NMAX/2.0) / NMAX;
      s = (u == 0.0) ? 1.0 : $sin(PI*u) / (PI*u);
      w = 0.54 - 0.46 * $cos(2.0*PI*j / (TAPS*NMAX));
      h[j] = longint'($floor(131071.0 * s * w + 0.5));
    end
    log2n = LMAX;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(5, 8);
    run(3, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
