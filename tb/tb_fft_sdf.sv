// tb_fft_sdf: random complex frames through a 64-point-maximum FFT. Each
// output bin is compared with a DFT computed here in floating point and
// scaled by the shift schedule (tolerance 4 LSB); the run-time size is
// changed to 16 points (first two stages bypassed) and checked the same way,
// and out_bin / out_last are checked against the bit-reversed order.
module tb_fft_sdf;
  localparam real PI = 3.14159265358979323846;
  localparam int LMAX = 6, W = 18;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, out_valid, out_last;
  logic [$clog2(LMAX+1)-1:0] log2n;
  logic [LMAX-1:0] shift_sched;
  logic signed [W-1:0] in_re = '0, in_im = '0, out_re, out_im;
  logic [LMAX-1:0] out_bin;
  int checks = 0, failures = 0;

  fft_sdf #(.LOG2N_MAX(LMAX), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr [8][64], xi [8][64];
  int  nframe_out, nbin_out, nbad, frames_in;
  int  n, lg, nscale;

  always @(posedge clk) if (out_valid && rst_n) begin
    real er, ei, sc;
    int f, k, m;
    f = nframe_out; m = nbin_out;
    k = 0;
    for (int b = 0; b < lg; b++) if (m & (1 << b)) k |= 1 << (lg - 1 - b);
    er = 0; ei = 0;
    for (int t = 0; t < n; t++) begin
      er += xr[f][t] * $cos(2*PI*k*t/n) + xi[f][t] * $sin(2*PI*k*t/n);
      ei += xi[f][t] * $cos(2*PI*k*t/n) - xr[f][t] * $sin(2*PI*k*t/n);
    end
    sc = 2.0 ** nscale;
    er /= sc; ei /= sc;
    checks++;
    if (int'(out_bin) != k || out_last != (m == n - 1) ||
        (out_re - er) > 4.0 || (er - out_re) > 4.0 || (out_im - ei) > 4.0 || (ei - out_im) > 4.0) begin
      failures++;
      if (nbad < 10) $display("FAIL n=%0d frame %0d bin %0d (got bin %0d): %0d,%0d exp %f,%f", n, f, k, out_bin, out_re, out_im, er, ei);
      nbad++;
    end
    if (m == n - 1) begin nbin_out = 0; nframe_out++; end
    else nbin_out++;
  end

  task automatic run(input int lgn, input logic [LMAX-1:0] sched, input int nfr);
    lg = lgn; n = 1 << lgn;
    nscale = 0;
    for (int s = LMAX - lgn; s < LMAX; s++) if (sched[s]) nscale++;
    log2n <= ($clog2(LMAX+1))'(lgn); shift_sched <= sched;
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    nframe_out = 0; nbin_out = 0;
    for (int f = 0; f < nfr; f++)
      for (int t = 0; t < n; t++) begin
        xr[f][t] = $urandom_range(0, 60000) - 30000.0;
        xi[f][t] = $urandom_range(0, 60000) - 30000.0;
      end
    // frames nfr-1 is only flushing data
    for (int f = 0; f < nfr; f++)
      for (int t = 0; t < n; t++) begin
        in_re <= W'($rtoi(xr[f][t])); in_im <= W'($rtoi(xi[f][t])); in_valid <= 1'b1;
        @(posedge clk);
        if ($urandom_range(0, 4) == 0) begin in_valid <= 1'b0; @(posedge clk); end
      end
    in_valid <= 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (nframe_out != nfr - 1) begin failures++; $display("FAIL %0d frames out, expected %0d", nframe_out, nfr - 1); end
  endtask

  initial begin
    log2n = LMAX; shift_sched = '1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(6, 6'b111111, 4);   // 64 points, halve every stage
    run(4, 6'b111100, 5);   // 16 points: stages 0,1 bypassed
    run(5, 6'b101010, 4);   // 32 points, partial schedule
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
