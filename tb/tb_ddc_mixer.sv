// tb_ddc_mixer: drives random samples with a random LO word and compares the
// complex output with x*exp(-j*phi) computed in floating point from the
// truncated table phase (tolerance 2 LSB). Also checks the two-clock latency
// and that phase_clr restarts the phase.
module tb_ddc_mixer;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [31:0] phase_inc = '0;
  logic phase_clr = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [SMP_W-1:0] in_smp = '0;
  cplx16_t out;
  int checks = 0, failures = 0;

  ddc_mixer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xs [$];
  longint unsigned ph [$];
  initial begin
    longint unsigned p;
    int nout;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      phase_inc <= $urandom();
      phase_clr <= 1'b1; @(posedge clk); phase_clr <= 1'b0;
      p = 0;
      for (int i = 0; i < 500; i++) begin
        int x;
        x = int'($urandom_range(0, 4094)) - 2047;
        in_smp <= SMP_W'(x); in_valid <= 1'b1;
        xs.push_back(x); ph.push_back(p);
        p = (p + phase_inc) & 64'hFFFF_FFFF;
        @(posedge clk);
        in_valid <= 1'b0;
        // latency check: out_valid exactly two clocks after the input
        @(posedge clk);
        #1;
        checks++;
        if (!out_valid) begin failures++; $display("FAIL latency"); end
        else begin
          real a, er, ei;
          int x0;
          longint unsigned p0;
          x0 = xs.pop_front(); p0 = ph.pop_front();
          a  = 2.0 * PI * real'(p0 >> 22) / 1024.0;
          er = x0 * $cos(a) * 32767.0 / 2048.0;
          ei = -x0 * $sin(a) * 32767.0 / 2048.0;
          if ((out.re - er) > 2.0 || (er - out.re) > 2.0 || (out.im - ei) > 2.0 || (ei - out.im) > 2.0) begin
            failures++; $display("FAIL x=%0d ph=%0d got %0d,%0d exp %f,%f", x0, p0, out.re, out.im, er, ei);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
