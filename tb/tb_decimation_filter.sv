// tb_decimation_filter: complex decimation by 2*cic_rate. Checks the output
// rate (one output per 16 inputs at cic_rate 8), unity DC gain when
// cic_shift = 4*log2(rate), a pass-band tone kept at its level (flat within
// 3 % thanks to the compensation) and an out-of-band tone suppressed.
module tb_decimation_filter;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, out_valid;
  logic [7:0] cic_rate = 8'd8;
  logic [5:0] cic_shift = 6'd12;
  cplx16_t in = '0, out;
  int checks = 0, failures = 0;
  int ore [$], oim [$];

  decimation_filter #(.CIC_N(4), .CIC_RMAX(128), .FIR_TAPS(31)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid && rst_n) begin ore.push_back(out.re); oim.push_back(out.im); end

  task automatic feed(input int n, input real f, input real amp);
    ore.delete(); oim.delete();
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    for (int i = 0; i < n; i++) begin
      in.re <= 16'($rtoi(amp * $cos(2.0*PI*f*i)));
      in.im <= 16'($rtoi(amp * $sin(2.0*PI*f*i)));
      in_valid <= 1'b1; @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (40) @(posedge clk);
  endtask

  function automatic real amp_of(int from);
    real s;
    s = 0;
    for (int i = from; i < ore.size(); i++) s += real'(ore[i])**2 + real'(oim[i])**2;
    return $sqrt(s / (ore.size() - from));
  endfunction

  initial begin
    real a;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    feed(1600, 0.0, 5000.0);
    checks++;
    if (ore.size() != 100) begin failures++; $display("FAIL %0d outputs for 1600 inputs", ore.size()); end
    checks++;
    if (ore[60] < 4970 || ore[60] > 5030 || oim[60] > 20 || oim[60] < -20) begin failures++; $display("FAIL DC %0d %0d", ore[60], oim[60]); end
    // tone at 0.4 of the output bandwidth: 0.4 * (1/16) / 2 cycles per input sample
    feed(3200, 0.4/32.0, 5000.0);
    a = amp_of(40);
    checks++;
    if (a < 5000.0*0.97 || a > 5000.0*1.03) begin failures++; $display("FAIL passband amp %f", a); end
    // tone well outside the output band
    feed(3200, 0.1, 5000.0);
    a = amp_of(40);
    checks++;
    if (a > 100.0) begin failures++; $display("FAIL stopband amp %f", a); end
    // narrow-mode rate 96: one output per 192 inputs
    cic_rate <= 8'd96; cic_shift <= 6'd27;
    feed(192*20, 0.0, 5000.0);
    checks++;
    if (ore.size() != 20) begin failures++; $display("FAIL %0d outputs at rate 96", ore.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
