// tb_adc_capture: checks timestamp alignment and sample ordering of
// adc_capture. The stimulus is two chips sampling one signal; sample 4j+k of
// the signal carries the code {j, k} so that every output word can be
// checked for four lanes from the same instant in the order 0,90,180,270
// degrees. Chip 2 (or chip 1) is delayed by a known number of words; the
// measured skew and the alignment are checked, then a skew beyond MAX_SKEW
// must raise skew_err.
module tb_adc_capture;
  import crane_pkg::*;
  localparam int MAX_SKEW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, resync = 1'b0;
  logic [ADC_W-1:0] adc1 [2], adc2 [2];
  logic out_valid, out_ts, locked, skew_err;
  logic signed [SMP_W-1:0] out_smp [4];
  logic signed [$clog2(MAX_SKEW+1):0] skew;
  int checks = 0, failures = 0;

  adc_capture #(.MAX_SKEW(MAX_SKEW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADC_W-1:0] word(input int j, input int k, input int ts_at);
    logic ts;
    ts = (j >= ts_at) && (j < ts_at + 4);
    return {9'(j), 2'(k), (k < 2) ? ts : 1'b0};   // timestamp on core a of each chip
  endfunction

  // run one alignment with chip-1 delay d1 and chip-2 delay d2 (words)
  task automatic run(input int d1, input int d2, input bit expect_err);
    int nerr = 0;
    int good = 0;
    logic seen_err = 1'b0;
    resync <= 1'b1; @(posedge clk); resync <= 1'b0;
    for (int w = 0; w < 200; w++) begin
      adc1[0] <= word(w - d1, 0, 30); adc1[1] <= word(w - d1, 2, 30);
      adc2[0] <= word(w - d2, 1, 30); adc2[1] <= word(w - d2, 3, 30);
      in_valid <= 1'b1;
      @(posedge clk);
      if (skew_err) seen_err = 1'b1;
      if (out_valid && locked && w > 30 + MAX_SKEW + 4) begin
        // all four lanes from one instant, in phase order
        logic [8:0] j0;
        j0 = out_smp[0][11:3];
        for (int k = 0; k < 4; k++)
          if (out_smp[k][11:1] != {j0, 2'(k)} || out_smp[k][0] != 1'b0) nerr++;
        good++;
      end
    end
    in_valid <= 1'b0;
    checks++;
    if (expect_err) begin
      if (!seen_err || locked) begin failures++; $display("FAIL: skew_err not raised (d1=%0d d2=%0d)", d1, d2); end
    end else begin
      if (nerr != 0 || good < 100) begin failures++; $display("FAIL: misaligned words %0d good %0d (d1=%0d d2=%0d)", nerr, good, d1, d2); end
      checks++;
      if (skew != ($clog2(MAX_SKEW+1)+1)'(d2 - d1)) begin failures++; $display("FAIL: skew %0d expected %0d", skew, d2 - d1); end
    end
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin adc1[k] = '0; adc2[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run(0, 5, 1'b0);    // chip 2 late by 5 words
    run(3, 0, 1'b0);    // chip 1 late by 3 words
    run(0, 0, 1'b0);    // aligned
    run(0, 8, 1'b0);    // at the limit
    run(12, 0, 1'b1);   // beyond MAX_SKEW
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
