// tb_adc_mon: feeds random samples (some at full scale, some timestamps)
// through adc_mon with a 16-sample window and compares power, peak, clip and
// timestamp counts of each window with values computed here.
module tb_adc_mon;
  import crane_pkg::*;
  localparam int WIN = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ts = 1'b0;
  logic signed [SMP_W-1:0] in_smp = '0;
  logic win_done;
  logic [2*SMP_W-1:0] power;
  logic [SMP_W-1:0] peak;
  logic [31:0] clip_cnt, ts_cnt, win_total;
  logic [47:0] smp_total;
  int checks = 0, failures = 0;

  adc_mon #(.WIN(WIN)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sumsq; int pk, clips, tss, x, nsmp;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    nsmp = 0;
    for (int w = 0; w < 20; w++) begin
      sumsq = 0; pk = 0; clips = 0; tss = 0;
      for (int i = 0; i < WIN; i++) begin
        case ($urandom_range(0, 9))
          0: x = 2046;                                   // positive full scale (D0 is the timestamp)
          1: x = -2048;                                  // negative full scale
          default: x = (int'($urandom_range(0, 4000)) - 2000) & ~1;
        endcase
        in_smp <= SMP_W'(x); in_ts <= ($urandom_range(0, 7) == 0); in_valid <= 1'b1;
        @(posedge clk);
        sumsq += longint'(x) * x;
        if ((x < 0 ? -x : x) > pk) pk = (x < 0 ? -x : x);
        if (x >= 2046 || x == -2048) clips++;
        if (in_ts) tss++;
        nsmp++;
        // random gaps
        if ($urandom_range(0, 3) == 0) begin in_valid <= 1'b0; @(posedge clk); end
      end
      in_valid <= 1'b0;
      @(posedge clk);
      #1;
      checks += 5;
      if (power != 24'(sumsq / WIN)) begin failures++; $display("FAIL power %0d exp %0d", power, sumsq / WIN); end
      if (peak != 12'(pk)) begin failures++; $display("FAIL peak %0d exp %0d", peak, pk); end
      if (clip_cnt != 32'(clips)) begin failures++; $display("FAIL clips %0d exp %0d", clip_cnt, clips); end
      if (ts_cnt != 32'(tss)) begin failures++; $display("FAIL ts %0d exp %0d", ts_cnt, tss); end
      if (win_total != 32'(w + 1) || smp_total != 48'(nsmp)) begin failures++; $display("FAIL totals"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
