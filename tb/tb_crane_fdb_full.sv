// tb_crane_fdb_full: one complete pulsar-mode integration of the board at
// its full default size: 2^17-point transform of real samples, 65536
// channels, 4-tap filter bank, 1024-word packets. A tone is placed in the
// middle of channel 1000 for both polarisations (Y leading by 90 deg); after
// the filter bank is primed, one spectrum is accumulated (acc_len 1) and
// sent. The test checks that exactly one dump of 65536 channels arrives as
// 32 whole packets of mode 1, that Stokes I peaks in channel 1000, that the
// neighbouring channels two away are far weaker (filter-bank leakage), and
// that V of the tone is non-zero.
module tb_crane_fdb_full;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int LG = 17, NFFT = 1 << LG, NCH = NFFT / 2, TONE = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_PULSAR;
  logic cfg_clr = 1'b0, resync = 1'b0, adc_valid = 1'b0, tx_ready = 1'b1;
  logic [31:0] lo_phase_inc = '0;
  logic [7:0] cic_rate = 8'd96;
  logic [5:0] cic_shift = 6'd27, trunc_bit_sel = 6'd22;
  logic [3:0] gain_bit_sel = 4'd7;
  logic [4:0] log2n = 5'(LG);
  logic [16:0] fft_shift = '1;
  logic [15:0] acc_len = 16'd1;
  logic [ADC_W-1:0] adc_x [2][2], adc_y [2][2];
  logic [WORD_W-1:0] tx_data;
  logic tx_valid, tx_last;
  logic [1:0] adc_locked, adc_skew_err;
  logic [31:0] ser_overflow [2];
  logic [2*SMP_W-1:0] mon_power [2];
  logic [SMP_W-1:0] mon_peak [2];
  logic [31:0] mon_clips [2], mon_ts [2], mon_windows [2];
  logic [31:0] gain_sat, trunc_sat, dump_cnt, pkt_cnt, drop_cnt, ct_overrun;
  logic [6:0] ct_shift = '1;

  crane_fdb dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stokes I and V per channel from the packets
  int stI [NCH], stV [NCH];
  int pos = 0, first = 0, npkt = 0, nbad = 0, nitems = 0;

  function automatic int brev(input int x);
    int r = 0;
    for (int b = 0; b < LG; b++) if (x & (1 << b)) r |= 1 << (LG - 1 - b);
    return r;
  endfunction
  int order [NCH];

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (pos == 0) begin
      if (tx_data[63:56] != PKT_MAGIC || tx_data[49:48] != 2'd1) nbad++;
      first = tx_data[31:0];
      pos = 1;
    end else begin
      for (int h = 0; h < 2; h++) begin
        int idx, ch;
        idx = first + 2*pos - 2 + h;
        if (idx < NCH) begin            // first dump only
          ch = order[idx];
          stI[ch] = tx_data[32*h +: 8];
          stV[ch] = $signed(tx_data[32*h + 24 +: 8]);
          nitems++;
        end
      end
      if (tx_last != (pos == 1024)) nbad++;
      if (pos == 1024) begin pos = 0; npkt++; end
      else pos++;
    end
  end

  function automatic logic [ADC_W-1:0] smp(input int pol, input longint n);
    int v;
    v = $rtoi($floor(900.0 * $cos(2.0*PI*(TONE + 0.0)*real'(n)/NFFT + (pol == 1 ? PI/2 : 0.0)) + 0.5));
    return {11'(v >>> 1), 1'b0};
  endfunction

  initial begin
    int k = 0;
    for (int m = 0; m < NFFT; m++) if (brev(m) < NCH) begin order[k] = brev(m); k++; end
    for (int c = 0; c < 2; c++) for (int j = 0; j < 2; j++) begin adc_x[c][j] = '0; adc_y[c][j] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    // 3 frames prime the filter bank, 1 is transformed, 1 flushes the FFT
    for (longint w = 0; w < 5 * NFFT / 4 + 8; w++) begin
      adc_x[0][0] <= smp(0, 4*w);   adc_x[0][1] <= smp(0, 4*w+2);
      adc_x[1][0] <= smp(0, 4*w+1); adc_x[1][1] <= smp(0, 4*w+3);
      adc_y[0][0] <= smp(1, 4*w);   adc_y[0][1] <= smp(1, 4*w+2);
      adc_y[1][0] <= smp(1, 4*w+1); adc_y[1][1] <= smp(1, 4*w+3);
      adc_valid <= 1'b1; @(posedge clk); adc_valid <= 1'b0;
      repeat (3) @(posedge clk);
    end
    repeat (40000) @(posedge clk);
    begin
      int best = 0;
      for (int c = 0; c < NCH; c++) if (stI[c] > stI[best]) best = c;
      $display("dumps=%0d packets=%0d items=%0d peak channel %0d I=%0d (ch-2: %0d, ch+2: %0d) V=%0d",
               dump_cnt, npkt, nitems, best, stI[best], stI[TONE-2], stI[TONE+2], stV[TONE]);
      check(dump_cnt == 1, "one accumulator dump");
      check(npkt >= 32 && nitems == NCH && nbad == 0 && drop_cnt == 0, "32 whole packets");
      check(best == TONE && stI[TONE] > 50, "Stokes I peaks in the tone's channel");
      check(stI[TONE-2] * 20 < stI[TONE] && stI[TONE+2] * 20 < stI[TONE], "leakage into channels two away");
      check(stV[TONE] != 0, "circular polarisation of the tone");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
