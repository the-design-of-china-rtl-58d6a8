// tb_crane_workloads: the board's three tabulated observing configurations,
// run on the top at its full default sizes, with their rates checked in
// clock cycles (the chain takes one sample per clock, so one clock stands
// for one ADC sample period).
//  A. incoherent pulsar, 2K channels (4096-point transform), acc_len 16:
//     dumps must come exactly 16 x 4096 samples apart (16.4 us at 4 GS/s)
//     and every dump must peak in the tone's channel (100) with 2048 items;
//  B. narrow spectral line, decimation 192 (CIC 96 x FIR 2; 31.25 MHz
//     complex from 6 GS/s): output items exactly 192 samples apart, a steady
//     non-zero magnitude with the LO on the tone;
//  C. baseband, decimation 16 (CIC 8 x FIR 2; 250 MHz from 4 GS/s): items
//     16 samples apart, steady magnitude, packets of mode 2.
// Both polarisations carry the same tone, Y leading X by 90 degrees.
module tb_crane_workloads;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_PULSAR;
  logic cfg_clr = 1'b0, resync = 1'b0, adc_valid = 1'b0, tx_ready = 1'b1;
  logic [31:0] lo_phase_inc = '0;
  logic [7:0] cic_rate = 8'd96;
  logic [5:0] cic_shift = 6'd27, trunc_bit_sel = 6'd26;
  logic [3:0] gain_bit_sel = 4'd7;
  logic [4:0] log2n = 5'd12;
  logic [16:0] fft_shift = '1;
  logic [15:0] acc_len = 16'd16;
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
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ADC model: tone of f0 cycles per sample ----------------
  real    f0 = 100.0 / 4096.0;
  longint n_smp = 0;
  function automatic logic [ADC_W-1:0] smp(input int pol, input longint n);
    int v;
    v = $rtoi($floor(900.0 * $cos(2.0*PI*f0*real'(n) + (pol == 1 ? PI/2 : 0.0)) + 0.5));
    return {11'(v >>> 1), 1'b0};
  endfunction

  task automatic run(input int words);
    for (int w = 0; w < words; w++) begin
      adc_x[0][0] <= smp(0, n_smp);   adc_x[0][1] <= smp(0, n_smp+2);
      adc_x[1][0] <= smp(0, n_smp+1); adc_x[1][1] <= smp(0, n_smp+3);
      adc_y[0][0] <= smp(1, n_smp);   adc_y[0][1] <= smp(1, n_smp+2);
      adc_y[1][0] <= smp(1, n_smp+1); adc_y[1][1] <= smp(1, n_smp+3);
      n_smp += 4;
      adc_valid <= 1'b1; @(posedge clk); adc_valid <= 1'b0;
      repeat (3) @(posedge clk);
    end
  endtask

  // ---------------- observers ----------------
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // A: dump spacing and per-dump peak (items in arrival order = bit-reversed)
  longint last_dump = -1;
  int dump_gap [$];
  int pA_best = -1, pA_bestv = -1, pA_dumps = 0, pA_good = 0;
  function automatic int brev12(input int x);
    int r = 0;
    for (int b = 0; b < 12; b++) if (x & (1 << b)) r |= 1 << (11 - b);
    return r;
  endfunction
  int order12 [$];

  int pA_k = 0;
  always @(posedge clk) if (rst_n && mode == MODE_PULSAR && dut.t_valid) begin
    int ch;
    if (pA_k == 0) begin
      if (last_dump >= 0) dump_gap.push_back(int'(cyc - last_dump));
      last_dump = cyc;
    end
    ch = order12[pA_k];
    if (int'(dut.t_item[7:0]) > pA_bestv) begin pA_bestv = dut.t_item[7:0]; pA_best = ch; end
    pA_k++;
    if (pA_k == 2048) begin
      check(pA_best == 100 && pA_bestv > 20, $sformatf("2K dump peaks in channel %0d (I=%0d)", pA_best, pA_bestv));
      if (pA_best == 100) pA_good++;
      pA_k = 0; pA_bestv = -1; pA_dumps++;
    end
  end

  // B/C: item spacing and magnitude at the packetiser input
  longint last_item = -1;
  int gaps [$];
  real mags [$];
  always @(posedge clk) if (rst_n && mode != MODE_PULSAR && dut.g_valid) begin
    if (last_item >= 0) gaps.push_back(int'(cyc - last_item));
    last_item = cyc;
    mags.push_back($sqrt(real'($signed(dut.g_item[7:0]))**2 + real'($signed(dut.g_item[15:8]))**2));
  end

  // packet headers
  int hdr_mode [$];
  int pos = 0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (pos == 0) begin hdr_mode.push_back(tx_data[49:48]); pos = 1; end
    else if (tx_last) pos = 0;
    else pos++;
  end

  task automatic check_ddc(input string name, input int dec, input int skip);
    real mean = 0.0;
    int n = 0, bad_gap = 0, bad_mag = 0;
    for (int i = skip; i < gaps.size(); i++) if (gaps[i] != dec) bad_gap++;
    for (int i = skip; i < mags.size(); i++) begin mean += mags[i]; n++; end
    mean = (n > 0) ? mean / n : 0.0;
    for (int i = skip; i < mags.size(); i++) if (mags[i] < 0.8 * mean || mags[i] > 1.2 * mean) bad_mag++;
    $display("%s: %0d items, spacing %0d samples, mean magnitude %f", name, mags.size(),
             gaps.size() > skip ? gaps[skip] : -1, mean);
    check(gaps.size() - skip >= 40, $sformatf("%s: only %0d items", name, gaps.size()));
    check(bad_gap == 0, $sformatf("%s: %0d items not %0d samples apart", name, bad_gap, dec));
    check(mean > 10.0 && bad_mag == 0, $sformatf("%s: magnitude %f, %0d unsteady", name, mean, bad_mag));
  endtask

  initial begin
    for (int m = 0; m < 4096; m++) if (brev12(m) < 2048) order12.push_back(brev12(m));
    for (int c = 0; c < 2; c++) for (int j = 0; j < 2; j++) begin adc_x[c][j] = '0; adc_y[c][j] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---- A: pulsar, 2K channels, acc_len 16 ----
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    run((3 + 16 * 4 + 1) * 4096 / 4);
    repeat (100) @(posedge clk);
    $display("A: %0d dumps, gaps %p", pA_dumps, dump_gap);
    check(pA_dumps >= 3 && pA_good >= 3, $sformatf("pulsar: %0d dumps, %0d good", pA_dumps, pA_good));
    check(dump_gap.size() >= 2, "pulsar: no dump spacing measured");
    foreach (dump_gap[i]) check(dump_gap[i] == 16 * 4096, $sformatf("pulsar dump gap %0d samples", dump_gap[i]));

    // ---- B: narrow line, decimation 192 ----
    mode <= MODE_NARROW;
    f0 = 0.1;
    lo_phase_inc <= 32'd429496730;        // 0.1 of the sample rate
    cic_rate <= 8'd96; cic_shift <= 6'd27;
    @(posedge clk);
    gaps.delete(); mags.delete(); last_item = -1; hdr_mode.delete();
    run(192 * 60 / 4);
    repeat (50) @(posedge clk);
    check_ddc("narrow", 192, 10);
    check(hdr_mode.size() > 0 && hdr_mode[$] == 0, "narrow: header mode");

    // ---- C: baseband, decimation 16 ----
    mode <= MODE_BASEBAND;
    cic_rate <= 8'd8; cic_shift <= 6'd12;
    @(posedge clk);
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    gaps.delete(); mags.delete(); last_item = -1; hdr_mode.delete();
    run(16 * 2200 / 4);                   // 2200 items: 1 full packet of 2048
    repeat (50) @(posedge clk);
    check_ddc("baseband", 16, 20);
    check(hdr_mode.size() > 0 && hdr_mode[$] == 2, "baseband: header mode");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
