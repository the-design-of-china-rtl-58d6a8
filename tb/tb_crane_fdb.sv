// tb_crane_fdb: end-to-end test of the back-end board at reduced sizes
// (64-point FFT, 8-word packets, 64-word FIFO, CIC rates up to 16).
//
// Two polarisations of a tone (0.078 cycles/sample; Y leads X by 90 deg)
// are sampled by modelled ADC chip pairs: word w carries samples 4w..4w+3
// as chip 1 core a, chip 2 core a, chip 1 core b, chip 2 core b, with
// inter-chip skews of 3 (X) and -2 (Y) words and a timestamp pulse in D0.
// Phases:
//  1. pulsar mode, 64-point transform (32 channels), acc_len 2: every dump
//     must peak in the tone's channel (5), with V of the sign given by the
//     90-degree lead, and packets must carry mode 1 and whole dumps;
//  2. run-time size change to 32 points (16 channels): peak moves to
//     channel 2 (tone at 0.078*32 = 2.5 -> channel 2 or 3);
//  2b. broad mode (cascaded FFT, 8-point second layer, 256 fine channels),
//     tone moved to 5.25/64: each dump must peak in fine channel 5*8+4+2
//     = 46 (coarse channel 5, sub-bin +2 of -4..3), with no corner-turn
//     overrun and header mode 3;
//  3. narrow mode (mode switch), LO on the tone: complex output at DC with
//     steady magnitude in both polarisations;
//  4. baseband mode with the transmitter stalled: whole packets dropped and
//     the drop visible in the next header's item index;
//  5. an ADC word arriving too early: serialiser overflow counted.
// Each mechanism is counted and must have happened at least once.
module tb_crane_fdb;
  import crane_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int LMAX = 6, PKT = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_PULSAR;
  logic cfg_clr = 1'b0, resync = 1'b0, adc_valid = 1'b0, tx_ready = 1'b1;
  logic [31:0] lo_phase_inc = '0;
  logic [4:0] cic_rate = 5'd8;
  logic [5:0] cic_shift = 6'd12, trunc_bit_sel = 6'd24;
  logic [3:0] gain_bit_sel = 4'd7;
  logic [$clog2(LMAX+1)-1:0] log2n = 3'(LMAX);
  logic [LMAX-1:0] fft_shift = '1;
  logic [15:0] acc_len = 16'd2;
  logic [ADC_W-1:0] adc_x [2][2], adc_y [2][2];
  logic [WORD_W-1:0] tx_data;
  logic tx_valid, tx_last;
  logic [1:0] adc_locked, adc_skew_err;
  logic [31:0] ser_overflow [2];
  logic [2*SMP_W-1:0] mon_power [2];
  logic [SMP_W-1:0] mon_peak [2];
  logic [31:0] mon_clips [2], mon_ts [2], mon_windows [2];
  logic [31:0] gain_sat, trunc_sat, dump_cnt, pkt_cnt, drop_cnt, ct_overrun;
  logic [2:0] ct_shift = 3'b111;

  crane_fdb #(.LOG2N_MAX(LMAX), .PKT_WORDS(PKT), .FIFO_DEPTH(64), .MON_WIN(64),
              .CIC_RMAX(16), .MAX_SKEW(8), .CT_LOG2(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ADC model ----------------
  int  t_word = 0;
  real f0 = 5.0 / 64.0;
  localparam int SKX = 3, SKY = -2;   // chip-2 delay relative to chip 1, words

  function automatic logic [ADC_W-1:0] smp(input int pol, input int n, input int core);
    int v; logic ts;
    if (n < 0) return '0;
    v = $rtoi($floor(900.0 * $cos(2.0*PI*f0*n + (pol == 1 ? PI/2 : 0.0)) + 0.5));
    ts = (core == 0) && (n / 4 >= 40) && (n / 4 < 44);
    return {11'(v >>> 1), ts};
  endfunction

  task automatic adc_word();
    int w1x, w2x, w1y, w2y;
    w1x = t_word;           w2x = t_word - SKX;
    w1y = t_word + SKY;     w2y = t_word;
    adc_x[0][0] <= smp(0, 4*w1x,   0); adc_x[0][1] <= smp(0, 4*w1x+2, 1);
    adc_x[1][0] <= smp(0, 4*w2x+1, 0); adc_x[1][1] <= smp(0, 4*w2x+3, 1);
    adc_y[0][0] <= smp(1, 4*w1y,   0); adc_y[0][1] <= smp(1, 4*w1y+2, 1);
    adc_y[1][0] <= smp(1, 4*w2y+1, 0); adc_y[1][1] <= smp(1, 4*w2y+3, 1);
    adc_valid <= 1'b1;
    @(posedge clk);
    adc_valid <= 1'b0;
    repeat (3) @(posedge clk);
    t_word++;
  endtask

  // ---------------- packet receiver ----------------
  int pos = 0, hdr_mode = 0, first = 0, expect_first = 0;
  int n_hdr = 0, n_gap = 0, n_bad_hdr = 0;
  logic [31:0] items [$];
  int item_idx [$];

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (pos == 0) begin
      n_hdr++;
      if (tx_data[63:56] != PKT_MAGIC || tx_last) n_bad_hdr++;
      hdr_mode = tx_data[49:48];
      first = tx_data[31:0];
      if (first != expect_first) n_gap++;
      pos = 1;
    end else if (tx_last && tx_data == '0 && pos != PKT) begin
      pos = 0;                    // packet cut by a mode switch
    end else begin
      items.push_back(tx_data[31:0]);  item_idx.push_back(first + 2*pos - 2);
      items.push_back(tx_data[63:32]); item_idx.push_back(first + 2*pos - 1);
      if (tx_last != (pos == PKT)) n_bad_hdr++;
      if (pos == PKT) begin pos = 0; expect_first = first + 2*PKT; end
      else pos++;
    end
  end

  // ---------------- mechanism counters ----------------
  int m_align = 0, m_dump = 0, m_pulsar = 0, m_resize = 0, m_switch = 0, m_narrow = 0,
      m_baseband = 0, m_drop = 0, m_overflow = 0, m_mon = 0, m_broad = 0;

  function automatic int brev(input int x, input int n);
    int r = 0;
    for (int b = 0; b < n; b++) if (x & (1 << b)) r |= 1 << (n - 1 - b);
    return r;
  endfunction

  // check pulsar dumps held in items[]: returns the number of good dumps
  task automatic check_pulsar(input int lg, input int exp_ch_lo, input int exp_ch_hi, input int skip);
    int nch, order [$], ndump, good;
    nch = 1 << (lg - 1);
    for (int m = 0; m < (1 << lg); m++) if (brev(m, lg) < nch) order.push_back(brev(m, lg));
    ndump = items.size() / nch;
    good = 0;
    for (int d = skip; d < ndump; d++) begin
      int best = -1, bestv = -1, vsum = 0;
      for (int i = 0; i < nch; i++) begin
        logic [31:0] it;
        int ch;
        it = items[d*nch + i];
        ch = order[item_idx[d*nch + i] % nch];
        if (int'(it[7:0]) > bestv) begin bestv = it[7:0]; best = ch; end
        if (ch == best) vsum = $signed(it[31:24]);
      end
      check(best >= exp_ch_lo && best <= exp_ch_hi && bestv > 10, $sformatf("dump %0d peaks in channel %0d (I=%0d)", d, best, bestv));
      check(vsum != 0, $sformatf("dump %0d: V of the tone is zero", d));
      if (best >= exp_ch_lo && best <= exp_ch_hi) good++;
    end
    check(ndump - skip >= 3, $sformatf("only %0d pulsar dumps", ndump - skip));
    m_pulsar += good;
  endtask

  // broad-mode dumps: 32 coarse x 8 fine channels, coarse channels in
  // order, sub-bins bit-reversed and rotated by half
  task automatic check_broad(input int exp_ch, input int skip);
    int nch, order [$], ndump, good;
    nch = 256;
    for (int j = 0; j < nch; j++) order.push_back((j / 8) * 8 + (brev(j % 8, 3) ^ 4));
    ndump = items.size() / nch;
    good = 0;
    for (int d = skip; d < ndump; d++) begin
      int best = -1, bestv = -1, vsum = 0;
      for (int i = 0; i < nch; i++) begin
        logic [31:0] it;
        int ch;
        it = items[d*nch + i];
        ch = order[item_idx[d*nch + i] % nch];
        if (int'(it[7:0]) > bestv) begin bestv = it[7:0]; best = ch; vsum = $signed(it[31:24]); end
      end
      check(best == exp_ch && bestv > 10, $sformatf("broad dump %0d peaks in fine channel %0d (I=%0d)", d, best, bestv));
      check(vsum != 0, $sformatf("broad dump %0d: V of the tone is zero", d));
      if (best == exp_ch) good++;
    end
    check(ndump - skip >= 2, $sformatf("only %0d broad dumps", ndump - skip));
    m_broad += good;
  endtask

  task automatic check_ddc(input int exp_mode, input int skip, output int nitems);
    int good = 0;
    nitems = items.size();
    for (int i = skip; i < items.size(); i++) begin
      real mx, my;
      mx = $sqrt(real'($signed(items[i][7:0]))**2  + real'($signed(items[i][15:8]))**2);
      my = $sqrt(real'($signed(items[i][23:16]))**2 + real'($signed(items[i][31:24]))**2);
      check(mx > 40.0 && mx < 80.0 && my > 40.0 && my < 80.0,
            $sformatf("mode %0d item %0d magnitude %f / %f", exp_mode, i, mx, my));
      good++;
    end
    check(hdr_mode == exp_mode, $sformatf("header mode %0d, expected %0d", hdr_mode, exp_mode));
    if (exp_mode == 0) m_narrow += good; else m_baseband += good;
  endtask

  initial begin
    int n;
    for (int c = 0; c < 2; c++) for (int k = 0; k < 2; k++) begin adc_x[c][k] = '0; adc_y[c][k] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---- phase 1: pulsar mode, 64 points, alignment first ----
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    repeat (60) adc_word();
    check(adc_locked == 2'b11, "ADCs not locked on the timestamp");
    check(int'(dut.g_pol[0].skew) == SKX && int'(dut.g_pol[1].skew) == SKY, "measured skews");
    if (adc_locked == 2'b11) m_align++;
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    items.delete(); item_idx.delete(); expect_first = 0;
    repeat (16 * 24) adc_word();          // 24 frames of 64 samples
    repeat (50) @(posedge clk);
    m_dump = dump_cnt;
    check(hdr_mode == 1, "pulsar header mode");
    check_pulsar(6, 5, 5, 1);

    // ---- phase 2: run-time FFT size 32 points ----
    log2n <= 3'd5; fft_shift <= 6'b111110;
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    items.delete(); item_idx.delete(); expect_first = 0;
    repeat (8 * 24) adc_word();
    repeat (50) @(posedge clk);
    check_pulsar(5, 2, 3, 1);
    m_resize++;

    // ---- phase 2b: broad mode, cascaded FFT ----
    mode <= MODE_BROAD; m_switch++;
    log2n <= 3'(LMAX); fft_shift <= '1; acc_len <= 16'd1; trunc_bit_sel <= 6'd23;
    f0 = 5.25 / 64.0;
    @(posedge clk);
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    items.delete(); item_idx.delete(); expect_first = 0;
    repeat (16 * 48) adc_word();          // 48 frames = 6 corner-turn buffers
    repeat (50) @(posedge clk);
    check(hdr_mode == 3, "broad header mode");
    check(ct_overrun == 0, "corner-turn overrun");
    check_broad(46, 0);
    f0 = 5.0 / 64.0; acc_len <= 16'd2; trunc_bit_sel <= 6'd24;

    // ---- phase 3: narrow mode (mode switch), LO on the tone ----
    mode <= MODE_NARROW; m_switch++;
    lo_phase_inc <= 32'd335544320;        // 5/64 of the sample rate
    cic_rate <= 5'd8; cic_shift <= 6'd12; gain_bit_sel <= 4'd7;
    @(posedge clk);
    items.delete(); item_idx.delete(); expect_first = 0;
    repeat (4 * 16 * 40) adc_word();      // 160 outputs at decimation 16
    repeat (50) @(posedge clk);
    check_ddc(0, 20, n);
    check(n >= 150, $sformatf("narrow mode gave %0d items", n));

    // ---- phase 4: baseband mode, transmitter stalled ----
    mode <= MODE_BASEBAND; m_switch++;
    cic_rate <= 5'd4; cic_shift <= 6'd8; gain_bit_sel <= 4'd7;
    @(posedge clk);
    cfg_clr <= 1'b1; @(posedge clk); cfg_clr <= 1'b0;
    items.delete(); item_idx.delete(); expect_first = 0;
    tx_ready <= 1'b0;
    repeat (4 * 8 * 60) adc_word();       // 240 items, FIFO holds 7 packets of 9 words
    m_drop = drop_cnt;
    check(drop_cnt > 0, "no packet dropped while stalled");
    tx_ready <= 1'b1;
    repeat (4 * 8 * 40) adc_word();
    repeat (100) @(posedge clk);
    check(n_gap > 0, "drop not visible in the item index");
    check_ddc(2, 20, n);
    check(n_bad_hdr == 0, "malformed packets");

    // ---- phase 5: ADC word too early for the serialiser ----
    adc_valid <= 1'b1; @(posedge clk); @(posedge clk); adc_valid <= 1'b0;
    repeat (10) @(posedge clk);
    m_overflow = ser_overflow[0] + ser_overflow[1];
    m_mon = mon_windows[0];
    check(mon_peak[0] >= 12'd880 && mon_peak[0] <= 12'd910 && mon_peak[1] >= 12'd880 && mon_peak[1] <= 12'd910, "monitor peak of the 900-code tone");

    $display("mechanisms: align=%0d dumps=%0d pulsar_ok=%0d resize=%0d switch=%0d narrow=%0d baseband=%0d drops=%0d overflow=%0d monitor=%0d broad=%0d",
             m_align, m_dump, m_pulsar, m_resize, m_switch, m_narrow, m_baseband, m_drop, m_overflow, m_mon, m_broad);
    check(m_align > 0, "alignment never happened");
    check(m_dump > 0, "no accumulator dump");
    check(m_pulsar > 0, "no good pulsar dump");
    check(m_resize > 0, "no size change");
    check(m_switch > 0, "no mode switch");
    check(m_narrow > 0, "no narrow output");
    check(m_baseband > 0, "no baseband output");
    check(m_drop > 0, "no packet drop");
    check(m_overflow > 0, "no serialiser overflow");
    check(m_mon > 0, "no monitor window");
    check(m_broad > 0, "no good broad-mode dump");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
