// crane_fdb: FPGA signal chain of one reconfigurable digital back-end board.
//
// One board digitises two polarisations (X, Y). Each polarisation is sampled
// by two dual-core 12-bit ADCs, clocked 90 degrees apart, whose four cores
// interleave to four times the per-core rate; a timestamp in bit D0 aligns
// the two chips. The board then runs one of four observing modes, chosen
// by `mode` at run time:
//   MODE_NARROW   (spectral line) ADC -> mixer -> CIC -> compensation FIR
//                 -> gain -> packetiser: a complex baseband (decimation
//                 2*cic_rate, e.g. 192 for 31.25 MHz at 6 GS/s) that the
//                 computing node channelises further.
//   MODE_BASEBAND ADC -> mixer -> decimation filter -> gain -> packetiser,
//                 the same hardware with another rate (e.g. 16 for 250 MHz
//                 at 4 GS/s).
//   MODE_PULSAR   ADC -> PFB (polyphase FIR + FFT of 2^log2n points, real
//                 input, first half of the bins kept) -> Stokes detection ->
//                 accumulation over acc_len spectra -> truncation to 8 bits
//                 -> packetiser.
//   MODE_BROAD    (broad spectral line, cascaded FFT) the pulsar PFB at its
//                 largest size (2^LOG2N_MAX points, 2^(LOG2N_MAX-1) coarse
//                 channels) -> corner turn over 2^CT_LOG2 spectra -> second
//                 FFT of 2^CT_LOG2 points per coarse channel -> Stokes ->
//                 accumulation -> truncation -> packetiser; 65536 x 128 =
//                 8M fine channels at the default sizes. Requires
//                 log2n = LOG2N_MAX.
// Every mode also feeds the ADC monitor. The mode chains and block names
// follow the paper's processing flow charts; the single-clock,
// one-sample-per-clock data path, the shared mixer/filter hardware of the
// two down-converting modes and all widths are this design's choices.
//
// Control: all settings are plain inputs (a control computer writes them
// over the monitoring network). A change of `mode` clears the pipelines for
// one clock by itself; after changing cic_rate or log2n pulse `cfg_clr`.
//
// Interface: adc_x[c][k] / adc_y[c][k] = chip c (0: 0 deg, 1: 90 deg), core
// k (0: a, 1: b) of polarisation X / Y, all qualified by adc_valid, which
// may be high at most one clock in four (the serialiser drains four samples
// per word). The output is a 64-bit packet stream (tx_*) for a 10 GbE MAC.
module crane_fdb
  import crane_pkg::*;
#(
  parameter int LOG2N_MAX  = 17,     // largest FFT: 2^17 points = 64K channels
  parameter int PFB_TAPS   = 4,
  parameter int FFT_W      = 18,
  parameter int CIC_N      = 4,
  parameter int CIC_RMAX   = 128,
  parameter int FIR_TAPS   = 31,
  parameter int ACC_W      = 48,
  parameter int PKT_WORDS  = 1024,
  parameter int FIFO_DEPTH = 4096,
  parameter int MON_WIN    = 65536,
  parameter int MAX_SKEW   = 16,
  parameter int CT_LOG2    = 7       // second cascade layer: 2^7 = 128 points
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration
  input  mode_e                        mode,
  input  logic                         cfg_clr,
  input  logic                         resync,
  input  logic [31:0]                  lo_phase_inc,
  input  logic [$clog2(CIC_RMAX):0]    cic_rate,
  input  logic [5:0]                   cic_shift,
  input  logic [3:0]                   gain_bit_sel,
  input  logic [$clog2(LOG2N_MAX+1)-1:0] log2n,
  input  logic [LOG2N_MAX-1:0]         fft_shift,
  input  logic [15:0]                  acc_len,
  input  logic [5:0]                   trunc_bit_sel,
  input  logic [CT_LOG2-1:0]           ct_shift,     // second-layer FFT scaling
  // ADC data
  input  logic                         adc_valid,
  input  logic [ADC_W-1:0]             adc_x [2][2],
  input  logic [ADC_W-1:0]             adc_y [2][2],
  // 10 GbE packet stream
  output logic [WORD_W-1:0]            tx_data,
  output logic                         tx_valid,
  output logic                         tx_last,
  input  logic                         tx_ready,
  // status
  output logic [1:0]                   adc_locked,
  output logic [1:0]                   adc_skew_err,
  output logic [31:0]                  ser_overflow [2],
  output logic [2*SMP_W-1:0]           mon_power [2],
  output logic [SMP_W-1:0]             mon_peak [2],
  output logic [31:0]                  mon_clips [2],
  output logic [31:0]                  mon_ts [2],
  output logic [31:0]                  mon_windows [2],
  output logic [31:0]                  gain_sat,
  output logic [31:0]                  trunc_sat,
  output logic [31:0]                  dump_cnt,
  output logic [31:0]                  pkt_cnt,
  output logic [31:0]                  drop_cnt,
  output logic [31:0]                  ct_overrun
);
  localparam int CH   = LOG2N_MAX - 1;   // coarse channel index width (real input)
  localparam int FCH  = CH + CT_LOG2;    // fine channel index width (broad mode)
  localparam int ST_W = 2 * FFT_W + 2;

  // ---------------- mode switch: one-clock pipeline clear ----------------
  mode_e mode_q;
  logic  clr;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mode_q <= MODE_NARROW;
    else        mode_q <= mode;
  assign clr = cfg_clr || (mode != mode_q);

  logic ddc_mode, pulsar_mode, broad_mode, pfb_mode;
  assign pulsar_mode = (mode == MODE_PULSAR);
  assign broad_mode  = (mode == MODE_BROAD);
  assign pfb_mode    = pulsar_mode || broad_mode;
  assign ddc_mode    = (mode == MODE_NARROW) || (mode == MODE_BASEBAND);

  // ---------------- per polarisation front end ----------------
  logic                    s_valid [2];
  logic signed [SMP_W-1:0] s_smp   [2];
  cplx16_t                 dec_out [2];
  logic                    dec_valid [2];
  logic                    fft_valid [2];
  logic signed [FFT_W-1:0] fft_re [2], fft_im [2];
  logic [LOG2N_MAX-1:0]    fft_bin [2];
  logic                    fft_last [2];
  logic                    keep, keep_last;
  logic [LOG2N_MAX-1:0]    half_n;
  logic                    f2_valid [2];
  logic signed [FFT_W-1:0] f2_re [2], f2_im [2];
  logic [CT_LOG2-1:0]      f2_bin [2];
  logic                    f2_last [2];
  logic                    ct_ovr [2];

  for (genvar p = 0; p < 2; p++) begin : g_pol
    logic                    cap_valid, cap_ts, s_ts, mix_valid, pfb_valid, pfb_first;
    logic signed [SMP_W-1:0] cap_smp [4];
    logic signed [$clog2(MAX_SKEW+1):0] skew;
    logic [ADC_W-1:0]        a1 [2], a2 [2];
    cplx16_t                 mix_out;
    logic signed [FFT_W-1:0] pfb_out;
    logic                    mon_done;
    logic [47:0]             mon_total;

    assign a1 = (p == 0) ? adc_x[0] : adc_y[0];
    assign a2 = (p == 0) ? adc_x[1] : adc_y[1];

    adc_capture #(.MAX_SKEW(MAX_SKEW)) u_cap (
      .clk, .rst_n, .in_valid(adc_valid), .adc1(a1), .adc2(a2), .resync,
      .out_valid(cap_valid), .out_smp(cap_smp), .out_ts(cap_ts),
      .locked(adc_locked[p]), .skew, .skew_err(adc_skew_err[p]));

    lane_serializer #(.LANES(4)) u_ser (
      .clk, .rst_n, .in_valid(cap_valid), .in_smp(cap_smp), .in_ts(cap_ts),
      .out_valid(s_valid[p]), .out_smp(s_smp[p]), .out_ts(s_ts),
      .overflow_cnt(ser_overflow[p]));

    adc_mon #(.WIN(MON_WIN)) u_mon (
      .clk, .rst_n, .in_valid(s_valid[p]), .in_smp(s_smp[p]), .in_ts(s_ts),
      .win_done(mon_done), .power(mon_power[p]), .peak(mon_peak[p]),
      .clip_cnt(mon_clips[p]), .ts_cnt(mon_ts[p]), .smp_total(mon_total),
      .win_total(mon_windows[p]));

    // down-converting modes
    ddc_mixer u_mix (
      .clk, .rst_n, .phase_inc(lo_phase_inc), .phase_clr(clr),
      .in_valid(s_valid[p] && ddc_mode), .in_smp(s_smp[p]),
      .out_valid(mix_valid), .out(mix_out));

    decimation_filter #(.CIC_N(CIC_N), .CIC_RMAX(CIC_RMAX), .FIR_TAPS(FIR_TAPS)) u_dec (
      .clk, .rst_n, .clr, .cic_rate, .cic_shift,
      .in_valid(mix_valid), .in(mix_out),
      .out_valid(dec_valid[p]), .out(dec_out[p]));

    // pulsar mode: polyphase filter bank
    pfb_fir #(.LOG2N_MAX(LOG2N_MAX), .TAPS(PFB_TAPS), .OUT_W(FFT_W)) u_pfb (
      .clk, .rst_n, .clr, .log2n,
      .in_valid(s_valid[p] && pfb_mode), .in_smp(s_smp[p]),
      .out_valid(pfb_valid), .out_first(pfb_first), .out_smp(pfb_out));

    fft_sdf #(.LOG2N_MAX(LOG2N_MAX), .W(FFT_W)) u_fft (
      .clk, .rst_n, .clr, .log2n, .shift_sched(fft_shift),
      .in_valid(pfb_valid), .in_re(pfb_out), .in_im('0),
      .out_valid(fft_valid[p]), .out_re(fft_re[p]), .out_im(fft_im[p]),
      .out_bin(fft_bin[p]), .out_last(fft_last[p]));

    // broad mode: second layer of the cascaded FFT
    logic                    ct_valid, ct_first;
    logic [CH-1:0]           ct_chan;
    logic signed [FFT_W-1:0] ct_re, ct_im;

    corner_turn #(.LOG2_NCH(CH), .LOG2_NSPEC(CT_LOG2), .W(FFT_W)) u_ct (
      .clk, .rst_n, .clr,
      .in_valid(keep && broad_mode), .in_chan(CH'(fft_bin[p])), .in_last(keep_last),
      .in_re(fft_re[p]), .in_im(fft_im[p]),
      .out_valid(ct_valid), .out_chan(ct_chan), .out_first(ct_first),
      .out_re(ct_re), .out_im(ct_im), .overrun(ct_ovr[p]));

    fft_sdf #(.LOG2N_MAX(CT_LOG2), .W(FFT_W)) u_fft2 (
      .clk, .rst_n, .clr, .log2n($clog2(CT_LOG2+1)'(CT_LOG2)), .shift_sched(ct_shift),
      .in_valid(ct_valid), .in_re(ct_re), .in_im(ct_im),
      .out_valid(f2_valid[p]), .out_re(f2_re[p]), .out_im(f2_im[p]),
      .out_bin(f2_bin[p]), .out_last(f2_last[p]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         ct_overrun <= '0;
    else if (ct_ovr[0]) ct_overrun <= ct_overrun + 1;

  // ---------------- down-converting modes: gain ----------------
  logic              g_valid;
  logic [ITEM_W-1:0] g_item;

  gain u_gain (
    .clk, .rst_n, .bit_sel(gain_bit_sel),
    .in_valid(dec_valid[0]), .in_x(dec_out[0]), .in_y(dec_out[1]),
    .out_valid(g_valid), .out_item(g_item), .sat_cnt(gain_sat));

  // ---------------- pulsar mode: Stokes, accumulate, truncate ----------------
  logic                    st_valid, st_last, ac_valid, ac_last, t_valid;
  logic [FCH-1:0]          st_chan, ac_chan;
  logic signed [ST_W-1:0]  st_s [4];
  logic signed [ACC_W-1:0] ac_s [4];
  logic [ITEM_W-1:0]       t_item;

  // real input: keep bins 0 .. N/2-1
  assign half_n    = LOG2N_MAX'(1 << (log2n - 1'b1));
  assign keep      = fft_valid[0] && (fft_bin[0] < half_n);
  assign keep_last = keep && (fft_bin[0] == half_n - 1'b1);

  // broad mode: the second-layer FFT frames leave in coarse channel order
  // 0, 1, ...; fine channel = coarse * 2^CT_LOG2 + sub-bin, with the sub-bins
  // rotated (FFT shift) so that they run from the lowest to the highest
  // frequency inside the coarse channel.
  logic [CH-1:0]  f2_coarse;
  logic           s_in_valid, s_in_last;
  logic [FCH-1:0] s_in_chan;
  logic signed [FFT_W-1:0] sx_re, sx_im, sy_re, sy_im;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                        f2_coarse <= '0;
    else if (clr)                      f2_coarse <= '0;
    else if (f2_valid[0] && f2_last[0]) f2_coarse <= f2_coarse + 1'b1;

  always_comb begin
    if (broad_mode) begin
      s_in_valid = f2_valid[0];
      s_in_chan  = {f2_coarse, f2_bin[0] ^ CT_LOG2'(1 << (CT_LOG2 - 1))};
      s_in_last  = f2_valid[0] && f2_last[0] && (f2_coarse == '1);
      sx_re = f2_re[0]; sx_im = f2_im[0]; sy_re = f2_re[1]; sy_im = f2_im[1];
    end else begin
      s_in_valid = keep;
      s_in_chan  = FCH'(fft_bin[0][CH-1:0]);
      s_in_last  = keep_last;
      sx_re = fft_re[0]; sx_im = fft_im[0]; sy_re = fft_re[1]; sy_im = fft_im[1];
    end
  end

  stokes #(.W(FFT_W), .CH(FCH)) u_stokes (
    .clk, .rst_n, .in_valid(s_in_valid), .in_chan(s_in_chan), .in_last(s_in_last),
    .x_re(sx_re), .x_im(sx_im), .y_re(sy_re), .y_im(sy_im),
    .out_valid(st_valid), .out_chan(st_chan), .out_last(st_last), .out_s(st_s));

  vacc #(.IN_W(ST_W), .ACC_W(ACC_W), .CH(FCH), .LENW(16)) u_vacc (
    .clk, .rst_n, .clr, .acc_len,
    .in_valid(st_valid), .in_chan(st_chan), .in_last(st_last), .in_s(st_s),
    .out_valid(ac_valid), .out_chan(ac_chan), .out_last(ac_last), .out_s(ac_s),
    .dump_cnt);

  trunc #(.ACC_W(ACC_W)) u_trunc (
    .clk, .rst_n, .bit_sel(trunc_bit_sel), .in_valid(ac_valid), .in_stokes(ac_s),
    .out_valid(t_valid), .out_item(t_item), .sat_cnt(trunc_sat));

  // ---------------- packetiser ----------------
  packetizer #(.PKT_WORDS(PKT_WORDS), .FIFO_DEPTH(FIFO_DEPTH)) u_pkt (
    .clk, .rst_n, .clr, .mode,
    .in_valid(pfb_mode ? t_valid : (g_valid && ddc_mode)),
    .in_item(pfb_mode ? t_item : g_item),
    .tx_data, .tx_valid, .tx_last, .tx_ready, .drop_cnt, .pkt_cnt);

  // the two polarisations run in lock step
  a_pol_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    fft_valid[0] == fft_valid[1] && dec_valid[0] == dec_valid[1] &&
    f2_valid[0] == f2_valid[1]);
endmodule
