// pfb_fir: front end (polyphase FIR) of the polyphase filter bank.
//
// The paper suppresses FFT leakage and scalloping with a polyphase filter
// bank in front of the FFT and lets the pulsar mode choose 2K..64K output
// channels; the prototype filter, tap count and widths are not given. This
// design is the standard weighted-overlap-add PFB front end: for an N-point
// transform it keeps the last TAPS frames of N samples and outputs
//     y_m[k] = sum_{t=0}^{TAPS-1} h[t*N + k] * x[(m-TAPS+1+t)*N + k]
// so the newest frame meets the last segment of the prototype. The
// prototype h (length TAPS*NMAX) is a Hamming-windowed sinc with one
// channel width cut-off, computed at elaboration into a Q1.17 ROM. For a
// smaller run-time size N = 2^log2n the prototype is read with stride
// NMAX/N, which gives the same filter shape scaled to N channels.
// TAPS-1 frame memories of NMAX words hold the history; a frame counter
// suppresses output until TAPS-1 frames are stored. Change log2n only
// together with `clr`.
//
// Timing: out_valid one clock after each in_valid once primed; out_first
// marks sample k = 0 of each output frame. Output = (sum) >>> 12, 18 bits.
module pfb_fir
  import crane_pkg::*;
#(
  parameter int LOG2N_MAX = 17,
  parameter int TAPS      = 4,
  parameter int OUT_W     = 18
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic [$clog2(LOG2N_MAX+1)-1:0] log2n,
  input  logic                        in_valid,
  input  logic signed [SMP_W-1:0]     in_smp,
  output logic                        out_valid,
  output logic                        out_first,
  output logic signed [OUT_W-1:0]     out_smp
);
  localparam int  NMAX = 1 << LOG2N_MAX;
  localparam int  CW   = 18;
  localparam real PI   = 3.14159265358979323846;
  localparam int  PW   = SMP_W + CW + $clog2(TAPS);

  // prototype filter ROM
  logic signed [CW-1:0] coef [TAPS*NMAX];
  initial begin
    real u, w, s;
    for (int j = 0; j < TAPS*NMAX; j++) begin
      u = (j - TAPS*NMAX/2.0) / NMAX;
      s = (u == 0.0) ? 1.0 : $sin(PI*u) / (PI*u);
      w = 0.54 - 0.46 * $cos(2.0*PI*j / (TAPS*NMAX));
      coef[j] = CW'($rtoi($floor(131071.0 * s * w + 0.5)));
    end
  end

  // frame history: hist[t] holds frame (m-TAPS+1+t) for t = 0..TAPS-2
  logic signed [SMP_W-1:0] hist [TAPS-1][NMAX];

  logic [LOG2N_MAX-1:0]        k;
  logic [$clog2(TAPS):0]       frames;
  logic [LOG2N_MAX-1:0]        kmask;
  logic [$clog2(LOG2N_MAX+1)-1:0] stride_sh;
  logic signed [PW-1:0]        acc;
  logic signed [SMP_W-1:0]     rd [TAPS-1];

  assign kmask     = LOG2N_MAX'((1 << log2n) - 1);
  assign stride_sh = ($clog2(LOG2N_MAX+1))'(LOG2N_MAX) - log2n;

  always_comb begin
    logic [$clog2(TAPS*NMAX)-1:0] ci;
    for (int t = 0; t < TAPS-1; t++) rd[t] = hist[t][k];
    acc = '0;
    for (int t = 0; t < TAPS; t++) begin
      // h_N[t*N + k] = h[(t*N + k) * NMAX/N] = h[t*NMAX + (k << stride_sh)]
      ci  = ($clog2(TAPS*NMAX))'(t * NMAX) + ($clog2(TAPS*NMAX))'(k << stride_sh);
      if (t == TAPS-1) acc += PW'(coef[ci] * in_smp);
      else             acc += PW'(coef[ci] * rd[t]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      // shift the frame history: oldest frame drops out
      for (int t = 0; t < TAPS-2; t++) hist[t][k] <= rd[t+1];
      hist[TAPS-2][k] <= in_smp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; frames <= '0; out_valid <= 1'b0; out_first <= 1'b0; out_smp <= '0;
    end else if (clr) begin
      k <= '0; frames <= '0; out_valid <= 1'b0; out_first <= 1'b0;
    end else begin
      out_valid <= in_valid && (frames >= ($clog2(TAPS)+1)'(TAPS-1));
      out_first <= in_valid && (frames >= ($clog2(TAPS)+1)'(TAPS-1)) && (k == '0);
      if (in_valid) begin
        out_smp <= OUT_W'(acc >>> 12);
        if (k == kmask) begin
          k <= '0;
          if (frames < ($clog2(TAPS)+1)'(TAPS-1)) frames <= frames + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end
endmodule
