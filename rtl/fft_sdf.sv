// fft_sdf: streaming radix-2 FFT with a run-time size, one sample per clock.
//
// The FFT after the polyphase front end. The paper gives the channel counts
// (2K..64K selectable in the pulsar mode) but not the FFT architecture. This
// design chains LOG2N_MAX single-path delay-feedback stages (fft_stage),
// decimation in frequency, with delays NMAX/2, NMAX/4, ..., 1. Stage s of an
// NMAX-point DIF FFT is the same operation as the first stage of an
// NMAX/2^s-point one, so a 2^log2n-point transform is obtained by disabling
// the first LOG2N_MAX-log2n stages, which then pass samples through. One
// twiddle table exp(-j*2*pi*i/NMAX), i < NMAX/2, in Q1.17, serves all
// stages (each stage reads it with its own stride). `shift_sched` bit s
// halves the outputs of stage s (a run-time scaling schedule). Change
// log2n only together with `clr`.
//
// Output: bins leave in bit-reversed order; out_bin gives the natural bin
// number of each output, out_last marks the last output of a frame. The
// input must be a continuous stream of frames; a frame leaves after the
// next one has entered (latency N-1 valid samples plus one clock per stage).
module fft_sdf
  import crane_pkg::*;
#(
  parameter int LOG2N_MAX = 17,
  parameter int W         = 18
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic [$clog2(LOG2N_MAX+1)-1:0] log2n,
  input  logic [LOG2N_MAX-1:0]          shift_sched,
  input  logic                          in_valid,
  input  logic signed [W-1:0]           in_re,
  input  logic signed [W-1:0]           in_im,
  output logic                          out_valid,
  output logic signed [W-1:0]           out_re,
  output logic signed [W-1:0]           out_im,
  output logic [LOG2N_MAX-1:0]          out_bin,
  output logic                          out_last
);
  localparam int  L    = LOG2N_MAX;
  localparam int  NT   = 1 << (L - 1);
  localparam real PI   = 3.14159265358979323846;

  logic signed [17:0] tw_c [NT];
  logic signed [17:0] tw_s [NT];
  initial begin
    for (int i = 0; i < NT; i++) begin
      tw_c[i] = 18'($rtoi($floor(131071.0 * $cos(2.0*PI*i / (2.0*NT)) + 0.5)));
      tw_s[i] = 18'($rtoi($floor(131071.0 * $sin(2.0*PI*i / (2.0*NT)) + 0.5)));
    end
  end

  logic                v  [L+1];
  logic signed [W-1:0] re [L+1];
  logic signed [W-1:0] im [L+1];
  logic [L-2:0]        ti [L];

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < L; s++) begin : g_stage
    logic en;
    assign en = (s >= (L - int'(log2n)));
    fft_stage #(.W(W), .LOG2D(L-1-s), .LOG2N_MAX(L)) u_stage (
      .clk, .rst_n, .clr, .en, .scale(shift_sched[s]),
      .in_valid(v[s]), .in_re(re[s]), .in_im(im[s]),
      .out_valid(v[s+1]), .out_re(re[s+1]), .out_im(im[s+1]),
      .tw_idx(ti[s]), .tw_cos(tw_c[ti[s]]), .tw_sin(tw_s[ti[s]]));
  end

  // output position counter and bit reversal
  logic [L-1:0] m, nmask;
  assign nmask = L'((1 << log2n) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0;
    end else if (clr) begin
      m <= '0;
    end else if (v[L]) begin
      m <= (m == nmask) ? '0 : m + 1'b1;
    end
  end

  assign out_valid = v[L];
  assign out_re    = re[L];
  assign out_im    = im[L];
  assign out_bin   = L'(bitrev(32'(m), int'(log2n)));
  assign out_last  = v[L] && (m == nmask);
endmodule
