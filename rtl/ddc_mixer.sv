// ddc_mixer: configurable digital mixer (numerically controlled oscillator
// and real-to-complex multiplier).
//
// The spectral-line and baseband modes shift the band of interest to zero
// frequency with a "configurable mixer"; the paper gives no more. This design
// uses a 32-bit phase accumulator advanced by `phase_inc` per sample (LO
// frequency = phase_inc / 2^32 of the sample rate), a full-period cosine/sine
// table of 2^LUT_BITS entries in Q1.15 addressed by the top phase bits, and
// forms I = x*cos(phi), Q = -x*sin(phi), i.e. x*exp(-j*phi), so a tone at the
// LO frequency comes out at DC. Products are scaled by 2^-11 to 16 bits.
// Writing `phase_inc` takes effect immediately; `phase_clr` restarts the
// phase at zero.
//
// Timing: two clocks from in_valid to out_valid (table read, multiply).
module ddc_mixer
  import crane_pkg::*;
#(
  parameter int LUT_BITS = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [31:0]              phase_inc,
  input  logic                     phase_clr,
  input  logic                     in_valid,
  input  logic signed [SMP_W-1:0]  in_smp,
  output logic                     out_valid,
  output cplx16_t                  out
);
  localparam int L = 1 << LUT_BITS;
  localparam real PI = 3.14159265358979323846;

  logic signed [15:0] cos_lut [L];
  logic signed [15:0] sin_lut [L];
  initial begin
    for (int i = 0; i < L; i++) begin
      cos_lut[i] = 16'($rtoi($floor(32767.0 * $cos(2.0 * PI * i / L) + 0.5)));
      sin_lut[i] = 16'($rtoi($floor(32767.0 * $sin(2.0 * PI * i / L) + 0.5)));
    end
  end

  logic [31:0]             phase;
  logic signed [15:0]      c_q, s_q;
  logic signed [SMP_W-1:0] x_q;
  logic                    v_q;
  logic signed [SMP_W+15:0] pi_w, pq_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0; c_q <= '0; s_q <= '0; x_q <= '0; v_q <= 1'b0;
      out_valid <= 1'b0; out <= '0;
    end else begin
      v_q <= in_valid;
      if (phase_clr) phase <= '0;
      else if (in_valid) phase <= phase + phase_inc;
      if (in_valid) begin
        c_q <= cos_lut[phase[31 -: LUT_BITS]];
        s_q <= sin_lut[phase[31 -: LUT_BITS]];
        x_q <= in_smp;
      end
      out_valid <= v_q;
      if (v_q) begin
        out.re <= DDC_W'(pi_w >>> 11);
        out.im <= DDC_W'(pq_w >>> 11);
      end
    end
  end

  assign pi_w = x_q * c_q;
  assign pq_w = -(x_q * s_q);
endmodule
