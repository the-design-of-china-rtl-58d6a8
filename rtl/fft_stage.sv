// fft_stage: one radix-2 single-path delay-feedback (SDF) stage of a
// decimation-in-frequency FFT.
//
// A stage with delay D works on blocks of 2D samples. During the first D
// samples it stores the input in a D-word feedback memory and sends out the
// memory's previous contents (the twiddled differences of the last block).
// During the second D samples it forms the butterfly of the stored sample a
// and the new sample b: a+b goes out at once and (a-b)*W^m, m = 0..D-1,
// W = exp(-j*2*pi/(2D)), goes into the memory. The twiddle for stage depth D
// is read from the FFT's shared table `tw_cos/tw_sin` of NMAX/2
// entries at index m*NMAX/(2D). When `scale` is set both outputs are halved
// (rounded) to avoid overflow; results are saturated to W bits. A disabled
// stage (`en` low) passes samples straight through, which is how the FFT
// changes its size at run time. The stage primes itself: its output is
// valid only after its first D inputs, so the next stage sees aligned
// blocks.
//
// Timing: registered, one clock from an accepted input to its output.
module fft_stage #(
  parameter int W         = 18,
  parameter int LOG2D     = 0,        // D = 2^LOG2D
  parameter int LOG2N_MAX = 17
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                en,
  input  logic                scale,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im,
  // twiddle table read port (index into a table of 2^(LOG2N_MAX-1) entries)
  output logic [LOG2N_MAX-2:0] tw_idx,
  input  logic signed [17:0]  tw_cos,
  input  logic signed [17:0]  tw_sin
);
  localparam int D = 1 << LOG2D;

  logic signed [W-1:0] mem_re [D];
  logic signed [W-1:0] mem_im [D];
  logic [LOG2D:0]      c;          // position in the 2D block
  logic                primed;
  logic [LOG2D:0]      nin;
  logic [(LOG2D>0 ? LOG2D : 1)-1:0] a_idx;
  logic signed [W-1:0] a_re, a_im;
  logic signed [W+1:0] s_re, s_im, d_re, d_im;
  logic signed [W+19:0] m_re, m_im;

  assign a_idx = (LOG2D > 0) ? c[(LOG2D>0 ? LOG2D : 1)-1:0] : '0;
  assign a_re  = mem_re[a_idx];
  assign a_im  = mem_im[a_idx];
  // twiddle index m * NMAX/(2D) with m = c - D
  assign tw_idx = (LOG2N_MAX-1)'(a_idx) << (LOG2N_MAX - 1 - LOG2D);

  function automatic logic signed [W-1:0] sat(input logic signed [W+19:0] v);
    if (v > (W+20)'(2**(W-1) - 1)) return W'(2**(W-1) - 1);
    if (v < -(W+20)'(2**(W-1)))    return W'(-(2**(W-1)));
    return W'(v);
  endfunction

  always_comb begin
    s_re = (W+2)'(a_re) + (W+2)'(in_re);
    s_im = (W+2)'(a_im) + (W+2)'(in_im);
    d_re = (W+2)'(a_re) - (W+2)'(in_re);
    d_im = (W+2)'(a_im) - (W+2)'(in_im);
    // (d_re + j d_im)(cos - j sin), twiddle Q1.17
    m_re = ((W+20)'(d_re) * (W+20)'(tw_cos) + (W+20)'(d_im) * (W+20)'(tw_sin) + (W+20)'(2**16)) >>> 17;
    m_im = ((W+20)'(d_im) * (W+20)'(tw_cos) - (W+20)'(d_re) * (W+20)'(tw_sin) + (W+20)'(2**16)) >>> 17;
  end

  function automatic logic signed [W+19:0] half(input logic signed [W+19:0] v, input logic sc);
    return sc ? ((v + 1) >>> 1) : v;
  endfunction

  always_ff @(posedge clk) begin
    if (en && in_valid) begin
      if (!c[LOG2D]) begin
        mem_re[a_idx] <= in_re;
        mem_im[a_idx] <= in_im;
      end else begin
        mem_re[a_idx] <= sat(half(m_re, scale));
        mem_im[a_idx] <= sat(half(m_im, scale));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; primed <= 1'b0; nin <= '0; out_valid <= 1'b0; out_re <= '0; out_im <= '0;
    end else if (clr) begin
      c <= '0; primed <= 1'b0; nin <= '0; out_valid <= 1'b0;
    end else if (!en) begin
      out_valid <= in_valid;
      if (in_valid) begin out_re <= in_re; out_im <= in_im; end
    end else begin
      out_valid <= in_valid && (primed || nin == (LOG2D+1)'(D));
      if (in_valid) begin
        c <= c + 1'b1;
        if (!primed) begin
          if (nin == (LOG2D+1)'(D)) primed <= 1'b1;
          else nin <= nin + 1'b1;
        end
        if (!c[LOG2D]) begin
          out_re <= a_re;                 // stored (a-b)*W of the previous block
          out_im <= a_im;
        end else begin
          out_re <= sat(half((W+20)'(s_re), scale));
          out_im <= sat(half((W+20)'(s_im), scale));
        end
      end
    end
  end
endmodule
