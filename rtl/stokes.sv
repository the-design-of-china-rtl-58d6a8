// stokes: full-Stokes detection of the two polarisation spectra.
//
// The paper's "Stokes DECT" block forms the polarisation products of the
// channelised X and Y signals ("full stokes polarizations"). For each
// channel this design computes, with X and Y the two complex FFT outputs,
//     I = |X|^2 + |Y|^2,  Q = |X|^2 - |Y|^2,
//     U = 2 Re(X conj(Y)), V = 2 Im(X conj(Y)),
// at full precision (2W+2 bits). The sign convention of V is this design's
// choice. Channel number and frame-end flag travel with the data.
//
// Timing: registered, one clock from in_valid to out_valid.
module stokes #(
  parameter int W  = 18,
  parameter int CH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [CH-1:0]          in_chan,
  input  logic                   in_last,
  input  logic signed [W-1:0]    x_re, x_im, y_re, y_im,
  output logic                   out_valid,
  output logic [CH-1:0]          out_chan,
  output logic                   out_last,
  output logic signed [2*W+1:0]  out_s [4]   // I, Q, U, V
);
  logic signed [2*W:0] xx, yy, xr, xi;
  always_comb begin
    xx = (2*W+1)'(x_re * x_re) + (2*W+1)'(x_im * x_im);
    yy = (2*W+1)'(y_re * y_re) + (2*W+1)'(y_im * y_im);
    xr = (2*W+1)'(x_re * y_re) + (2*W+1)'(x_im * y_im);     // Re(X conj(Y))
    xi = (2*W+1)'(x_im * y_re) - (2*W+1)'(x_re * y_im);     // Im(X conj(Y))
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_chan <= '0; out_last <= 1'b0;
      for (int i = 0; i < 4; i++) out_s[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_chan <= in_chan;
        out_last <= in_last;
        out_s[0] <= (2*W+2)'(xx) + (2*W+2)'(yy);
        out_s[1] <= (2*W+2)'(xx) - (2*W+2)'(yy);
        out_s[2] <= (2*W+2)'(xr) <<< 1;
        out_s[3] <= (2*W+2)'(xi) <<< 1;
      end
    end
  end
endmodule
