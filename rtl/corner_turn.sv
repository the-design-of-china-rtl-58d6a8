// corner_turn: double-buffered transpose between the two layers of the
// cascaded FFT.
//
// The first FFT layer delivers one spectrum of NCH channels at a time; the
// second layer needs, for each channel, the time series of that channel over
// NSPEC consecutive spectra. This block writes NSPEC spectra into one half of
// a 2 x NSPEC x NCH word memory, addressed by (spectrum, channel number), and
// when the half is full reads it out channel by channel in natural channel
// order, NSPEC samples per channel, while the other half is being filled.
// Channels may arrive in any order (in_chan gives the number), each once per
// spectrum; in_last ends a spectrum. Reading one sample per clock empties a
// half in NSPEC*NCH clocks, which is no longer than filling it, so the
// halves never collide as long as input spectra keep coming at most one
// channel per clock. `overrun` pulses if a half becomes full while the
// other is still being read (the rest of that read then comes from the new
// half); a half filling on the clock that reads the last word of the other
// is not an overrun.
// The paper gives the two layer sizes (65536 and 128); the buffering scheme
// is this design's own. In the board the memory would be the external
// DDR3; here it is an array.
//
// Timing: reading starts on the clock after the last channel of the
// NSPEC-th spectrum is written; out_first marks sample 0 of each channel's
// series, out_chan its channel number.
module corner_turn #(
  parameter int LOG2_NCH   = 16,
  parameter int LOG2_NSPEC = 7,
  parameter int W          = 18
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  in_valid,
  input  logic [LOG2_NCH-1:0]   in_chan,
  input  logic                  in_last,
  input  logic signed [W-1:0]   in_re,
  input  logic signed [W-1:0]   in_im,
  output logic                  out_valid,
  output logic [LOG2_NCH-1:0]   out_chan,
  output logic                  out_first,
  output logic signed [W-1:0]   out_re,
  output logic signed [W-1:0]   out_im,
  output logic                  overrun
);
  localparam int AW = 1 + LOG2_NSPEC + LOG2_NCH;

  logic [2*W-1:0] mem [1 << AW];

  logic                  wbuf, rbuf, reading;
  logic [LOG2_NSPEC-1:0] wspec;
  logic [LOG2_NSPEC-1:0] rspec;
  logic [LOG2_NCH-1:0]   rchan;
  logic                  full_pulse;

  assign full_pulse = in_valid && in_last && (wspec == '1);

  always_ff @(posedge clk)
    if (in_valid) mem[{wbuf, wspec, in_chan}] <= {in_re, in_im};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf <= 1'b0; rbuf <= 1'b0; reading <= 1'b0; wspec <= '0; rspec <= '0; rchan <= '0;
      out_valid <= 1'b0; out_chan <= '0; out_first <= 1'b0; out_re <= '0; out_im <= '0;
      overrun <= 1'b0;
    end else if (clr) begin
      wbuf <= 1'b0; reading <= 1'b0; wspec <= '0; rspec <= '0; rchan <= '0;
      out_valid <= 1'b0; out_first <= 1'b0; overrun <= 1'b0;
    end else begin
      overrun <= 1'b0;
      // write side
      if (in_valid && in_last) wspec <= wspec + 1'b1;
      // read side
      out_valid <= reading;
      out_first <= reading && (rspec == '0);
      if (reading) begin
        {out_re, out_im} <= mem[{rbuf, rspec, rchan}];
        out_chan <= rchan;
        rspec <= rspec + 1'b1;
        if (rspec == '1) begin
          rchan <= rchan + 1'b1;
          if (rchan == '1) reading <= 1'b0;
        end
      end
      if (full_pulse) begin
        if (reading && !(rspec == '1 && rchan == '1)) overrun <= 1'b1;
        wbuf <= ~wbuf; rbuf <= wbuf; reading <= 1'b1; rspec <= '0; rchan <= '0;
      end
    end
  end
endmodule
