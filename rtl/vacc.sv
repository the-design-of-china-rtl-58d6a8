// vacc: vector accumulator, integrates Stokes spectra over ACC_LEN spectra.
//
// The pulsar chain of the paper accumulates detected spectra, with the
// accumulation length "ACC_LEN" as a control input; the dump time follows
// from it. This design keeps one accumulator word per channel and Stokes
// term in a memory of NCH_MAX entries. The first spectrum of each
// integration is written without reading (so no clearing pass is needed),
// later spectra are added, and on the acc_len-th spectrum the sums leave the
// block (channel by channel, in the order the channels arrive) instead of
// being written back. in_last marks the last channel of a spectrum.
// `dump_cnt` counts completed integrations.
//
// Timing: registered, one clock from the input of the last spectrum to the
// corresponding output; each channel must appear once per spectrum.
module vacc #(
  parameter int IN_W    = 38,
  parameter int ACC_W   = 48,
  parameter int CH      = 16,      // channel index width, NCH_MAX = 2^CH
  parameter int LENW    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic [LENW-1:0]         acc_len,   // spectra per dump, >= 1
  input  logic                    in_valid,
  input  logic [CH-1:0]           in_chan,
  input  logic                    in_last,
  input  logic signed [IN_W-1:0]  in_s [4],
  output logic                    out_valid,
  output logic [CH-1:0]           out_chan,
  output logic                    out_last,
  output logic signed [ACC_W-1:0] out_s [4],
  output logic [31:0]             dump_cnt
);
  logic signed [ACC_W-1:0] mem [4][1 << CH];
  logic [LENW-1:0]         spec;
  logic                    first, dump;
  logic signed [ACC_W-1:0] sum [4];

  assign first = (spec == '0);
  assign dump  = (spec >= acc_len - 1'b1);

  always_comb
    for (int i = 0; i < 4; i++)
      sum[i] = (first ? '0 : mem[i][in_chan]) + ACC_W'(in_s[i]);

  always_ff @(posedge clk)
    if (in_valid && !dump)
      for (int i = 0; i < 4; i++) mem[i][in_chan] <= sum[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spec <= '0; out_valid <= 1'b0; out_chan <= '0; out_last <= 1'b0; dump_cnt <= '0;
      for (int i = 0; i < 4; i++) out_s[i] <= '0;
    end else if (clr) begin
      spec <= '0; out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= in_valid && dump;
      out_last  <= in_valid && dump && in_last;
      if (in_valid && dump) begin
        out_chan <= in_chan;
        out_s    <= sum;
      end
      if (in_valid && in_last) begin
        if (dump) begin spec <= '0; dump_cnt <= dump_cnt + 1; end
        else      spec <= spec + 1'b1;
      end
    end
  end
endmodule
