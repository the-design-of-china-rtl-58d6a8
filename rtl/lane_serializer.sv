// lane_serializer: turns one word of four time-ordered ADC samples into a
// stream of one sample per clock.
//
// The signal-processing chain of this design handles one sample per clock,
// so a four-sample word from adc_capture takes four clocks to drain. A new
// word is accepted while the buffer is empty or on the clock that sends its
// last sample. A word that arrives while the buffer is still draining is
// dropped and counted in `overflow_cnt`; upstream must therefore present a
// word at most every fourth clock. This width conversion is this design's
// own choice (the paper does not describe the FPGA lane structure).
//
// Timing: sample k of a word appears k+1 clocks after the word is accepted.
module lane_serializer
  import crane_pkg::*;
#(
  parameter int LANES = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [SMP_W-1:0]  in_smp [LANES],
  input  logic                     in_ts,
  output logic                     out_valid,
  output logic signed [SMP_W-1:0]  out_smp,
  output logic                     out_ts,
  output logic [31:0]              overflow_cnt
);
  logic signed [SMP_W-1:0] buf_q [LANES];
  logic [$clog2(LANES)-1:0] idx;
  logic busy, ts_q, accept;

  assign accept = in_valid && (!busy || idx == ($clog2(LANES))'(LANES-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; ts_q <= 1'b0;
      out_valid <= 1'b0; out_smp <= '0; out_ts <= 1'b0; overflow_cnt <= '0;
      for (int i = 0; i < LANES; i++) buf_q[i] <= '0;
    end else begin
      out_valid <= busy;
      if (busy) begin
        out_smp <= buf_q[idx];
        out_ts  <= (idx == '0) ? ts_q : 1'b0;
        idx     <= idx + 1'b1;
        if (idx == ($clog2(LANES))'(LANES-1)) busy <= 1'b0;
      end
      if (accept) begin
        buf_q <= in_smp; ts_q <= in_ts; busy <= 1'b1; idx <= '0;
      end else if (in_valid) begin
        overflow_cnt <= overflow_cnt + 1;
      end
    end
  end
endmodule
