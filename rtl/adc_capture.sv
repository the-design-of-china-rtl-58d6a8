// adc_capture: timestamp alignment and interleaving of two dual-core ADCs.
//
// Two ADC12D1600 chips sample one input. Chip 1 is clocked at 0 degrees and
// chip 2 at 90 degrees of the same sampling clock; in each chip core "a"
// samples on the rising and core "b" on the falling clock edge. One output
// word per input word therefore carries four consecutive samples in the time
// order 1a (0 deg), 2a (90 deg), 1b (180 deg), 2b (270 deg), following the
// paper. The paper also gives the alignment method: a common timestamp signal
// is fed to both chips and appears in bit D0 of every 12-bit word, so the
// delay between the timestamp edges seen on the two chips is the delay between
// their data streams.
//
// How it works: a rising edge of D0 on core "a" of each chip is detected. When
// one chip shows an edge, a counter runs until the other chip shows its edge;
// the count is the skew in words, and the earlier chip is then delayed by that
// many words through a shift register. The alignment is held (locked) until
// `resync` is pulsed. A skew larger than MAX_SKEW raises `skew_err` and the
// measurement restarts. D0 is cleared in the output samples (it carries the
// timestamp, not data); the output samples stay 12-bit two's complement. The
// two's-complement data format, MAX_SKEW and re-arming by `resync` are this
// design's choices.
//
// Interface: adc1/adc2 carry [0]=core a, [1]=core b of chip 1 and chip 2, one
// word per clock when in_valid. Timing: the output is registered, one cycle
// after the input word, plus the alignment delay of the earlier chip.
module adc_capture
  import crane_pkg::*;
#(
  parameter int MAX_SKEW = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [ADC_W-1:0]          adc1 [2],
  input  logic [ADC_W-1:0]          adc2 [2],
  input  logic                      resync,
  output logic                      out_valid,
  output logic signed [SMP_W-1:0]   out_smp [4],
  output logic                      out_ts,      // timestamp bit of aligned sample 1a
  output logic                      locked,
  output logic signed [$clog2(MAX_SKEW+1):0] skew, // >0: chip 1 early (delayed by skew)
  output logic                      skew_err
);
  localparam int DW = $clog2(MAX_SKEW + 1);

  // Delay lines, index 0 = current word.
  logic [2*ADC_W-1:0] dl1 [MAX_SKEW+1];
  logic [2*ADC_W-1:0] dl2 [MAX_SKEW+1];
  logic               ts1_q, ts2_q;
  logic               edge1, edge2;
  logic [DW-1:0]      d1, d2;
  logic [DW:0]        cnt;
  logic               seen1, seen2;

  typedef enum logic [1:0] {S_WAIT, S_MEAS, S_LOCK} state_e;
  state_e state;

  assign dl1[0] = {adc1[1], adc1[0]};
  assign dl2[0] = {adc2[1], adc2[0]};
  assign edge1  = in_valid && adc1[0][0] && !ts1_q;
  assign edge2  = in_valid && adc2[0][0] && !ts2_q;

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int i = 1; i <= MAX_SKEW; i++) begin
        dl1[i] <= dl1[i-1];
        dl2[i] <= dl2[i-1];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts1_q <= 1'b0; ts2_q <= 1'b0;
      state <= S_WAIT; cnt <= '0; seen1 <= 1'b0; seen2 <= 1'b0;
      d1 <= '0; d2 <= '0; skew <= '0; skew_err <= 1'b0;
    end else begin
      if (in_valid) begin
        ts1_q <= adc1[0][0];
        ts2_q <= adc2[0][0];
      end
      skew_err <= 1'b0;
      unique case (state)
        S_WAIT: begin
          cnt <= 1;
          if (edge1 && edge2) begin
            d1 <= '0; d2 <= '0; skew <= '0; state <= S_LOCK;
          end else if (edge1 || edge2) begin
            seen1 <= edge1; seen2 <= edge2; state <= S_MEAS;
          end
        end
        S_MEAS: begin
          if (in_valid) begin
            if ((seen1 && edge2) || (seen2 && edge1)) begin
              // the chip that showed its edge first is early: delay it
              if (seen1) begin d1 <= cnt[DW-1:0]; d2 <= '0; skew <= $signed({1'b0, cnt[DW-1:0]}); end
              else       begin d2 <= cnt[DW-1:0]; d1 <= '0; skew <= -$signed({1'b0, cnt[DW-1:0]}); end
              state <= S_LOCK;
            end else if (cnt == (DW+1)'(MAX_SKEW)) begin
              skew_err <= 1'b1; state <= S_WAIT;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
        end
        S_LOCK: ;
        default: state <= S_WAIT;
      endcase
      if (resync) begin
        state <= S_WAIT; seen1 <= 1'b0; seen2 <= 1'b0;
      end
    end
  end

  assign locked = (state == S_LOCK);

  logic [2*ADC_W-1:0] w1, w2;
  assign w1 = dl1[d1];
  assign w2 = dl2[d2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ts    <= 1'b0;
      for (int i = 0; i < 4; i++) out_smp[i] <= '0;
    end else begin
      out_valid  <= in_valid;
      if (in_valid) begin
        out_ts     <= w1[0];
        out_smp[0] <= $signed({w1[ADC_W-1:1],         1'b0}); // 1a,   0 deg
        out_smp[1] <= $signed({w2[ADC_W-1:1],         1'b0}); // 2a,  90 deg
        out_smp[2] <= $signed({w1[2*ADC_W-1:ADC_W+1], 1'b0}); // 1b, 180 deg
        out_smp[3] <= $signed({w2[2*ADC_W-1:ADC_W+1], 1'b0}); // 2b, 270 deg
      end
    end
  end

endmodule
