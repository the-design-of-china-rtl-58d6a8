// adc_mon: ADC monitor, window statistics of the sample stream.
//
// The paper's monitor block configures the ADC and counts ADC samples to
// check that the data are correct; which statistics it keeps is not given.
// This design keeps, over windows of WIN samples: the mean-square power
// (sum of squares divided by WIN), the peak absolute value, the number of
// clipped samples (at either full-scale code) and the number of timestamp
// pulses, plus a running count of all samples and of completed windows. The
// control computer reads these to judge ADC levels and set the gain.
//
// Timing: the window results are registered on the clock after the WIN-th
// sample and held until the next window completes (`win_done` pulses).
module adc_mon
  import crane_pkg::*;
#(
  parameter int WIN = 65536   // samples per statistics window (power of two)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [SMP_W-1:0]  in_smp,
  input  logic                     in_ts,
  output logic                     win_done,
  output logic [2*SMP_W-1:0]       power,      // mean of x^2 over the window
  output logic [SMP_W-1:0]         peak,       // max |x| over the window
  output logic [31:0]              clip_cnt,
  output logic [31:0]              ts_cnt,
  output logic [47:0]              smp_total,
  output logic [31:0]              win_total
);
  localparam int LW = $clog2(WIN);
  localparam logic signed [SMP_W-1:0] FS_POS = {1'b0, {(SMP_W-2){1'b1}}, 1'b0}; // D0 holds the timestamp
  localparam logic signed [SMP_W-1:0] FS_NEG = {1'b1, {(SMP_W-1){1'b0}}};

  logic [2*SMP_W+LW-1:0] acc;
  logic [SMP_W-1:0]      pk, absx;
  logic [31:0]           clips, tss;
  logic [LW-1:0]         n;
  logic [2*SMP_W-1:0]    sq;

  assign absx = in_smp[SMP_W-1] ? SMP_W'(-in_smp) : SMP_W'(in_smp);
  assign sq   = absx * absx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; pk <= '0; clips <= '0; tss <= '0; n <= '0;
      win_done <= 1'b0; power <= '0; peak <= '0; clip_cnt <= '0; ts_cnt <= '0;
      smp_total <= '0; win_total <= '0;
    end else begin
      win_done <= 1'b0;
      if (in_valid) begin
        smp_total <= smp_total + 1;
        n <= n + 1'b1;
        if (n == LW'(WIN-1)) begin
          win_done  <= 1'b1;
          win_total <= win_total + 1;
          power     <= (2*SMP_W)'((acc + sq) >> LW);
          peak      <= (absx > pk) ? absx : pk;
          clip_cnt  <= clips + 32'(in_smp >= FS_POS || in_smp == FS_NEG);
          ts_cnt    <= tss + 32'(in_ts);
          acc <= '0; pk <= '0; clips <= '0; tss <= '0;
        end else begin
          acc <= acc + sq;
          if (absx > pk) pk <= absx;
          clips <= clips + 32'(in_smp >= FS_POS || in_smp == FS_NEG);
          tss   <= tss + 32'(in_ts);
        end
      end
    end
  end
endmodule
