// cic_decimator: cascaded integrator-comb decimator with a run-time rate.
//
// The spectral-line chain of the paper has a "CIC Filter" followed by a
// compensation filter; stage count, differential delay and widths are not
// given. This design uses N integrators at the input rate, decimation by
// `rate` (1..RMAX, set at run time), and N combs with differential delay 1
// at the output rate. Registers are IN_W + N*clog2(RMAX) bits wide, so the
// wrap-around of the integrators is harmless (standard CIC arithmetic). The
// DC gain is rate^N; the output is the comb result shifted right by `shift`
// and saturated to OUT_W bits, where `shift` is chosen by the controller,
// normally ceil(N*log2(rate)).
//
// Timing: one output every `rate` valid inputs; the output is registered
// N+1 clocks after the input that completes it; the integrators are
// pipelined, so output m is the filter response at input n = rate*m+rate-N.
// Changing `rate` should be
// followed by `clr` to restart the phase.
module cic_decimator #(
  parameter int N     = 4,
  parameter int RMAX  = 128,
  parameter int IN_W  = 16,
  parameter int OUT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic [$clog2(RMAX):0]   rate,
  input  logic [5:0]              shift,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_smp,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_smp
);
  localparam int W = IN_W + N * $clog2(RMAX);

  logic signed [W-1:0] integ [N];
  logic signed [W-1:0] comb  [N];   // comb stage outputs
  logic signed [W-1:0] cdly  [N];   // comb delay registers
  logic [$clog2(RMAX):0] cnt;
  logic [N:0]            cv;        // comb pipeline valid
  logic signed [W-1:0]   scaled;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin integ[i] <= '0; comb[i] <= '0; cdly[i] <= '0; end
      cnt <= '0; cv <= '0; out_valid <= 1'b0; out_smp <= '0;
    end else if (clr) begin
      for (int i = 0; i < N; i++) begin integ[i] <= '0; comb[i] <= '0; cdly[i] <= '0; end
      cnt <= '0; cv <= '0; out_valid <= 1'b0;
    end else begin
      cv <= {cv[N-1:0], 1'b0};
      if (in_valid) begin
        integ[0] <= integ[0] + W'(in_smp);
        for (int i = 1; i < N; i++) integ[i] <= integ[i] + integ[i-1];
        if (cnt >= rate - 1'b1) begin
          cnt   <= '0;
          cv[0] <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
      // comb chain, one stage per clock, fed by the last integrator
      if (cv[0]) begin comb[0] <= integ[N-1] - cdly[0]; cdly[0] <= integ[N-1]; end
      for (int i = 1; i < N; i++)
        if (cv[i]) begin comb[i] <= comb[i-1] - cdly[i]; cdly[i] <= comb[i-1]; end
      out_valid <= cv[N];
      if (cv[N]) begin
        if (scaled > W'(2**(OUT_W-1) - 1))     out_smp <= OUT_W'(2**(OUT_W-1) - 1);
        else if (scaled < -W'(2**(OUT_W-1)))   out_smp <= OUT_W'(-(2**(OUT_W-1)));
        else                                   out_smp <= OUT_W'(scaled);
      end
    end
  end

  assign scaled = comb[N-1] >>> shift;
endmodule
