// decimation_filter: complex decimation filter made of a CIC decimator and
// its compensation filter.
//
// In the spectral-line mode the paper draws "CIC Filter" then "Compensation
// Filter"; in the baseband mode it draws a single "Decimation Filter" whose
// setting chooses the output bandwidth. This design builds the baseband
// filter from the same two stages: a CIC decimating by `cic_rate` on I and Q,
// then comp_fir decimating by a further 2. The total decimation is
// 2*cic_rate: 192 (cic_rate 96) gives 31.25 MHz complex bandwidth from
// 6 GS/s, 16 (cic_rate 8) gives 250 MHz from 4 GS/s.
//
// Timing: one complex output per 2*cic_rate valid inputs.
module decimation_filter
  import crane_pkg::*;
#(
  parameter int CIC_N    = 4,
  parameter int CIC_RMAX = 128,
  parameter int FIR_TAPS = 31
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic [$clog2(CIC_RMAX):0]  cic_rate,
  input  logic [5:0]                 cic_shift,
  input  logic                       in_valid,
  input  cplx16_t                    in,
  output logic                       out_valid,
  output cplx16_t                    out
);
  logic    cv_re, cv_im;
  cplx16_t cic_out;

  cic_decimator #(.N(CIC_N), .RMAX(CIC_RMAX), .IN_W(DDC_W), .OUT_W(DDC_W)) u_cic_re (
    .clk, .rst_n, .clr, .rate(cic_rate), .shift(cic_shift),
    .in_valid, .in_smp(in.re), .out_valid(cv_re), .out_smp(cic_out.re));
  cic_decimator #(.N(CIC_N), .RMAX(CIC_RMAX), .IN_W(DDC_W), .OUT_W(DDC_W)) u_cic_im (
    .clk, .rst_n, .clr, .rate(cic_rate), .shift(cic_shift),
    .in_valid, .in_smp(in.im), .out_valid(cv_im), .out_smp(cic_out.im));

  comp_fir #(.TAPS(FIR_TAPS), .CIC_N(CIC_N)) u_fir (
    .clk, .rst_n, .clr, .in_valid(cv_re), .in(cic_out), .out_valid, .out);

  // I and Q CICs share control and input valid, so their strobes coincide
  a_strobes: assert property (@(posedge clk) disable iff (!rst_n) cv_re == cv_im);
endmodule
