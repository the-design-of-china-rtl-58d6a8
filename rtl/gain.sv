// gain: requantises the complex samples of both polarisations to 8 bits.
//
// In the spectral-line and baseband chains the paper puts a "GAIN" block,
// set by the monitor/BIT_SEL control, in front of the packetiser, and the
// baseband output is 8 bits. This design selects an 8-bit window of each
// 16-bit I or Q value: the value is shifted right by `bit_sel` with
// round-half-up, then saturated to -128..127. Saturated values are counted
// in `sat_cnt` so the controller can lower the gain. Output item: one 32-bit
// word {Y.im, Y.re, X.im, X.re}, 8 bits each.
//
// Timing: registered, one clock from in_valid to out_valid.
module gain
  import crane_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        bit_sel,
  input  logic              in_valid,
  input  cplx16_t           in_x,
  input  cplx16_t           in_y,
  output logic              out_valid,
  output logic [ITEM_W-1:0] out_item,
  output logic [31:0]       sat_cnt
);
  // shift, round, saturate; returns {saturated, value}
  function automatic logic [OUT8_W:0] rq(input logic signed [DDC_W-1:0] v, input logic [3:0] sh);
    logic signed [DDC_W:0] r;
    r = $signed({v, 1'b0}) >>> sh;          // one extra fraction bit
    r = (r + 17'sd1) >>> 1;                 // round half up
    if (r > 17'sd127)  return {1'b1, 8'sd127};
    if (r < -17'sd128) return {1'b1, -8'sd128};
    return {1'b0, OUT8_W'(r)};
  endfunction

  logic [OUT8_W:0] q [4];
  always_comb begin
    q[0] = rq(in_x.re, bit_sel);
    q[1] = rq(in_x.im, bit_sel);
    q[2] = rq(in_y.re, bit_sel);
    q[3] = rq(in_y.im, bit_sel);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_item <= '0; sat_cnt <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_item <= {q[3][7:0], q[2][7:0], q[1][7:0], q[0][7:0]};
        sat_cnt  <= sat_cnt + 32'(q[0][8]) + 32'(q[1][8]) + 32'(q[2][8]) + 32'(q[3][8]);
      end
    end
  end
endmodule
