// trunc: requantises accumulated Stokes spectra to 8 bits per term.
//
// The pulsar chain of the paper has a "TRUNC" block set by "BIT_SEL" between
// the accumulator and the packetiser, and an 8-bit output. This design
// shifts each accumulated term right by `bit_sel` (truncating, as the name
// says), then saturates it: Stokes I, never negative, to 0..255, and Q, U, V
// to -128..127. Saturations are counted in `sat_cnt`. Output item: one
// 32-bit word {V, U, Q, I}, 8 bits each.
//
// Timing: registered, one clock from in_valid to out_valid.
module trunc
  import crane_pkg::*;
#(
  parameter int ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [5:0]              bit_sel,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_stokes [4],  // I, Q, U, V
  output logic                    out_valid,
  output logic [ITEM_W-1:0]       out_item,
  output logic [31:0]             sat_cnt
);
  logic signed [ACC_W-1:0] s [4];
  logic [7:0]              q [4];
  logic [3:0]              sat;

  always_comb begin
    for (int i = 0; i < 4; i++) s[i] = in_stokes[i] >>> bit_sel;
    // I: unsigned 8 bits
    sat[0] = (s[0] > ACC_W'(255)) || (s[0] < 0);
    q[0]   = (s[0] > ACC_W'(255)) ? 8'd255 : (s[0] < 0) ? 8'd0 : s[0][7:0];
    for (int i = 1; i < 4; i++) begin
      sat[i] = (s[i] > ACC_W'(127)) || (s[i] < -ACC_W'(128));
      q[i]   = (s[i] > ACC_W'(127)) ? 8'h7f : (s[i] < -ACC_W'(128)) ? 8'h80 : s[i][7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_item <= '0; sat_cnt <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_item <= {q[3], q[2], q[1], q[0]};
        sat_cnt  <= sat_cnt + 32'($countones(sat));
      end
    end
  end
endmodule
