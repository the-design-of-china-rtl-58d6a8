// tb_gain: random I/Q values and shifts; each 8-bit output is compared with
// floor(v / 2^sh + 0.5) saturated to -128..127, and saturations are counted.
module tb_gain;
  import crane_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [3:0] bit_sel = '0;
  logic in_valid = 1'b0, out_valid;
  cplx16_t in_x = '0, in_y = '0;
  logic [ITEM_W-1:0] out_item;
  logic [31:0] sat_cnt;
  int checks = 0, failures = 0;

  gain dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(int v, int sh, inout int nsat);
    real r; int q;
    r = $floor(real'(v) / (2.0**sh) + 0.5);
    q = int'(r);
    if (q > 127)  begin q = 127;  nsat++; end
    if (q < -128) begin q = -128; nsat++; end
    return q;
  endfunction

  initial begin
    int v [4]; int e [4]; int nsat = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 2000; i++) begin
      int sh;
      sh = $urandom_range(0, 15);
      for (int k = 0; k < 4; k++) v[k] = int'($urandom_range(0, 65535)) - 32768;
      if (i % 3 == 0) for (int k = 0; k < 4; k++) v[k] = v[k] >>> 6;
      in_x.re <= 16'(v[0]); in_x.im <= 16'(v[1]); in_y.re <= 16'(v[2]); in_y.im <= 16'(v[3]);
      bit_sel <= 4'(sh); in_valid <= 1'b1;
      for (int k = 0; k < 4; k++) e[k] = ref_q(v[k], sh, nsat);
      @(posedge clk); in_valid <= 1'b0; #1;
      checks++;
      if (!out_valid || out_item != {8'(e[3]), 8'(e[2]), 8'(e[1]), 8'(e[0])}) begin
        failures++; $display("FAIL sh=%0d v=%0d got %h", sh, v[0], out_item);
      end
    end
    checks++;
    if (sat_cnt != 32'(nsat)) begin failures++; $display("FAIL sat_cnt %0d exp %0d", sat_cnt, nsat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
