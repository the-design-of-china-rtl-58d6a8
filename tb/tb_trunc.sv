// tb_trunc: random accumulated Stokes values and shifts; I is compared with
// floor(v/2^sh) clipped to 0..255, Q/U/V with the same clipped to -128..127.
module tb_trunc;
  import crane_pkg::*;
  localparam int ACC_W = 48;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [5:0] bit_sel = '0;
  logic in_valid = 1'b0, out_valid;
  logic signed [ACC_W-1:0] in_stokes [4];
  logic [ITEM_W-1:0] out_item;
  logic [31:0] sat_cnt;
  int checks = 0, failures = 0;

  trunc #(.ACC_W(ACC_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v [4]; longint e [4]; int nsat = 0;
    for (int k = 0; k < 4; k++) in_stokes[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 2000; i++) begin
      int sh;
      sh = $urandom_range(0, 40);
      v[0] = longint'({$urandom(), $urandom()}) & 64'h0000_3FFF_FFFF_FFFF;   // I >= 0
      for (int k = 1; k < 4; k++) v[k] = longint'({$urandom(), $urandom()}) >>> 18;
      if (i % 2 == 0) for (int k = 0; k < 4; k++) v[k] = v[k] >>> (sh + 20 - 8);
      for (int k = 0; k < 4; k++) begin
        in_stokes[k] <= ACC_W'(v[k]);
        e[k] = v[k] >>> sh;
        if (k == 0) begin
          if (e[k] > 255) begin e[k] = 255; nsat++; end
          else if (e[k] < 0) begin e[k] = 0; nsat++; end
        end else begin
          if (e[k] > 127) begin e[k] = 127; nsat++; end
          else if (e[k] < -128) begin e[k] = -128; nsat++; end
        end
      end
      bit_sel <= 6'(sh); in_valid <= 1'b1;
      @(posedge clk); in_valid <= 1'b0; #1;
      checks++;
      if (!out_valid || out_item != {8'(e[3]), 8'(e[2]), 8'(e[1]), 8'(e[0])}) begin
        failures++; $display("FAIL sh=%0d got %h", sh, out_item);
      end
    end
    checks++;
    if (sat_cnt != 32'(nsat)) begin failures++; $display("FAIL sat_cnt %0d exp %0d", sat_cnt, nsat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
