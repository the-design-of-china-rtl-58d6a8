// tb_stokes: random X, Y spectra values (including full-scale corners);
// I, Q, U, V are compared with the Stokes formulas evaluated in 64-bit
// integers, together with channel and last flag pass-through.
module tb_stokes;
  localparam int W = 18, CH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_last = 1'b0, out_valid, out_last;
  logic [CH-1:0] in_chan = '0, out_chan;
  logic signed [W-1:0] x_re = '0, x_im = '0, y_re = '0, y_im = '0;
  logic signed [2*W+1:0] out_s [4];
  int checks = 0, failures = 0;

  stokes #(.W(W), .CH(CH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd();
    case ($urandom_range(0, 9))
      0: return -131072;
      1: return 131071;
      default: return longint'($urandom_range(0, 262143)) - 131072;
    endcase
  endfunction

  initial begin
    longint a, b, c, d, e [4];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 3000; i++) begin
      a = rnd(); b = rnd(); c = rnd(); d = rnd();
      x_re <= W'(a); x_im <= W'(b); y_re <= W'(c); y_im <= W'(d);
      in_chan <= CH'(i); in_last <= (i % 7 == 0); in_valid <= 1'b1;
      e[0] = a*a + b*b + c*c + d*d;
      e[1] = a*a + b*b - c*c - d*d;
      e[2] = 2 * (a*c + b*d);
      e[3] = 2 * (b*c - a*d);
      @(posedge clk); in_valid <= 1'b0; #1;
      checks++;
      if (!out_valid || out_chan != CH'(i) || out_last != (i % 7 == 0) ||
          longint'(out_s[0]) != e[0] || longint'(out_s[1]) != e[1] ||
          longint'(out_s[2]) != e[2] || longint'(out_s[3]) != e[3]) begin
        failures++; $display("FAIL i=%0d I=%0d exp %0d U=%0d exp %0d", i, out_s[0], e[0], out_s[2], e[2]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
