// tb_vacc: 8-channel accumulator fed with random Stokes spectra whose
// channels arrive in bit-reversed order. For acc_len 1, 3 and 5 the dumped
// sums, channel numbers and last flags are compared with sums formed here,
// and the number of dumps is checked.
module tb_vacc;
  localparam int IN_W = 38, ACC_W = 48, CH = 3, NCH = 1 << CH;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, in_last = 1'b0, out_valid, out_last;
  logic [15:0] acc_len = 16'd1;
  logic [CH-1:0] in_chan = '0, out_chan;
  logic signed [IN_W-1:0] in_s [4];
  logic signed [ACC_W-1:0] out_s [4];
  logic [31:0] dump_cnt;
  int checks = 0, failures = 0;

  vacc #(.IN_W(IN_W), .ACC_W(ACC_W), .CH(CH), .LENW(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sums [NCH][4];
  typedef struct { int ch; bit last; longint s [4]; } exp_t;
  exp_t q [$];
  int nout;

  always @(posedge clk) if (out_valid && rst_n) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (int'(out_chan) != e.ch || out_last != e.last ||
        longint'(out_s[0]) != e.s[0] || longint'(out_s[1]) != e.s[1] ||
        longint'(out_s[2]) != e.s[2] || longint'(out_s[3]) != e.s[3]) begin
      failures++; $display("FAIL ch %0d: %0d exp %0d", out_chan, out_s[0], e.s[0]);
    end
    nout++;
  end

  task automatic run(input int len, input int dumps);
    int d0;
    acc_len <= 16'(len);
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    d0 = dump_cnt; nout = 0;
    for (int d = 0; d < dumps; d++)
      for (int sp = 0; sp < len; sp++)
        for (int m = 0; m < NCH; m++) begin
          int ch;
          ch = {m[0], m[1], m[2]};          // bit-reversed arrival order
          for (int k = 0; k < 4; k++) begin
            longint v;
            v = longint'($urandom_range(0, 2000000)) - (k == 0 ? 0 : 1000000);
            in_s[k] <= IN_W'(v);
            sums[ch][k] = (sp == 0 ? 0 : sums[ch][k]) + v;
          end
          if (sp == len - 1) begin
            exp_t e;
            e.ch = ch; e.last = (m == NCH - 1);
            for (int k = 0; k < 4; k++) e.s[k] = sums[ch][k];
            q.push_back(e);
          end
          in_chan <= CH'(ch); in_last <= (m == NCH - 1); in_valid <= 1'b1;
          @(posedge clk);
          if ($urandom_range(0, 4) == 0) begin in_valid <= 1'b0; @(posedge clk); end
        end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    checks += 2;
    if (nout != dumps * NCH) begin failures++; $display("FAIL %0d outputs", nout); end
    if (dump_cnt - d0 != dumps) begin failures++; $display("FAIL dump_cnt"); end
  endtask

  initial begin
    for (int k = 0; k < 4; k++) in_s[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(1, 3);
    run(3, 4);
    run(5, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
