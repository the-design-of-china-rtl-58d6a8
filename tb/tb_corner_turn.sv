// tb_corner_turn: self-checking test of the double-buffered transpose.
//
// Small sizes (8 channels, 4 spectra, 8-bit words). Spectra are written with
// the channels in a scrambled order (bit-reversed, like an FFT output), the
// word value encoding (buffer, spectrum, channel). The reader model expects,
// for each filled buffer, channels 0..7 in order, each with spectra 0..3,
// out_first on spectrum 0 and out_chan equal to the channel. Phase 1 feeds
// one channel per clock (the fastest rate, no overrun allowed); phase 2
// feeds with gaps; phase 3 forces an overrun with short spectra.
module tb_corner_turn;
  localparam int LC = 3, LS = 2, W = 8, NCH = 1 << LC, NSP = 1 << LS;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_last = 1'b0;
  logic [LC-1:0] in_chan = '0;
  logic signed [W-1:0] in_re = '0, in_im = '0;
  logic out_valid, out_first, overrun;
  logic [LC-1:0] out_chan;
  logic signed [W-1:0] out_re, out_im;

  corner_turn #(.LOG2_NCH(LC), .LOG2_NSPEC(LS), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int brev(input int x);
    int r = 0;
    for (int b = 0; b < LC; b++) if (x & (1 << b)) r |= 1 << (LC - 1 - b);
    return r;
  endfunction

  int buf_wr = 0, n_ovr = 0;
  task automatic spectrum(input int s, input int gap, input int len = NCH);
    for (int j = 0; j < len; j++) begin
      in_valid <= 1'b1; in_chan <= LC'(brev(j)); in_last <= (j == len - 1);
      in_re <= W'(((buf_wr & 3) << 5) | (s << 3) | brev(j));
      in_im <= W'(~(((buf_wr & 3) << 5) | (s << 3) | brev(j)));
      @(posedge clk);
      if (gap > 0) begin
        in_valid <= 1'b0; in_last <= 1'b0;
        repeat (gap) @(posedge clk);
      end
    end
  endtask

  task automatic idle(input int n);
    in_valid <= 1'b0; in_last <= 1'b0;
    repeat (n) @(posedge clk);
  endtask

  task automatic fill(input int gap);
    for (int s = 0; s < NSP; s++) spectrum(s, gap);
    buf_wr++;
  endtask

  // reader model
  int buf_rd = 0, k = 0, n_out = 0;
  bit ignore = 0;
  always @(posedge clk) if (rst_n) begin
    if (overrun) n_ovr++;
    if (out_valid && !ignore) begin
      int c, s, e;
      c = k / NSP; s = k % NSP;
      e = ((buf_rd & 3) << 5) | (s << 3) | c;
      check(out_chan == LC'(c), $sformatf("out_chan %0d, expected %0d", out_chan, c));
      check(out_first == (s == 0), "out_first");
      check(out_re == W'(e) && out_im == W'(~e),
            $sformatf("buffer %0d ch %0d spec %0d: got %0h/%0h expected %0h", buf_rd, c, s, out_re, out_im, e));
      n_out++;
      k++;
      if (k == NCH * NSP) begin k = 0; buf_rd++; end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // phase 1: full rate, 4 buffers
    repeat (4) fill(0);
    idle(NCH * NSP + 5);
    check(n_out == 4 * NCH * NSP, $sformatf("phase 1: %0d outputs", n_out));
    check(n_ovr == 0, "overrun at full rate");
    // phase 2: gaps
    repeat (3) fill(2);
    idle(NCH * NSP + 5);
    check(n_out == 7 * NCH * NSP, $sformatf("phase 2: %0d outputs", n_out));
    check(n_ovr == 0, "overrun with gaps");
    // phase 3: overrun. Clear, fill one buffer, then fill the next one with
    // short (2-channel) spectra, as a too small first-layer FFT would.
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    buf_wr = 0; buf_rd = 0; k = 0;
    fill(0);
    ignore = 1;                          // data are not checked from here on
    for (int q = 0; q < NSP; q++) spectrum(q, 0, 2);
    idle(3);
    check(n_ovr == 1, $sformatf("overrun count %0d, expected 1", n_ovr));
    repeat (2 * NCH * NSP) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
