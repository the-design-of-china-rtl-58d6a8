// tb_packetizer: packets of 4 payload words through a 16-word FIFO. Items
// are numbered; the receiver checks every header (magic, mode, sequence,
// first-item index) and every payload word against the items, and the last
// flag. A stalled transmitter forces whole-packet drops, which must show in
// drop_cnt and in the item index of the next header, never as a cut packet.
// A clr in the middle of a packet must end it with a zero word flagged last.
module tb_packetizer;
  import crane_pkg::*;
  localparam int PKT = 4, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, in_valid = 1'b0, tx_valid, tx_last, tx_ready = 1'b0;
  mode_e mode = MODE_PULSAR;
  logic [ITEM_W-1:0] in_item = '0;
  logic [WORD_W-1:0] tx_data;
  logic [31:0] drop_cnt, pkt_cnt;
  int checks = 0, failures = 0;

  packetizer #(.PKT_WORDS(PKT), .FIFO_DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  int pos = 0, rx_pkts = 0, exp_seq = 0, first = 0, gaps = 0, cut = 0;
  logic expect_cut = 1'b0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (pos == 0) begin
      checks++;
      if (tx_data[63:56] != PKT_MAGIC || tx_data[49:48] != 2'(mode) || tx_data[47:32] != 16'(exp_seq)) begin
        failures++; $display("FAIL header %h", tx_data);
      end
      if (tx_data[31:0] != 32'(first)) gaps++;
      first = tx_data[31:0];
      exp_seq++;
      pos = 1;
    end else if (expect_cut && tx_last && tx_data == '0) begin
      cut++; pos = 0; expect_cut = 1'b0;
    end else begin
      checks++;
      if (tx_data != {32'(first + 2*pos - 1), 32'(first + 2*pos - 2)} || tx_last != (pos == PKT)) begin
        failures++; $display("FAIL payload %h at %0d (first %0d)", tx_data, pos, first);
      end
      if (pos == PKT) begin pos = 0; rx_pkts++; first = first + 2*PKT; end
      else pos++;
    end
  end

  task automatic send(input int n, input int from);
    for (int i = 0; i < n; i++) begin
      in_item <= 32'(from + i); in_valid <= 1'b1; @(posedge clk);
      if ($urandom_range(0, 2) == 0) begin in_valid <= 1'b0; @(posedge clk); end
    end
    in_valid <= 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // free-running transmitter: no drops
    tx_ready <= 1'b1;
    send(2*PKT*10, 0);
    repeat (40) @(posedge clk);
    checks += 2;
    if (rx_pkts != 10 || pkt_cnt != 10) begin failures++; $display("FAIL %0d packets", rx_pkts); end
    if (drop_cnt != 0) begin failures++; $display("FAIL drops %0d", drop_cnt); end
    // stalled transmitter: FIFO holds 3 packets of 5 words, the rest is dropped
    tx_ready <= 1'b0;
    send(2*PKT*8, 2*PKT*10);
    checks++;
    if (drop_cnt != 5) begin failures++; $display("FAIL drop_cnt %0d exp 5", drop_cnt); end
    tx_ready <= 1'b1;
    repeat (60) @(posedge clk);
    send(2*PKT*2, 2*PKT*18);
    repeat (40) @(posedge clk);
    checks += 2;
    if (rx_pkts != 15) begin failures++; $display("FAIL rx %0d packets exp 15", rx_pkts); end
    if (gaps != 1) begin failures++; $display("FAIL gaps %0d", gaps); end
    // clr in the middle of a packet
    expect_cut = 1'b1;
    send(3, 2*PKT*20);
    clr <= 1'b1; @(posedge clk); clr <= 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (cut != 1) begin failures++; $display("FAIL cut packet not ended"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
