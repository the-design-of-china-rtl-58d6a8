// tb_sync_fifo: random writes and reads (never past full or empty) against
// a queue model; checks data order, count/free and the full/empty flags.
module tb_sync_fifo;
  localparam int W = 65, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, rd_en = 1'b0, empty, full;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] count, free;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen_full = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 5000; i++) begin
      logic w, r;
      logic [W-1:0] d;
      #1;
      checks++;
      if (count != ($clog2(DEPTH)+1)'(model.size()) || free != ($clog2(DEPTH)+1)'(DEPTH - model.size()) ||
          empty != (model.size() == 0) || full != (model.size() == DEPTH)) begin
        failures++; $display("FAIL flags: count %0d model %0d", count, model.size());
      end
      if (full) seen_full++;
      w = !full && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30));
      r = !empty && ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70));
      d = {$urandom(), $urandom(), 1'($urandom())};
      if (r) begin
        checks++;
        if (rd_data != model[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, model[0]); end
        void'(model.pop_front());
      end
      if (w) model.push_back(d);
      wr_en <= w; wr_data <= d; rd_en <= r;
      @(posedge clk);
      wr_en <= 1'b0; rd_en <= 1'b0;
    end
    checks++;
    if (seen_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
