// sync_fifo: single-clock first-in first-out buffer.
//
// Buffers the packet stream in front of the 10 GbE transmitter (the paper
// stores the data "through FIFO" before sending them to the computing
// node). Circular buffer of DEPTH words with a write and a read pointer and
// an occupancy counter; `free` tells the packetiser how much room is left.
// Writing when full or reading when empty is a protocol error (asserted);
// the words are then ignored.
//
// Timing: first-word-fall-through: rd_data shows the oldest word whenever
// !empty; a write is visible at the output on the next clock.
module sync_fifo #(
  parameter int W     = 65,
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  output logic [W-1:0]             rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count,
  output logic [$clog2(DEPTH):0]   free
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign free    = (AW+1)'(DEPTH) - count;
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk)
    if (do_wr) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
