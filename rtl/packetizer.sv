// packetizer: packs 32-bit output items into packets for the 10 GbE link.
//
// Every mode of the paper ends with "Packetizer -> 10 GbE Tx" and the data
// are stored "through FIFO" before they are sent; packet layout and sizes
// are not given. This design pairs items into 64-bit words (first item in
// the low half) and sends packets of one header word and PKT_WORDS payload
// words. Header: {8'hC5 magic, 6'b0, mode[1:0], seq[15:0], first_item[31:0]},
// where seq counts packets and first_item is the index, since `clr`, of the
// packet's first item, so the receiver can see lost packets. Words go into a
// FIFO_DEPTH-word FIFO (sync_fifo) that the transmitter drains through a
// valid/ready port; `tx_last` marks the last word of a packet.
// Overflow handling: a packet is started only if the FIFO has room for all
// of it; otherwise all its items are dropped and `drop_cnt` is incremented,
// so the output holds only whole packets (one spare word covers the header
// of a packet whose write is still in flight). A `clr` (mode switch) in the middle
// of a packet ends it at once with an all-zero word flagged last.
//
// Timing: the header is written on the clock of the packet's first item, a
// payload word on the clock of every second item.
module packetizer
  import crane_pkg::*;
#(
  parameter int PKT_WORDS  = 1024,
  parameter int FIFO_DEPTH = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  mode_e             mode,
  input  logic              in_valid,
  input  logic [ITEM_W-1:0] in_item,
  output logic [WORD_W-1:0] tx_data,
  output logic              tx_valid,
  output logic              tx_last,
  input  logic              tx_ready,
  output logic [31:0]       drop_cnt,
  output logic [31:0]       pkt_cnt
);
  localparam int CW = $clog2(PKT_WORDS + 1);

  logic              in_pkt, dropping, half;
  logic [ITEM_W-1:0] lo;
  logic [CW-1:0]     words;        // payload words written in this packet
  logic [31:0]       item_idx;
  logic [15:0]       seq;
  logic              wr_en;
  logic [WORD_W:0]   wr_data;
  logic [WORD_W:0]   rd_data;
  logic              empty, full;
  logic [$clog2(FIFO_DEPTH):0] count, free;
  logic              room;

  assign room = (free >= ($clog2(FIFO_DEPTH)+1)'(PKT_WORDS + 2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0; dropping <= 1'b0; half <= 1'b0; lo <= '0; words <= '0;
      item_idx <= '0; seq <= '0; wr_en <= 1'b0; wr_data <= '0;
      drop_cnt <= '0; pkt_cnt <= '0;
    end else begin
      wr_en <= 1'b0;
      if (clr) begin
        if (in_pkt && !dropping) begin
          wr_en <= 1'b1; wr_data <= {1'b1, {WORD_W{1'b0}}};
        end
        in_pkt <= 1'b0; dropping <= 1'b0; half <= 1'b0; words <= '0; item_idx <= '0;
      end else if (in_valid) begin
        item_idx <= item_idx + 1;
        if (!in_pkt) begin
          // first item of a new packet
          in_pkt <= 1'b1; half <= 1'b1; lo <= in_item; words <= '0;
          if (room) begin
            dropping <= 1'b0;
            wr_en    <= 1'b1;
            wr_data  <= {1'b0, PKT_MAGIC, 6'b0, mode, seq, item_idx};
            seq      <= seq + 1'b1;
          end else begin
            dropping <= 1'b1;
            drop_cnt <= drop_cnt + 1;
          end
        end else if (!half) begin
          half <= 1'b1; lo <= in_item;
        end else begin
          half  <= 1'b0;
          words <= words + 1'b1;
          if (!dropping) begin
            wr_en   <= 1'b1;
            wr_data <= {(words == CW'(PKT_WORDS-1)), in_item, lo};
          end
          if (words == CW'(PKT_WORDS-1)) begin
            in_pkt <= 1'b0;
            if (!dropping) pkt_cnt <= pkt_cnt + 1;
          end
        end
      end
    end
  end

  sync_fifo #(.W(WORD_W+1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en, .wr_data, .rd_en(tx_valid && tx_ready),
    .rd_data, .empty, .full, .count, .free);

  assign tx_valid = !empty;
  assign tx_data  = rd_data[WORD_W-1:0];
  assign tx_last  = rd_data[WORD_W];

  // a packet that was given room never meets a full FIFO
  a_room: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
endmodule
