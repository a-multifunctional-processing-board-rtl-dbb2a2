// io_card_dual_rx: controller of a fast I/O card whose LVDS transmitter is
// replaced by a second LVDS receiver.
//
// Merger boards need six LVDS input streams but carry only four I/O cards,
// so some cards receive on two channel links and transmit on none. Each
// receiver delivers one 48-bit word per cycle of its own receive clock and
// cannot be stalled. Each receiver has its own async_fifo, which carries its
// words into the 104 MHz board clock, as on the standard card. The two
// synchronised streams are merged round-robin (stream_merger with two
// inputs) onto the single connection to the main board. Words are never
// forwarded, because there is no transmitter, so the card needs no routing
// table. A full receive FIFO drops further words and pulses that receiver's
// rx_overflow bit.
//
// Interface: rx_* per receiver (index 0, 1) in the receiver's clock domain;
// mb_out_* valid/ready towards the main board in the board clock. Latency is
// the async FIFO's synchronisation (about three board cycles) plus two
// cycles through the merger. The output carries up to one word per board
// cycle, which is less than two receivers running flat out can deliver, so
// the senders must keep their average rate below that.
//
// From the paper: the variant itself and its purpose (six input streams per
// merger board), and the asynchronous receive FIFO. This design's own
// choices: the round-robin merge and all FIFO depths.
module io_card_dual_rx
  import ftt_pkg::*;
#(
  parameter int unsigned RX_DEPTH = 16
) (
  input  logic       clk,            // 104 MHz board clock
  input  logic       rst,
  // two LVDS receivers, each in its own clock domain
  input  logic [1:0] rx_clk,
  input  logic [1:0] rx_rst,
  input  logic [1:0] rx_valid,
  input  msg_t       rx_data [2],
  output logic [1:0] rx_overflow,
  // main board side
  output logic       mb_out_valid,
  input  logic       mb_out_ready,
  output msg_t       mb_out_data
);
  logic [1:0] s_valid, s_ready;
  msg_t       s_data [2];

  for (genvar k = 0; k < 2; k++) begin : g_rx
    async_fifo #(.W(MSG_W), .DEPTH(RX_DEPTH)) u_rx_fifo (
      .wr_clk(rx_clk[k]), .wr_rst(rx_rst[k]), .wr_valid(rx_valid[k]), .wr_data(rx_data[k]),
      .wr_full(), .wr_overflow(rx_overflow[k]),
      .rd_clk(clk), .rd_rst(rst), .rd_valid(s_valid[k]), .rd_ready(s_ready[k]),
      .rd_data(s_data[k]));
  end

  stream_merger #(.NIN(2), .FIFO_DEPTH(4)) u_merge (
    .clk, .rst, .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(mb_out_valid), .out_ready(mb_out_ready), .out_data(mb_out_data));
endmodule
