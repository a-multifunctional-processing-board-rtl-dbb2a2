// io_card_ctrl: controller and data switch of a fast I/O interconnector card.
//
// The piggyback card joins an LVDS channel-link receiver, an LVDS
// transmitter and a bidirectional connection to the main board. Words from
// the receiver arrive in the receiver's own clock domain and are buffered
// and synchronised in an async_fifo (as the paper describes). Each received
// word is looked up in the card's routing table (1-bit destination: 0 = to
// the main board, 1 = forward to the LVDS output), which is how a board in a
// daisy chain passes on messages that are not for it. Words from the main
// board are buffered in a sync_fifo and go to the LVDS output. When both the
// forward path and the main-board path have a word for the transmitter, the
// programmable priority bit prio_forward decides (1: forwarded words first);
// the paper says only that the priorities can be programmed. The
// transmitter takes one word per cycle without back-pressure. FIFO depths,
// the 1-bit table and the priority scheme are this design's choices.
module io_card_ctrl
  import ftt_pkg::*;
#(
  parameter int unsigned RX_DEPTH = 16,
  parameter int unsigned MB_DEPTH = 16,
  parameter int unsigned NSTATIC  = 32
) (
  input  logic  clk,            // 104 MHz board clock
  input  logic  rst,
  // LVDS receiver side (own clock domain)
  input  logic  rx_clk,
  input  logic  rx_rst,
  input  logic  rx_valid,
  input  msg_t  rx_data,
  output logic  rx_overflow,
  // LVDS transmitter side (board clock)
  output logic  tx_valid,
  output msg_t  tx_data,
  // main board side
  output logic  mb_out_valid,
  input  logic  mb_out_ready,
  output msg_t  mb_out_data,
  input  logic  mb_in_valid,
  output logic  mb_in_ready,
  input  msg_t  mb_in_data,
  // configuration
  input  logic  prio_forward,
  input  logic  cfg_we,
  input  chan_t cfg_ch,
  input  logic  cfg_dest,
  input  logic  cfg_valid
);
  logic r_valid, r_ready;
  msg_t r_data;

  async_fifo #(.W(MSG_W), .DEPTH(RX_DEPTH)) u_rx_fifo (
    .wr_clk(rx_clk), .wr_rst(rx_rst), .wr_valid(rx_valid), .wr_data(rx_data),
    .wr_full(), .wr_overflow(rx_overflow),
    .rd_clk(clk), .rd_rst(rst), .rd_valid(r_valid), .rd_ready(r_ready), .rd_data(r_data));

  logic m_valid, m_ready;
  msg_t m_data;
  sync_fifo #(.W(MSG_W), .DEPTH(MB_DEPTH)) u_mb_fifo (
    .clk, .rst, .in_valid(mb_in_valid), .in_ready(mb_in_ready), .in_data(mb_in_data),
    .out_valid(m_valid), .out_ready(m_ready), .out_data(m_data), .count());

  logic dest, hit, cfg_reject;
  route_table #(.NCH(NCHAN), .DW(1), .NSTATIC(NSTATIC), .NRD(1)) u_table (
    .clk, .rst, .cfg_we, .cfg_ch, .cfg_dest, .cfg_valid, .cfg_reject,
    .rd_ch(msg_chan(r_data)), .rd_dest(dest), .rd_hit(hit));

  // A received word with an invalid entry goes to the main board, whose own
  // table decides what to do with it.
  logic fwd_req, mb_req;
  assign fwd_req = r_valid && hit && dest;
  assign mb_req  = r_valid && !(hit && dest);

  logic grant_fwd, grant_mb;
  always_comb begin
    grant_fwd = 1'b0;
    grant_mb  = 1'b0;
    if (fwd_req && m_valid) begin
      if (prio_forward) grant_fwd = 1'b1; else grant_mb = 1'b1;
    end else begin
      grant_fwd = fwd_req;
      grant_mb  = m_valid;
    end
  end

  logic mbo_free;
  assign mbo_free = !mb_out_valid || mb_out_ready;
  assign r_ready  = grant_fwd || (mb_req && mbo_free);
  assign m_ready  = grant_mb;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_valid     <= 1'b0;
      mb_out_valid <= 1'b0;
    end else begin
      tx_valid <= grant_fwd || grant_mb;
      tx_data  <= grant_fwd ? r_data : m_data;
      if (mb_out_valid && mb_out_ready) mb_out_valid <= 1'b0;
      if (mb_req && mbo_free) begin
        mb_out_valid <= 1'b1;
        mb_out_data  <= r_data;
      end
    end
  end
endmodule
