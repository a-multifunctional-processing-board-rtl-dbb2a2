// ftt_board: data controller of the FTT multifunctional processing board.
//
// The board carries up to four fast I/O interconnector ("piggyback") cards,
// each joined to the large data controller FPGA, which also talks to the DSP
// controller FPGA and, over the local bus, to the VME interface. This module
// is that FPGA together with the controllers of its four I/O cards:
//
//   LVDS rx[i] -> io_card_ctrl[i] --mb_out--> stream_merger --------+
//   ctrl port in ------------------------------> (5 inputs)           |
//                                                                   v
//   user logic out ---------------------------------------> msg_router (2 in, 6 out)
//   LVDS tx[i] <- io_card_ctrl[i] <--mb_in-- outputs 0-3         |
//   user logic in <-- output 4,  ctrl port out <-- output 5 <----+
//
// A card whose bit in DUAL_RX is set is the merger variant (io_card_dual_rx):
// it has a second receiver on the lvds_rx2_* ports instead of a
// transmitter, so four cards give up to eight input streams. The default
// (no such card) is the standard board.
//
// Every word carries a 9-bit channel number; the routing tables of the
// router (3-bit destination) and of each I/O card (forward or keep) decide
// where it goes, as in the paper's message system. Merger inputs 0-3 and
// router outputs 0-3 are the I/O cards, merger input 4 and router output 5
// are the control port toward the DSP controller and the local bus (brought
// out as ports, since those parts are not built here), router output 4 and
// router input 0 are the user logic. The static
// partition of the router table sends channels 0..31 to the control port,
// so a freshly configured board can already talk to its VME side.
//
// The user logic depends on the role the board plays (register ROLE):
//   0 L2 linker  (l2_linker, with 100 CAMs)   1 L1 linker (l1_linker)
//   2 L2 decider (l2_decider)                 3 merger only (routing, FIFOs)
// On the real board the role is a different FPGA program; here all user
// blocks are present and the role register selects which one is attached,
// which is this design's choice.
//
// Local bus (written in the 104 MHz domain, lb_we for one cycle; the paper's
// 10.4 MHz local bus is taken to be synchronous to it, a choice of this
// design). Address map, also this design's choice:
//   0x0000+ch        router table: dest = wdata[2:0], valid = wdata[31]
//   0x1000*(i+1)+ch  I/O card i table: forward = wdata[0], valid = wdata[31]
//   0x8000 role   0x8001 I/O priority bits (forward first)   0x8002 track channel base
//   0x8003 linker EOE channel  0x8004 L1 {mult_thr[13:8], kappa_mask[7:0]}
//   0x8005 decider pt_thr  0x8006 decider n_thr  0x8007 decider sum_thr  0x8008 L3 channel
//   0x8009 decider jet_thr (sector pt sum)  0x800A decider jet_n (jets needed)
module ftt_board
  import ftt_pkg::*;
#(
  parameter int unsigned NIO       = 4,
  parameter int unsigned CAM_DEPTH = 64,
  // bit i set: I/O card i is the two-receiver variant (merger boards)
  parameter logic [NIO-1:0] DUAL_RX = '0
) (
  input  logic       clk,         // 104 MHz
  input  logic       rst,
  // LVDS channel links of the I/O cards
  input  logic [NIO-1:0] lvds_rx_clk,
  input  logic [NIO-1:0] lvds_rx_rst,
  input  logic [NIO-1:0] lvds_rx_valid,
  input  msg_t           lvds_rx_data [NIO],
  output logic [NIO-1:0] lvds_tx_valid,
  output msg_t           lvds_tx_data [NIO],
  output logic [NIO-1:0] lvds_rx_overflow,
  // second receivers, used only by cards with DUAL_RX set
  input  logic [NIO-1:0] lvds_rx2_clk,
  input  logic [NIO-1:0] lvds_rx2_rst,
  input  logic [NIO-1:0] lvds_rx2_valid,
  input  msg_t           lvds_rx2_data [NIO],
  output logic [NIO-1:0] lvds_rx2_overflow,
  // control port (DSP controller / local bus side)
  input  logic       ctrl_in_valid,
  output logic       ctrl_in_ready,
  input  msg_t       ctrl_in_data,
  output logic       ctrl_out_valid,
  input  logic       ctrl_out_ready,
  output msg_t       ctrl_out_data,
  // local bus configuration
  input  logic        lb_we,
  input  logic [15:0] lb_addr,
  input  logic [31:0] lb_wdata,
  // trigger outputs
  output logic       l1_trig_valid,
  output logic       l1_trig_mult,
  output logic       l1_trig_b2b,
  output logic       l2_dec_valid,
  output logic       l2_dec_accept,
  // status
  output logic [6:0] l2_n_links,
  output logic       l2_link_overflow,
  output logic [15:0] route_drops
);
  localparam int unsigned NPORT = NIO + 2;
  localparam int unsigned APP   = NIO;
  localparam int unsigned CTRL  = NIO + 1;
  localparam int unsigned DW    = $clog2(NPORT);

  typedef enum logic [1:0] {ROLE_L2_LINKER, ROLE_L1_LINKER, ROLE_L2_DECIDER, ROLE_MERGER} role_e;

  // ---------------- configuration registers ----------------
  role_e          role;
  logic [NIO-1:0] prio_fwd;
  chan_t          track_ch_base, link_eoe_ch, l3_ch;
  logic [L1_KAPPA_BINS-1:0] l1_kappa_mask;
  logic [5:0]     l1_mult_thr;
  logic [PT_W-1:0] dec_pt_thr;
  logic [5:0]     dec_n_thr;
  logic [PT_W+5:0] dec_sum_thr;
  logic [PT_W+5:0] dec_jet_thr;
  logic [4:0]     dec_jet_n;

  always_ff @(posedge clk) begin
    if (rst) begin
      role          <= ROLE_MERGER;
      prio_fwd      <= '1;
      track_ch_base <= chan_t'(64);
      link_eoe_ch   <= chan_t'(112);
      l3_ch         <= chan_t'(120);
      l1_kappa_mask <= 8'b0001_1000;
      l1_mult_thr   <= 6'd1;
      dec_pt_thr    <= '0;
      dec_n_thr     <= '0;
      dec_sum_thr   <= '0;
      dec_jet_thr   <= '0;
      dec_jet_n     <= '0;
    end else if (lb_we && lb_addr[15:12] == 4'h8) begin
      case (lb_addr[3:0])
        4'h0: role          <= role_e'(lb_wdata[1:0]);
        4'h1: prio_fwd      <= lb_wdata[NIO-1:0];
        4'h2: track_ch_base <= lb_wdata[CH_W-1:0];
        4'h3: link_eoe_ch   <= lb_wdata[CH_W-1:0];
        4'h4: begin
          l1_kappa_mask <= lb_wdata[7:0];
          l1_mult_thr   <= lb_wdata[13:8];
        end
        4'h5: dec_pt_thr    <= lb_wdata[PT_W-1:0];
        4'h6: dec_n_thr     <= lb_wdata[5:0];
        4'h7: dec_sum_thr   <= lb_wdata[PT_W+5:0];
        4'h8: l3_ch         <= lb_wdata[CH_W-1:0];
        4'h9: dec_jet_thr   <= lb_wdata[PT_W+5:0];
        4'hA: dec_jet_n     <= lb_wdata[4:0];
        default: ;
      endcase
    end
  end

  // ---------------- merger and router ----------------
  localparam int unsigned NMRG = NIO + 1;   // I/O cards and control port
  logic [NMRG-1:0]  m_valid, m_ready;
  msg_t             m_data [NMRG];
  logic             s_valid, s_ready;
  msg_t             s_data;
  logic [NPORT-1:0] r_valid, r_ready;
  msg_t             r_data [NPORT];
  logic             app_out_valid, app_out_ready;
  msg_t             app_out_data;

  stream_merger #(.NIN(NMRG)) u_merger (
    .clk, .rst, .in_valid(m_valid), .in_ready(m_ready), .in_data(m_data),
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data));

  logic [1:0] ri_valid, ri_ready;
  msg_t       ri_data [2];
  assign ri_valid   = {s_valid, app_out_valid};
  assign ri_data[0] = app_out_data;
  assign ri_data[1] = s_data;
  assign app_out_ready = ri_ready[0];
  assign s_ready       = ri_ready[1];

  localparam logic [31:0][DW-1:0] STATIC_CTRL = {32{DW'(CTRL)}};
  msg_router #(.NIN(2), .NOUT(NPORT), .NSTATIC(32), .STATIC_DEST(STATIC_CTRL)) u_router (
    .clk, .rst,
    .cfg_we(lb_we && lb_addr[15:12] == 4'h0), .cfg_ch(lb_addr[CH_W-1:0]),
    .cfg_dest(lb_wdata[DW-1:0]), .cfg_valid(lb_wdata[31]),
    .in_valid(ri_valid), .in_ready(ri_ready), .in_data(ri_data),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data),
    .drop_count(route_drops));

  // ---------------- I/O cards ----------------
  for (genvar i = 0; i < NIO; i++) begin : g_io
    if (DUAL_RX[i]) begin : g_dual
      // merger variant: transmitter replaced by a second receiver; words the
      // router sends to this card have nowhere to go and are discarded
      logic [1:0] d_clk, d_rst, d_valid, d_ovf;
      msg_t       d_data [2];
      assign d_clk   = {lvds_rx2_clk[i],   lvds_rx_clk[i]};
      assign d_rst   = {lvds_rx2_rst[i],   lvds_rx_rst[i]};
      assign d_valid = {lvds_rx2_valid[i], lvds_rx_valid[i]};
      assign d_data[0] = lvds_rx_data[i];
      assign d_data[1] = lvds_rx2_data[i];
      io_card_dual_rx u_io (
        .clk, .rst,
        .rx_clk(d_clk), .rx_rst(d_rst), .rx_valid(d_valid), .rx_data(d_data),
        .rx_overflow(d_ovf),
        .mb_out_valid(m_valid[i]), .mb_out_ready(m_ready[i]), .mb_out_data(m_data[i]));
      assign lvds_rx_overflow[i]  = d_ovf[0];
      assign lvds_rx2_overflow[i] = d_ovf[1];
      assign lvds_tx_valid[i]     = 1'b0;
      assign lvds_tx_data[i]      = '0;
      assign r_ready[i]           = 1'b1;
    end else begin : g_std
      io_card_ctrl u_io (
        .clk, .rst,
        .rx_clk(lvds_rx_clk[i]), .rx_rst(lvds_rx_rst[i]),
        .rx_valid(lvds_rx_valid[i]), .rx_data(lvds_rx_data[i]),
        .rx_overflow(lvds_rx_overflow[i]),
        .tx_valid(lvds_tx_valid[i]), .tx_data(lvds_tx_data[i]),
        .mb_out_valid(m_valid[i]), .mb_out_ready(m_ready[i]), .mb_out_data(m_data[i]),
        .mb_in_valid(r_valid[i]), .mb_in_ready(r_ready[i]), .mb_in_data(r_data[i]),
        .prio_forward(prio_fwd[i]),
        .cfg_we(lb_we && lb_addr[15:12] == 4'(i + 1)), .cfg_ch(lb_addr[CH_W-1:0]),
        .cfg_dest(lb_wdata[0]), .cfg_valid(lb_wdata[31]));
      assign lvds_rx2_overflow[i] = 1'b0;
    end
  end

  // ---------------- control port ----------------
  assign m_valid[NIO]   = ctrl_in_valid;
  assign ctrl_in_ready  = m_ready[NIO];
  assign m_data[NIO]    = ctrl_in_data;
  assign ctrl_out_valid = r_valid[CTRL];
  assign r_ready[CTRL]  = ctrl_out_ready;
  assign ctrl_out_data  = r_data[CTRL];

  // ---------------- user logic ----------------
  logic l2l_in_ready, l2l_out_valid, l1_in_ready, dec_in_ready, dec_out_valid;
  msg_t l2l_out_data, dec_out_data;

  l2_linker #(.DEPTH(CAM_DEPTH)) u_l2_linker (
    .clk, .rst,
    .in_valid(r_valid[APP] && role == ROLE_L2_LINKER), .in_ready(l2l_in_ready),
    .in_data(r_data[APP]),
    .out_valid(l2l_out_valid), .out_ready(app_out_ready && role == ROLE_L2_LINKER),
    .out_data(l2l_out_data),
    .track_ch_base, .eoe_ch(link_eoe_ch),
    .n_links(l2_n_links), .link_overflow(l2_link_overflow), .seg_dropped(), .busy());

  l1_linker u_l1_linker (
    .clk, .rst,
    .in_valid(r_valid[APP] && role == ROLE_L1_LINKER), .in_ready(l1_in_ready),
    .in_data(r_data[APP]),
    .kappa_mask(l1_kappa_mask), .mult_thr(l1_mult_thr),
    .trig_valid(l1_trig_valid), .trig_mult(l1_trig_mult), .trig_b2b(l1_trig_b2b),
    .n_peaks(), .n_high());

  l2_decider u_l2_decider (
    .clk, .rst,
    .in_valid(r_valid[APP] && role == ROLE_L2_DECIDER), .in_ready(dec_in_ready),
    .in_data(r_data[APP]),
    .out_valid(dec_out_valid), .out_ready(app_out_ready && role == ROLE_L2_DECIDER),
    .out_data(dec_out_data),
    .pt_thr(dec_pt_thr), .n_thr(dec_n_thr), .sum_thr(dec_sum_thr),
    .jet_thr(dec_jet_thr), .jet_n(dec_jet_n), .l3_ch,
    .dec_valid(l2_dec_valid), .dec_accept(l2_dec_accept),
    .n_tracks(), .n_above(), .pt_sum(), .n_jets(), .track_overflow());

  always_comb begin
    unique case (role)
      ROLE_L2_LINKER:  r_ready[APP] = l2l_in_ready;
      ROLE_L1_LINKER:  r_ready[APP] = l1_in_ready;
      ROLE_L2_DECIDER: r_ready[APP] = dec_in_ready;
      default:         r_ready[APP] = 1'b1;   // merger role: no user logic, words are sunk
    endcase
    unique case (role)
      ROLE_L2_LINKER:  begin app_out_valid = l2l_out_valid; app_out_data = l2l_out_data; end
      ROLE_L2_DECIDER: begin app_out_valid = dec_out_valid; app_out_data = dec_out_data; end
      default:         begin app_out_valid = 1'b0;          app_out_data = '0;           end
    endcase
  end
endmodule
