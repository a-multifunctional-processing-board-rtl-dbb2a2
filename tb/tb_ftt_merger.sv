// tb_ftt_merger: end-to-end test of the board in its merger-card role.
//
// A merger board collects the track segments of six front-end streams and
// sends them on as one stream to a linker. Here the board is built with
// cards 0 and 1 as the two-receiver variant (DUAL_RX = 4'b0011). Cards 0
// and 1 then give four input streams and cards 2 and 3 one each, six in
// all. The board stays in its reset role (merger only). The router table
// sends the six streams' channels 32..37 out through card 3's transmitter.
// Every stream sends 300 numbered segments at random times on its own LVDS
// clock. Each stream's words must all leave card 3 in order. No receive
// FIFO may overflow. All six streams must be seen in the output, and the
// output must switch between streams at least 300 times.
module tb_ftt_merger;
  import ftt_pkg::*;
  localparam int NIO = 4;
  localparam int NS  = 6;     // input streams
  localparam int NW  = 300;   // words per stream
  logic clk = 0, rst = 1;
  always #4.8 clk = ~clk;                // 104 MHz
  logic [NIO-1:0] lvds_rx_clk = '0, lvds_rx_rst = '1, lvds_rx_valid = '0, lvds_tx_valid, lvds_rx_overflow;
  logic [NIO-1:0] lvds_rx2_clk = '0, lvds_rx2_rst = '1, lvds_rx2_valid = '0, lvds_rx2_overflow;
  msg_t lvds_rx_data [NIO] = '{default: '0}, lvds_rx2_data [NIO] = '{default: '0};
  msg_t lvds_tx_data [NIO];
  logic ctrl_in_valid = 0, ctrl_in_ready, ctrl_out_valid, ctrl_out_ready = 1;
  msg_t ctrl_in_data = '0, ctrl_out_data;
  logic lb_we = 0;
  logic [15:0] lb_addr = '0;
  logic [31:0] lb_wdata = '0;
  logic l1_trig_valid, l1_trig_mult, l1_trig_b2b, l2_dec_valid, l2_dec_accept;
  logic [6:0] l2_n_links;
  logic l2_link_overflow;
  logic [15:0] route_drops;
  int checks = 0, failures = 0;

  ftt_board #(.DUAL_RX(4'b0011)) dut (.*);

  // stream s: 0 card0 rx, 1 card0 rx2, 2 card1 rx, 3 card1 rx2, 4 card2 rx, 5 card3 rx
  bit src_on = 0;
  int sent [NS];
  for (genvar i = 0; i < NIO; i++) begin : g_rx
    always #(5.0 + 0.2 * i) lvds_rx_clk[i] = ~lvds_rx_clk[i];
    always #(5.1 + 0.2 * i) lvds_rx2_clk[i] = ~lvds_rx2_clk[i];
    localparam int S1 = (i < 2) ? 2 * i : i + 2;
    localparam int S2 = 2 * i + 1;
    always @(posedge lvds_rx_clk[i]) begin
      if (lvds_rx_valid[i]) sent[S1] = sent[S1] + 1;
      lvds_rx_valid[i] <= src_on && sent[S1] + int'(lvds_rx_valid[i]) < NW &&
                          $urandom_range(0, 7) == 0;
      lvds_rx_data[i]  <= {chan_t'(32 + S1), 39'(sent[S1])};
    end
    if (i < 2) begin : g_rx2
      always @(posedge lvds_rx2_clk[i]) begin
        if (lvds_rx2_valid[i]) sent[S2] = sent[S2] + 1;
        lvds_rx2_valid[i] <= src_on && sent[S2] + int'(lvds_rx2_valid[i]) < NW &&
                             $urandom_range(0, 7) == 0;
        lvds_rx2_data[i]  <= {chan_t'(32 + S2), 39'(sent[S2])};
      end
    end
  end

  // output of card 3: each stream's words in order
  int next_exp [NS];
  int n_out = 0, n_switch = 0, last_s = -1, n_ovf = 0;
  always @(posedge clk) if (!rst) begin
    if (|lvds_rx_overflow || |lvds_rx2_overflow) n_ovf++;
    if (lvds_tx_valid[3]) begin
      int s, n;
      s = int'(msg_chan(lvds_tx_data[3])) - 32;
      n = int'(lvds_tx_data[3][38:0]);
      checks++;
      if (s < 0 || s >= NS || n != next_exp[s]) begin
        failures++; $display("FAIL: stream %0d word %0d", s, n);
      end else begin
        next_exp[s] = n + 1;
        if (last_s >= 0 && s != last_s) n_switch++;
        last_s = s;
      end
      n_out++;
    end
    for (int i = 0; i < 3; i++) if (lvds_tx_valid[i]) begin
      failures++; $display("FAIL: word on card %0d", i);
    end
  end

  task automatic lb(int addr, int data);
    @(negedge clk);
    lb_we = 1; lb_addr = 16'(addr); lb_wdata = 32'(data);
    @(negedge clk);
    lb_we = 0;
  endtask

  initial begin
    #3000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0; lvds_rx_rst = '0; lvds_rx2_rst = '0;
    for (int s = 0; s < NS; s++) lb(32 + s, 32'h8000_0003);   // streams -> card 3
    src_on = 1;
    while (n_out < NS * NW && $time < 2900000) @(posedge clk);
    repeat (50) @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (next_exp[s] != NW || sent[s] != NW) begin
        failures++; $display("FAIL: stream %0d delivered %0d of %0d sent", s, next_exp[s], sent[s]);
      end
    end
    checks++;
    if (n_ovf != 0) begin failures++; $display("FAIL: receive overflow"); end
    checks++;
    if (n_switch < 300) begin failures++; $display("FAIL: streams switched only %0d times", n_switch); end
    checks++;
    if (route_drops != 0) begin failures++; $display("FAIL: %0d words dropped", route_drops); end
    $display("merged %0d words from %0d streams, %0d stream switches", n_out, NS, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
