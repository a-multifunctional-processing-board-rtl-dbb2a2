// tb_ftt_board: end-to-end test of the board's data controller at its
// default parameters (four I/O cards, 64 segments per group, 100 CAMs).
//
// The board is configured over the local bus, then:
//  1. L2 linker role: an event of four tracks (four groups each), one
//     two-group track and noise arrives over the LVDS link of I/O card 0 on
//     its own clock; the linked segments must leave over the LVDS link of
//     card 1 (routing by channel number = track number), in order, followed
//     by the end-of-event word. While the linker works, the next event
//     arrives and must stall.
//  2. A second event of 50 two-group tracks: 48 links and the link
//     overflow flag.
//  3. Routing: a word on card 2 whose channel is marked "forward" in the
//     card's own table leaves on card 2's transmitter without entering the
//     main board (daisy-chain bypass); a static-partition channel reaches
//     the control port without any programming; an unprogrammed channel is
//     dropped and counted.
//  4. Role switch to L1 linker: two back-to-back tracks give the L1
//     back-to-back and multiplicity trigger.
//  5. Role switch to L2 decider: fitted tracks from the control port give a
//     positive L2 decision and the tracks are sent to L3 over card 3; a
//     second event is accepted by the jet criterion alone (two tracks in
//     one phi sector) after it is programmed over the local bus.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_ftt_board;
  import ftt_pkg::*;
  localparam int NIO = 4;
  logic clk = 0, rst = 1;
  always #4.8 clk = ~clk;                // 104 MHz
  logic [NIO-1:0] lvds_rx_clk = '0, lvds_rx_rst, lvds_rx_valid, lvds_tx_valid, lvds_rx_overflow;
  msg_t lvds_rx_data [NIO], lvds_tx_data [NIO];
  // second receivers exist only on merger-variant cards: unused here
  logic [NIO-1:0] lvds_rx2_clk = '0, lvds_rx2_rst = '1, lvds_rx2_valid = '0, lvds_rx2_overflow;
  msg_t lvds_rx2_data [NIO] = '{default: '0};
  logic ctrl_in_valid, ctrl_in_ready, ctrl_out_valid, ctrl_out_ready;
  msg_t ctrl_in_data, ctrl_out_data;
  logic lb_we;
  logic [15:0] lb_addr;
  logic [31:0] lb_wdata;
  logic l1_trig_valid, l1_trig_mult, l1_trig_b2b, l2_dec_valid, l2_dec_accept;
  logic [6:0] l2_n_links;
  logic l2_link_overflow;
  logic [15:0] route_drops;
  int checks = 0, failures = 0;

  ftt_board dut (.*);

  // ---------------- LVDS receive side: one clock per card ----------------
  msg_t rxq [NIO][$];
  for (genvar i = 0; i < NIO; i++) begin : g_rx
    always #(5.0 + 0.1 * i) lvds_rx_clk[i] = ~lvds_rx_clk[i];
    always @(negedge lvds_rx_clk[i]) begin
      lvds_rx_valid[i] = (rxq[i].size() != 0);
      if (rxq[i].size() != 0) lvds_rx_data[i] = rxq[i].pop_front();
    end
  end

  msg_t txq [NIO][$];
  msg_t exp [$];
  msg_t ctrlq [$];
  always_ff @(posedge clk) begin
    for (int i = 0; i < NIO; i++) if (lvds_tx_valid[i]) txq[i].push_back(lvds_tx_data[i]);
    if (ctrl_out_valid && ctrl_out_ready) ctrlq.push_back(ctrl_out_data);
  end

  // mechanism counters
  int n_stall = 0, n_links = 0, n_link_ovf = 0, n_forward = 0, n_static = 0, n_drop = 0;
  int n_l1trig = 0, n_l2acc = 0, n_switch = 0, n_ovf_rx = 0;
  always_ff @(posedge clk) begin
    if (dut.r_valid[NIO] && !dut.r_ready[NIO]) n_stall++;
    if (l1_trig_valid && l1_trig_b2b && l1_trig_mult) n_l1trig++;
    if (l2_dec_valid && l2_dec_accept) n_l2acc++;
    if (|lvds_rx_overflow) n_ovf_rx++;
  end

  task automatic lb(int addr, int data);
    @(negedge clk);
    lb_we = 1; lb_addr = 16'(addr); lb_wdata = 32'(data);
    @(negedge clk);
    lb_we = 0;
  endtask
  task automatic route(int ch, int dest);   lb(ch, 32'h8000_0000 | dest); endtask
  task automatic io_route(int card, int ch, int fwd); lb(32'h1000 * (card + 1) + ch, 32'h8000_0000 | fwd); endtask
  task automatic set_role(int r); lb(16'h8000, r); n_switch++; endtask

  function automatic msg_t seg(int g, int k, int p, int info);
    segment_t b;
    b.group = 2'(g); b.kappa = 6'(k); b.phi = 10'(p); b.info = 18'(info);
    return make_msg(chan_t'(40), MT_SEGMENT, b);
  endfunction
  function automatic msg_t trk(int id, int g, int k, int p, int info, bit last);
    segment_t b;
    b.group = 2'(g); b.kappa = 6'(k); b.phi = 10'(p); b.info = 18'(info);
    return make_msg(chan_t'(64 + id), last ? MT_TRKLAST : MT_TRKSEG, b);
  endfunction

  task automatic send_ctrl(msg_t m);
    @(negedge clk);
    ctrl_in_valid = 1; ctrl_in_data = m;
    @(posedge clk); while (!ctrl_in_ready) @(posedge clk);
    @(negedge clk);
    ctrl_in_valid = 0;
  endtask

  // wait until card c has transmitted as many words as expected, then compare
  task automatic check_tx(string what, int c, int limit);
    int n;
    n = 0;
    while (txq[c].size() < exp.size() && n < limit) begin @(posedge clk); n++; end
    checks++;
    if (txq[c].size() < exp.size()) begin
      failures++; $display("FAIL %s: %0d words, expected %0d", what, txq[c].size(), exp.size());
    end
    for (int i = 0; i < exp.size() && i < txq[c].size(); i++) begin
      checks++;
      if (txq[c][i] !== exp[i]) begin failures++; $display("FAIL %s word %0d: %h exp %h", what, i, txq[c][i], exp[i]); end
    end
    for (int i = 0; i < exp.size() && txq[c].size() != 0; i++) void'(txq[c].pop_front());
  endtask

  initial begin
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    lvds_rx_rst = '1; lvds_rx_valid = '0;
    for (int i = 0; i < NIO; i++) lvds_rx_data[i] = '0;
    ctrl_in_valid = 0; ctrl_in_data = '0; ctrl_out_ready = 1;
    lb_we = 0; lb_addr = '0; lb_wdata = '0;
    repeat (5) @(posedge clk);
    rst = 0; lvds_rx_rst = '0;
    repeat (2) @(posedge clk);

    // ---------------- configuration ----------------
    route(40, NIO);                                    // segments -> user logic
    route(41, NIO);                                    // end of event -> user logic
    route(50, NIO);                                    // fitted tracks -> user logic
    for (int c = 64; c < 64 + 48; c++) route(c, 1);    // linked tracks -> card 1 (fitters)
    route(112, 1);                                     // linker end of event -> card 1
    route(120, 3);                                     // L3 words -> card 3
    io_route(2, 200, 1);                               // card 2 forwards channel 200
    set_role(0);                                       // L2 linker

    // ---------------- 1. L2 linking ----------------
    for (int t = 0; t < 4; t++) begin
      int k, p;
      k = 5 + 8 * t; p = 100 + 150 * t;
      rxq[0].push_back(seg(0, k, p, 10 * t));
      rxq[0].push_back(seg(1, k, p + 1, 10 * t + 1));
      rxq[0].push_back(seg(2, k + 1, p - 1, 10 * t + 2));
      rxq[0].push_back(seg(3, k - 1, p + 1, 10 * t + 3));
      exp.push_back(trk(t, 0, k, p, 10 * t, 0));
      exp.push_back(trk(t, 1, k, p + 1, 10 * t + 1, 0));
      exp.push_back(trk(t, 2, k + 1, p - 1, 10 * t + 2, 0));
      exp.push_back(trk(t, 3, k - 1, p + 1, 10 * t + 3, 1));
    end
    rxq[0].push_back(seg(2, 30, 630, 500));             // two-group track (groups 2, 3)
    rxq[0].push_back(seg(3, 31, 631, 501));
    rxq[0].push_back(seg(1, 20, 480, 600));             // noise
    rxq[0].push_back(make_msg(chan_t'(41), MT_EOE, '0));
    exp.push_back(trk(4, 2, 30, 630, 500, 0));
    exp.push_back(trk(4, 3, 31, 631, 501, 1));
    exp.push_back(make_msg(chan_t'(112), MT_EOE, '0));
    // the next event follows at once, from the control port (which has
    // back-pressure, unlike the LVDS link), and must wait for the linker
    fork
      begin
        wait (dut.u_l2_linker.busy);
        for (int t = 0; t < 50; t++) begin
          send_ctrl(seg(0, t % 40, 12 * t, t));
          send_ctrl(seg(1, t % 40, 12 * t + 1, 100 + t));
        end
        send_ctrl(make_msg(chan_t'(41), MT_EOE, '0));
      end
    join_none
    check_tx("event 1", 1, 20000);
    foreach (exp[i]) if (msg_type(exp[i]) == MT_TRKLAST) n_links++;
    checks++;
    if (n_links != 5) begin failures++; $display("FAIL: %0d links", n_links); end

    // ---------------- 2. link overflow ----------------
    exp.delete();
    wait (!ctrl_in_valid);
    for (int t = 0; t < 48; t++) begin
      exp.push_back(trk(t, 0, t % 40, 12 * t, t, 0));
      exp.push_back(trk(t, 1, t % 40, 12 * t + 1, 100 + t, 1));
    end
    exp.push_back(make_msg(chan_t'(112), MT_EOE, '0));
    check_tx("event 2", 1, 20000);
    checks++;
    if (l2_n_links != 7'd48 || !l2_link_overflow) begin failures++; $display("FAIL: overflow not flagged"); end
    else begin n_link_ovf++; n_links += 48; end

    // ---------------- 3. routing mechanisms ----------------
    txq[2].delete(); ctrlq.delete();
    rxq[2].push_back(make_msg(chan_t'(200), MT_SEGMENT, 36'h123456789));
    rxq[3].push_back(make_msg(chan_t'(5), MT_DECISION, 36'h0abcdef01));
    rxq[3].push_back(make_msg(chan_t'(300), MT_SEGMENT, 36'h1));
    repeat (100) @(posedge clk);
    checks++;
    if (txq[1].size() != 0) begin failures++; $display("FAIL: %0d extra words on card 1", txq[1].size()); end
    checks++;
    if (txq[2].size() == 1 && txq[2][0] === make_msg(chan_t'(200), MT_SEGMENT, 36'h123456789)) n_forward++;
    else begin failures++; $display("FAIL: forward path"); end
    checks++;
    if (ctrlq.size() == 1 && ctrlq[0] === make_msg(chan_t'(5), MT_DECISION, 36'h0abcdef01)) n_static++;
    else begin failures++; $display("FAIL: static route"); end
    checks++;
    if (route_drops == 16'd1) n_drop++;
    else begin failures++; $display("FAIL: drops %0d", route_drops); end

    // ---------------- 4. L1 linker role ----------------
    set_role(1);
    for (int g = 0; g < 4; g++) rxq[0].push_back(seg(g, 17, 110, 0));
    for (int g = 0; g < 4; g++) rxq[0].push_back(seg(g, 22, 430, 0));
    rxq[0].push_back(make_msg(chan_t'(41), MT_EOE, '0));
    repeat (100) @(posedge clk);
    checks++;
    if (n_l1trig != 1) begin failures++; $display("FAIL: L1 trigger count %0d", n_l1trig); end

    // ---------------- 5. L2 decider role ----------------
    set_role(2);
    lb(16'h8005, 1000);      // pt threshold
    lb(16'h8006, 2);         // at least two tracks above it
    txq[3].delete(); exp.delete();
    for (int t = 0; t < 3; t++) begin
      fit_t f;
      f.pt = 16'(800 + 400 * t); f.phi = 10'(100 * t); f.theta = 10'(50 + t);
      send_ctrl(make_msg(chan_t'(50), MT_FIT, f));
      exp.push_back(make_msg(chan_t'(120), MT_FIT, f));
    end
    send_ctrl(make_msg(chan_t'(41), MT_EOE, '0));
    exp.push_back(make_msg(chan_t'(120), MT_DECISION, {35'd3, 1'b1}));
    check_tx("L3 words", 3, 2000);
    checks++;
    if (n_l2acc != 1) begin failures++; $display("FAIL: L2 accept count %0d", n_l2acc); end

    lb(16'h8006, 0);         // multiplicity criterion off
    lb(16'h8009, 2000);      // jet: sector pt sum of at least 2000
    lb(16'h800A, 1);         // one jet needed
    txq[3].delete(); exp.delete();
    for (int t = 0; t < 3; t++) begin
      fit_t f;
      f.pt = (t < 2) ? 16'(900 + 300 * t) : 16'd500;   // 900 + 1200 in sector 1
      f.phi = (t < 2) ? 10'(45 + 25 * t) : 10'd300; f.theta = 10'(60 + t);
      send_ctrl(make_msg(chan_t'(50), MT_FIT, f));
      exp.push_back(make_msg(chan_t'(120), MT_FIT, f));
    end
    send_ctrl(make_msg(chan_t'(41), MT_EOE, '0));
    exp.push_back(make_msg(chan_t'(120), MT_DECISION, {35'd3, 1'b1}));
    check_tx("L3 words (jet)", 3, 2000);
    checks++;
    if (n_l2acc != 2) begin failures++; $display("FAIL: L2 jet accept count %0d", n_l2acc); end

    // ---------------- mechanism coverage ----------------
    $display("mechanisms: stall %0d links %0d link-overflow %0d forward %0d static %0d drop %0d L1 %0d L2 %0d role-switch %0d",
             n_stall, n_links, n_link_ovf, n_forward, n_static, n_drop, n_l1trig, n_l2acc, n_switch);
    checks++;
    if (n_stall == 0 || n_links == 0 || n_link_ovf == 0 || n_forward == 0 || n_static == 0 ||
        n_drop == 0 || n_l1trig == 0 || n_l2acc == 0 || n_switch < 3) begin
      failures++; $display("FAIL: a mechanism never happened");
    end
    checks++;
    if (n_ovf_rx != 0) begin failures++; $display("FAIL: receive overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
