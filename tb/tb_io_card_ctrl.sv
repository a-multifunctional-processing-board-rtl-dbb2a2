// tb_io_card_ctrl: self-checking test of the I/O card controller.
//
// LVDS words arrive on an asynchronous receive clock; channels with the
// table bit set must be forwarded to the LVDS output, the others must reach
// the main board, in order. Main-board words must reach the LVDS output in
// order. With both sources busy the priority bit decides who goes first
// (checked in both settings), and a burst with the main board blocked must
// overflow the receive FIFO and be flagged.
module tb_io_card_ctrl;
  import ftt_pkg::*;
  logic clk = 0, rst = 1, rx_clk = 0, rx_rst = 1;
  always #4.8 clk = ~clk;
  always #5.3 rx_clk = ~rx_clk;
  logic rx_valid, rx_overflow, tx_valid;
  msg_t rx_data, tx_data;
  logic mb_out_valid, mb_out_ready, mb_in_valid, mb_in_ready;
  msg_t mb_out_data, mb_in_data;
  logic prio_forward, cfg_we, cfg_dest, cfg_valid;
  chan_t cfg_ch;
  int checks = 0, failures = 0;

  io_card_ctrl dut (.*);

  msg_t q_mb [$], q_tx_fwd [$], q_tx_mb [$];
  int n_fwd_first = 0, n_mb_first = 0, n_ovf = 0;

  function automatic bit fwd_ch(chan_t c);
    return c >= 256;
  endfunction

  always_ff @(posedge clk) if (!rst) begin
    if (mb_out_valid && mb_out_ready) begin
      checks++;
      if (q_mb.size() == 0 || q_mb[0] !== mb_out_data) begin failures++; $display("FAIL: mb_out %h", mb_out_data); end
      else void'(q_mb.pop_front());
    end
    if (tx_valid) begin
      checks++;
      if (q_tx_fwd.size() != 0 && q_tx_fwd[0] === tx_data) void'(q_tx_fwd.pop_front());
      else if (q_tx_mb.size() != 0 && q_tx_mb[0] === tx_data) void'(q_tx_mb.pop_front());
      else begin failures++; $display("FAIL: tx %h", tx_data); end
    end
  end
  always_ff @(posedge rx_clk) if (rx_overflow) n_ovf++;

  int rx_seq = 0, mb_seq = 0;
  logic rx_on = 0, mb_on = 0;
  logic drop_expected = 0;
  always @(negedge rx_clk) begin
    rx_valid = rx_on && (drop_expected || $urandom_range(0, 1) == 0);
    if (rx_valid) begin
      rx_data = {chan_t'($urandom_range(32, drop_expected ? 255 : 511)), 39'(rx_seq)};
      rx_seq++;
    end
  end
  always_ff @(posedge rx_clk) if (rx_valid && !drop_expected) begin
    if (fwd_ch(msg_chan(rx_data))) q_tx_fwd.push_back(rx_data); else q_mb.push_back(rx_data);
  end

  always_ff @(posedge clk) begin
    if (mb_in_valid && mb_in_ready) begin
      q_tx_mb.push_back(mb_in_data);
      mb_seq <= mb_seq + 1;
    end
    if (!mb_in_valid || mb_in_ready) begin
      mb_in_valid <= mb_on && ($urandom_range(0, 1) == 0);
      mb_in_data  <= {chan_t'(7), 39'((mb_in_valid && mb_in_ready) ? mb_seq + 1 : mb_seq)};
    end
  end

  // priority: when a forward word and a main-board word compete, the next
  // transmitted word must come from the side prio_forward names
  logic conflict_q = 0, conflict_pf = 0;
  int n_conf [2];
  always_ff @(posedge clk) if (!rst) begin
    conflict_q  <= dut.fwd_req && dut.m_valid;
    conflict_pf <= prio_forward;
    if (dut.fwd_req && dut.m_valid) n_conf[prio_forward] = n_conf[prio_forward] + 1;
    if (conflict_q) begin
      checks++;
      if (!tx_valid || ((msg_chan(tx_data) == chan_t'(7)) == conflict_pf)) begin
        failures++; $display("FAIL: priority %b ignored", conflict_pf);
      end
    end
  end


  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rx_valid = 0; rx_data = 0; mb_in_valid = 0; mb_in_data = 0; mb_out_ready = 1;
    prio_forward = 1; cfg_we = 0; cfg_ch = 0; cfg_dest = 0; cfg_valid = 0;
    repeat (4) @(posedge clk); rst = 0; rx_rst = 0;
    @(negedge clk);
    for (int c = 256; c < 512; c++) begin
      cfg_we = 1; cfg_ch = chan_t'(c); cfg_dest = 1; cfg_valid = 1;
      @(negedge clk);
    end
    for (int c = 32; c < 256; c++) begin
      cfg_we = 1; cfg_ch = chan_t'(c); cfg_dest = 0; cfg_valid = 1;
      @(negedge clk);
    end
    cfg_we = 0;
    n_conf[0] = 0; n_conf[1] = 0;
    n_ovf = 0;
    // mixed traffic, once with each priority setting
    for (int pass = 0; pass < 2; pass++) begin
    prio_forward = (pass == 0);
    fork
      begin rx_on = 1; repeat (300) @(posedge rx_clk); rx_on = 0; end
      begin repeat (50) @(posedge clk); mb_on = 1; repeat (150) @(posedge clk); mb_on = 0; end
      begin repeat (300) begin @(negedge clk); mb_out_ready = ($urandom_range(0, 2) != 0); end end
    join
    mb_out_ready = 1;
    repeat (100) @(posedge clk);
    end
    checks++;
    if (n_conf[0] == 0 || n_conf[1] == 0) begin failures++; $display("FAIL: no competition seen"); end
    $display("competing cycles: prio0 %0d prio1 %0d", n_conf[0], n_conf[1]);
    checks++;
    if (q_mb.size() || q_tx_fwd.size() || q_tx_mb.size()) begin
      failures++; $display("FAIL: left %0d %0d %0d", q_mb.size(), q_tx_fwd.size(), q_tx_mb.size());
    end
    checks++;
    if (n_ovf != 0) begin failures++; $display("FAIL: overflow in normal traffic"); end
    // overflow: main board blocked, long burst to the main board
    mb_out_ready = 0;
    drop_expected = 1;
    rx_on = 1; repeat (60) @(posedge rx_clk); rx_on = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL: no overflow flagged"); end
    $display("overflow words: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
