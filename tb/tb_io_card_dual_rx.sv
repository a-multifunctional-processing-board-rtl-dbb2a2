// tb_io_card_dual_rx: self-checking test of the two-receiver I/O card.
//
// Two LVDS receivers run on two unrelated clocks (about 94 and 82 MHz). Each
// sends numbered words on its own channel at about a third of its clock
// rate. The main board takes words with random back-pressure. Every word of
// each stream must reach the main board exactly once and in order. The two
// streams must interleave at least 50 times, so the merge is shown to serve
// both inputs. Then the main board stops taking words and receiver 0
// sends a continuous burst. Its FIFO must overflow and flag it, receiver 1
// must not flag, and after the main board resumes the words kept before the
// overflow must come out in order.
module tb_io_card_dual_rx;
  import ftt_pkg::*;
  logic clk = 0, rst = 1;
  always #4.8 clk = ~clk;
  logic [1:0] rx_clk = '0, rx_rst = '1, rx_valid = '0, rx_overflow;
  always #5.3 rx_clk[0] = ~rx_clk[0];
  always #6.1 rx_clk[1] = ~rx_clk[1];
  msg_t rx_data [2];
  logic mb_out_valid, mb_out_ready;
  msg_t mb_out_data;
  int checks = 0, failures = 0;

  io_card_dual_rx dut (.*);

  int  next_exp [2];
  int  sent [2];
  int  n_got = 0, n_switch = 0, last_k = -1;
  int  n_ovf [2];
  bit  rx_on [2];
  bit  burst = 0;

  for (genvar k = 0; k < 2; k++) begin : g_src
    always @(posedge rx_clk[k]) begin
      if (rx_valid[k]) sent[k] = sent[k] + 1;
      if (rx_overflow[k]) n_ovf[k] = n_ovf[k] + 1;
      rx_valid[k] <= rx_on[k] && (burst || $urandom_range(0, 2) == 0);
      rx_data[k]  <= {chan_t'(40 + k), 39'(sent[k])};
    end
  end

  // Each source numbers its words 0, 1, 2, ... in the low bits, on channel
  // 40 + k; the checker expects the next number of each stream.
  always @(posedge clk) if (!rst && mb_out_valid && mb_out_ready) begin
    int k, n;
    k = int'(msg_chan(mb_out_data)) - 40;
    n = int'(mb_out_data[38:0]);
    checks++;
    if (k < 0 || k > 1 || n != next_exp[k]) begin
      failures++; $display("FAIL: got stream %0d word %0d", k, n);
    end else begin
      next_exp[k] = n + 1;
      if (last_k >= 0 && k != last_k) n_switch++;
      last_k = k;
    end
    n_got++;
  end

  bit mb_on = 1;
  always @(posedge clk) mb_out_ready <= mb_on && ($urandom_range(0, 3) != 0);

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst = 0; rx_rst = '0;
    repeat (4) @(posedge clk);
    rx_on[0] = 1; rx_on[1] = 1;
    repeat (3000) @(posedge clk);
    rx_on[0] = 0; rx_on[1] = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (next_exp[0] != sent[0] || next_exp[1] != sent[1] || sent[0] < 500 || sent[1] < 500) begin
      failures++; $display("FAIL: delivered %0d/%0d %0d/%0d", next_exp[0], sent[0], next_exp[1], sent[1]);
    end
    checks++;
    if (n_switch < 50) begin failures++; $display("FAIL: streams interleaved only %0d times", n_switch); end
    checks++;
    if (n_ovf[0] != 0 || n_ovf[1] != 0) begin failures++; $display("FAIL: overflow at normal rate"); end

    // overflow phase: main board stopped, receiver 0 bursts 60 words
    mb_on = 0;
    @(posedge clk);
    @(posedge rx_clk[0]);
    burst = 1; rx_on[0] = 1;
    repeat (60) @(posedge rx_clk[0]);
    rx_on[0] = 0;
    repeat (4) @(posedge rx_clk[0]);
    burst = 0;
    checks++;
    if (n_ovf[0] == 0 || n_ovf[1] != 0) begin
      failures++; $display("FAIL: overflow flags %0d %0d", n_ovf[0], n_ovf[1]);
    end
    // words kept: receive FIFO + merger FIFO + output register, in order
    // (checked word by word above); later words were dropped
    mb_on = 1;
    repeat (200) @(posedge clk);
    checks++;
    if (next_exp[0] - 1 <= 0 || next_exp[0] >= sent[0]) begin
      failures++; $display("FAIL: after overflow delivered up to %0d of %0d", next_exp[0], sent[0]);
    end
    $display("words %0d, interleaves %0d, overflow pulses %0d", n_got, n_switch, n_ovf[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
