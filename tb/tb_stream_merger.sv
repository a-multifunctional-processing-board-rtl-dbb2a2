// tb_stream_merger: self-checking test of the six-input merger.
//
// Six random producers send tagged words (input number and sequence
// number) with random gaps while the consumer applies random back-pressure.
// Every word must come out exactly once, in order per input; the test also
// checks that a stalled output fills the FIFOs and deasserts in_ready
// (stall seen), and that with all inputs busy the output takes one word per
// cycle in round-robin order.
module tb_stream_merger;
  import ftt_pkg::*;
  localparam int NIN = 6, NPER = 200;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [NIN-1:0] in_valid, in_ready;
  msg_t in_data [NIN];
  logic out_valid, out_ready;
  msg_t out_data;
  int checks = 0, failures = 0;

  stream_merger #(.NIN(NIN), .FIFO_DEPTH(16)) dut (.*);

  int sent [NIN], rcvd [NIN];
  int stalls = 0;
  logic throttle = 1;
  logic hold_out = 0;

  // producers: a word is held until taken
  always_ff @(posedge clk) begin
    if (rst) in_valid <= '0;
    else
      for (int i = 0; i < NIN; i++) begin
        int s;
        s = sent[i];
        if (in_valid[i] && in_ready[i]) s = s + 1;
        if (in_valid[i] && !in_ready[i]) stalls++;
        sent[i] = s;
        if (!in_valid[i] || in_ready[i]) begin
          in_valid[i] <= (s < NPER) && (!throttle || $urandom_range(0, 2) == 0);
          in_data[i]  <= {CH_W'(i), 39'(s)};
        end
      end
  end

  always @(negedge clk) out_ready = !hold_out && (!throttle || $urandom_range(0, 3) != 0);

  int last_src = -1, rr_checks = 0;
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) begin
    int src, seq;
    src = int'(out_data[47:39]);
    seq = int'(out_data[38:0]);
    checks++;
    if (src >= NIN || seq != rcvd[src]) begin
      failures++;
      $display("FAIL: src %0d seq %0d exp %0d", src, seq, rcvd[src]);
    end else rcvd[src] = rcvd[src] + 1;
  end

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < NIN; i++) begin sent[i] = 0; rcvd[i] = 0; end
    in_valid = '0; out_ready = 0;
    repeat (3) @(posedge clk); rst = 0;
    // phase 1: random traffic with a 200-cycle output stall in the middle
    repeat (300) @(posedge clk);
    hold_out = 1;
    repeat (200) @(posedge clk);
    hold_out = 0;
    // phase 2: everyone busy, consumer always ready: one word per cycle
    throttle = 0;
    begin
      int n0, t0;
      @(posedge clk);
      n0 = 0; for (int i = 0; i < NIN; i++) n0 += rcvd[i];
      t0 = 0;
      repeat (60) @(posedge clk);
      t0 = 0; for (int i = 0; i < NIN; i++) t0 += rcvd[i];
      checks++;
      if (t0 - n0 != 60 && t0 < NIN * NPER) begin
        failures++; $display("FAIL: throughput %0d words in 60 cycles", t0 - n0);
      end
    end
    wait (rcvd[0] + rcvd[1] + rcvd[2] + rcvd[3] + rcvd[4] + rcvd[5] == NIN * NPER);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL: extra word"); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no stall seen"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
