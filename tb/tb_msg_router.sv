// tb_msg_router: self-checking test of the routing stage (two inputs).
//
// Programs the dynamic partition of the table with destinations (every
// ninth channel left invalid), sends random messages on both inputs and
// checks that each arrives at the output its channel names, in order per
// input, that static channels (0..31, routed to output 5 here) work without
// programming, that unrouted words are dropped and counted, that a blocked
// output stalls its input while the other input keeps moving, and that
// input 0 wins when both inputs want the same free output.
module tb_msg_router;
  import ftt_pkg::*;
  localparam int NIN = 2, NOUT = 6, NPER = 1500;
  localparam logic [31:0][2:0] SD = {32{3'd5}};
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cfg_we, cfg_valid;
  chan_t cfg_ch;
  logic [2:0] cfg_dest;
  logic [NIN-1:0] in_valid, in_ready;
  msg_t in_data [NIN];
  logic [NOUT-1:0] out_valid, out_ready;
  msg_t out_data [NOUT];
  logic [15:0] drop_count;
  int checks = 0, failures = 0;

  msg_router #(.NIN(NIN), .NOUT(NOUT), .NSTATIC(32), .STATIC_DEST(SD)) dut (.*);

  int tbl [NCHAN];           // -1 = invalid
  msg_t q [NOUT][NIN][$];
  int exp_drops = 0, stalls = 0, sent [NIN], prio_seen = 0;
  logic block3 = 0, running = 0;

  always @(negedge clk)
    for (int o = 0; o < NOUT; o++) out_ready[o] = (o == 3 && block3) ? 1'b0 : ($urandom_range(0, 3) != 0);

  // producers: a word is held until taken; the expected queue is filled
  // when the word is taken
  always_ff @(posedge clk) begin
    if (rst) in_valid <= '0;
    else for (int i = 0; i < NIN; i++) begin
      int n;
      n = sent[i];
      if (in_valid[i] && in_ready[i]) begin
        int ch;
        ch = int'(msg_chan(in_data[i]));
        if (tbl[ch] < 0) exp_drops++; else q[tbl[ch]][i].push_back(in_data[i]);
        n++;
      end
      if (in_valid[i] && !in_ready[i]) stalls++;
      sent[i] = n;
      if (!in_valid[i] || in_ready[i]) begin
        in_valid[i] <= running && n < NPER && ($urandom_range(0, 3) != 0);
        in_data[i]  <= {CH_W'($urandom_range(0, NCHAN - 1)), 1'(i), 38'(n)};
      end
    end
  end

  // both inputs want the same free output: input 0 must win
  always_ff @(posedge clk) if (!rst) begin
    if (in_valid == 2'b11 && dut.hit == 2'b11 && dut.dest[0] == dut.dest[1] &&
        (!out_valid[dut.dest[0]] || out_ready[dut.dest[0]])) begin
      checks++; prio_seen++;
      if (!in_ready[0] || in_ready[1]) begin failures++; $display("FAIL: priority"); end
    end
  end

  always_ff @(posedge clk) if (!rst) begin
    for (int o = 0; o < NOUT; o++)
      if (out_valid[o] && out_ready[o]) begin
        int i;
        i = int'(out_data[o][38]);
        checks++;
        if (q[o][i].size() == 0 || q[o][i][0] !== out_data[o]) begin
          failures++; $display("FAIL: out %0d got %h", o, out_data[o]);
        end else void'(q[o][i].pop_front());
      end
  end

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; cfg_ch = 0; cfg_dest = 0; cfg_valid = 0;
    sent[0] = 0; sent[1] = 0;
    for (int c = 0; c < NCHAN; c++) tbl[c] = (c < 32) ? 5 : -1;
    repeat (3) @(posedge clk); rst = 0;
    @(negedge clk);
    for (int c = 32; c < NCHAN; c++) if (c % 9 != 0) begin
      cfg_we = 1; cfg_ch = chan_t'(c); cfg_dest = 3'(c % NOUT); cfg_valid = 1;
      tbl[c] = c % NOUT;
      @(negedge clk);
    end
    cfg_we = 0;
    running = 1;
    repeat (800) @(posedge clk);
    block3 = 1;
    repeat (200) @(posedge clk);
    block3 = 0;
    wait (sent[0] == NPER && sent[1] == NPER);
    repeat (50) @(posedge clk);
    for (int o = 0; o < NOUT; o++) for (int i = 0; i < NIN; i++) begin
      checks++;
      if (q[o][i].size() != 0) begin failures++; $display("FAIL: %0d words missing at out %0d", q[o][i].size(), o); end
    end
    checks++;
    if (drop_count != 16'(exp_drops) || exp_drops == 0) begin
      failures++; $display("FAIL: drops %0d exp %0d", drop_count, exp_drops);
    end
    checks++;
    if (stalls == 0 || prio_seen == 0) begin failures++; $display("FAIL: no stall or no conflict"); end
    $display("drops %0d stalls %0d conflicts %0d", exp_drops, stalls, prio_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
