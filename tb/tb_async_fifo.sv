// tb_async_fifo: self-checking test of the dual-clock FIFO.
//
// A 48-bit counter pattern is written at a write clock of period 7 ns and
// read at a read clock of period 9.6 ns (the board's 104 MHz), with a
// random read-ready. Every word read must equal the next expected word;
// a phase with the reader stopped fills the FIFO and checks that the extra
// words are dropped and flagged on wr_overflow, and that exactly DEPTH
// words survive.
module tb_async_fifo;
  localparam int W = 48, DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #3.5 wclk = ~wclk;
  always #4.8 rclk = ~rclk;

  logic wr_valid, wr_full, wr_overflow, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .wr_valid, .wr_data, .wr_full, .wr_overflow,
    .rd_clk(rclk), .rd_rst(rrst), .rd_valid, .rd_ready, .rd_data);

  int n_wr = 0, n_rd = 0, n_ovf = 0;
  logic stop_reader = 0;
  logic writing = 0;

  // writer: only writes when not full in phase 1
  logic phase2 = 0;
  int n1 = 0;
  always_ff @(posedge wclk) begin
    if (writing && (phase2 || !wr_full)) begin
      wr_valid <= 1'b1;
    end else wr_valid <= 1'b0;
  end
  always_ff @(posedge wclk) begin
    if (wr_valid && !wr_full) begin
      n_wr    <= n_wr + 1;
      wr_data <= wr_data + 1;
    end
    if (wr_overflow) n_ovf <= n_ovf + 1;
  end

  always_ff @(posedge rclk) begin
    rd_ready <= !stop_reader && ($urandom_range(0, 3) != 0);
    if (rd_valid && rd_ready) begin
      checks++;
      if (rd_data !== W'(n_rd)) begin
        failures++;
        $display("FAIL: read %0d got %0h", n_rd, rd_data);
      end
      n_rd <= n_rd + 1;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_data = '0; rd_ready = 0;
    #50 wrst = 0; rrst = 0;
    writing = 1;
    wait (n_wr >= 500);
    writing = 0;
    repeat (10) @(posedge wclk);
    wait (n_rd == n_wr);
    repeat (10) @(posedge rclk);
    n1 = n_wr;
    checks++;
    if (n_rd != n_wr || n_wr < 500) begin failures++; $display("FAIL: read %0d of %0d words", n_rd, n_wr); end
    // phase 2: reader stopped, writer ignores full
    stop_reader = 1;
    phase2 = 1;
    writing = 1;
    repeat (40) @(posedge wclk);
    writing = 0;
    repeat (10) @(posedge wclk);
    checks++;
    if (n_wr - n1 != DEPTH) begin failures++; $display("FAIL: stored %0d", n_wr - n1); end
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL: no overflow flagged"); end
    stop_reader = 0;
    wait (n_rd == n_wr);
    repeat (10) @(posedge rclk);
    checks++;
    if (rd_valid) begin failures++; $display("FAIL: not empty at end"); end
    $display("overflow words flagged: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
