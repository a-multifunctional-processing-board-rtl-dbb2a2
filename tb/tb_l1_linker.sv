// tb_l1_linker: self-checking test of the L1 histogram linker.
//
// Directed events (two back-to-back high-momentum tracks; one track seen by a
// single group only; a track split over two adjacent bins, which must give
// one peak; a cluster across the phi wrap-around) and 200 random events.
// Expected peak count, high-momentum multiplicity and back-to-back flag come
// from a model written here over plain integer arrays. The result must
// appear exactly two cycles after the end-of-event word, and the
// histograms must be empty again for the next event.
module tb_l1_linker;
  import ftt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, trig_valid, trig_mult, trig_b2b;
  msg_t in_data;
  logic [7:0] kappa_mask;
  logic [5:0] mult_thr;
  logic [8:0] n_peaks, n_high;
  int checks = 0, failures = 0;

  l1_linker dut (.*);

  int h [4][8][60];
  int n_b2b = 0, n_mult = 0;

  function automatic int sc(int k, int p);
    int n, c;
    n = 0; c = 0;
    for (int g = 0; g < 4; g++) begin
      int any;
      any = 0;
      for (int dk = -1; dk <= 1; dk++) for (int dp = -1; dp <= 1; dp++)
        if (k + dk >= 0 && k + dk < 8 && h[g][k+dk][(p+dp+60)%60] != 0) any = 1;
      n += any;
      if (h[g][k][p] != 0) c = 1;
    end
    return (c != 0 && n >= 2) ? n : 0;
  endfunction

  task automatic model(output int np, output int nh, output bit b2b);
    int pk [8][60];
    int pa [60];
    np = 0; nh = 0; b2b = 0;
    for (int p = 0; p < 60; p++) pa[p] = 0;
    for (int k = 0; k < 8; k++) for (int p = 0; p < 60; p++) begin
      int s, ok;
      s = sc(k, p);
      ok = (s != 0);
      for (int dk = -1; dk <= 1; dk++) for (int dp = -1; dp <= 1; dp++)
        if (k + dk >= 0 && k + dk < 8 && !(dk == 0 && dp == 0)) begin
          int o;
          o = sc(k + dk, (p + dp + 60) % 60);
          if ((dk < 0 || (dk == 0 && dp < 0)) ? (o >= s) : (o > s)) ok = 0;
        end
      if (ok != 0) begin
        np++;
        if (kappa_mask[k]) nh++;
        pa[p] = 1;
      end
    end
    for (int p = 0; p < 60; p++) for (int d = 29; d <= 31; d++)
      if (pa[p] != 0 && pa[(p + d) % 60] != 0) b2b = 1;
  endtask

  task automatic put(int g, int kappa, int phi);
    segment_t b;
    b.group = 2'(g); b.kappa = 6'(kappa); b.phi = 10'(phi); b.info = '0;
    @(negedge clk);
    in_valid = 1; in_data = make_msg(chan_t'(1), MT_SEGMENT, b);
    h[g][kappa / 5][(phi * 3) / 32] = 1;
  endtask

  task automatic finish_event(string what);
    int np, nh, lat;
    bit b2b;
    model(np, nh, b2b);
    @(negedge clk);
    in_valid = 1; in_data = make_msg(chan_t'(1), MT_EOE, '0);
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!trig_valid && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("FAIL %s: latency %0d", what, lat); end
    checks++;
    if (int'(n_peaks) != np || int'(n_high) != nh || trig_b2b != b2b ||
        trig_mult != (mult_thr != 0 && nh >= int'(mult_thr))) begin
      failures++;
      $display("FAIL %s: peaks %0d/%0d high %0d/%0d b2b %b/%b mult %b", what, n_peaks, np, n_high, nh,
               trig_b2b, b2b, trig_mult);
    end
    if (trig_b2b) n_b2b++;
    if (trig_mult) n_mult++;
    for (int g = 0; g < 4; g++) for (int k = 0; k < 8; k++) for (int p = 0; p < 60; p++) h[g][k][p] = 0;
  endtask

  initial begin
    #10000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; kappa_mask = 8'b0001_1000; mult_thr = 6'd2;
    for (int g = 0; g < 4; g++) for (int k = 0; k < 8; k++) for (int p = 0; p < 60; p++) h[g][k][p] = 0;
    repeat (3) @(posedge clk); rst = 0;
    // two back-to-back high-pt tracks (kappa bins 3 and 4, phi bins 10 and 40)
    for (int g = 0; g < 4; g++) put(g, 17, 110);
    for (int g = 0; g < 4; g++) put(g, 22, 430);
    finish_event("b2b");
    checks++;
    if (!trig_b2b || !trig_mult || n_peaks != 9'd2) begin failures++; $display("FAIL: directed b2b"); end
    // one group only: nothing
    put(1, 17, 110); put(1, 30, 300);
    finish_event("single group");
    checks++;
    if (n_peaks != 0) begin failures++; $display("FAIL: single group gave peaks"); end
    // track spread over adjacent bins: one peak
    put(0, 17, 100); put(1, 17, 112); put(2, 17, 112); put(3, 20, 100);
    finish_event("adjacent");
    checks++;
    if (n_peaks != 9'd1) begin failures++; $display("FAIL: adjacent gave %0d peaks", n_peaks); end
    // wrap-around in phi
    put(0, 2, 639); put(1, 2, 2); put(2, 7, 639);
    finish_event("wrap");
    checks++;
    if (n_peaks != 9'd1) begin failures++; $display("FAIL: wrap gave %0d peaks", n_peaks); end
    // random events
    for (int e = 0; e < 200; e++) begin
      int ntr;
      ntr = $urandom_range(0, 12);
      kappa_mask = 8'($urandom);
      mult_thr = 6'($urandom_range(0, 4));
      for (int t = 0; t < ntr; t++) begin
        int k, p;
        k = $urandom_range(0, 39); p = $urandom_range(0, 639);
        for (int g = 0; g < 4; g++)
          if ($urandom_range(0, 3) != 0)
            put(g, k, (p + $urandom_range(0, 20) + 630) % 640);
      end
      for (int n = 0; n < 4; n++) put($urandom_range(0, 3), $urandom_range(0, 39), $urandom_range(0, 639));
      finish_event("random");
    end
    checks++;
    if (n_b2b == 0 || n_mult == 0) begin failures++; $display("FAIL: trigger never fired"); end
    $display("b2b triggers %0d, multiplicity triggers %0d", n_b2b, n_mult);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
