// tb_l2_linker: self-checking test of the CAM-based L2 track linker at its
// full size (64 segments per group, 100 CAMs, 48 links).
//
// Event 1: 20 tracks with one segment in each of the four trigger groups
// (scattered by one bin around the track), one track across the phi
// wrap-around (bins 638..639 and 0), one track seen by two groups only, and
// ten isolated segments of a single group (noise). Expected: 22 links, in
// the order of the seed lists, each listing exactly the segments of its
// track; no link from noise. The test also checks that segments are
// accepted at one per cycle and that the seed loop takes exactly two
// cycles per unused seed and one per used seed, plus one per group change.
// Event 2: 50 two-group tracks: only 48 links may be made and the
// link_overflow flag must be raised. Event 3: 70 segments in one group:
// 6 must be dropped and counted. All expected words are built here from the
// track list, independently of the linker.
module tb_l2_linker;
  import ftt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, link_overflow, busy;
  msg_t in_data, out_data;
  chan_t track_ch_base, eoe_ch;
  logic [6:0] n_links;
  logic [15:0] seg_dropped;
  int checks = 0, failures = 0;

  l2_linker dut (.*);

  typedef struct {int g; int k; int p; int info;} seg_s;
  seg_s segs [$];
  msg_t exp_q [$];
  msg_t got_q [$];
  int n_used_seeds, n_unused_seeds;

  function automatic msg_t seg_msg(seg_s s);
    segment_t b;
    b.group = 2'(s.g); b.kappa = KAPPA_W'(s.k); b.phi = PHI_W'(s.p); b.info = INFO_W'(s.info);
    return make_msg(chan_t'(3), MT_SEGMENT, b);
  endfunction

  function automatic void expect_link(int id, seg_s ls [4], logic [3:0] mask);
    int last;
    last = 0;
    for (int g = 0; g < 4; g++) if (mask[g]) last = g;
    for (int g = 0; g < 4; g++) if (mask[g]) begin
      segment_t b;
      b.group = 2'(g); b.kappa = KAPPA_W'(ls[g].k); b.phi = PHI_W'(ls[g].p); b.info = INFO_W'(ls[g].info);
      exp_q.push_back(make_msg(track_ch_base + chan_t'(id), (g == last) ? MT_TRKLAST : MT_TRKSEG, b));
    end
  endfunction

  int seen_stall;
  task automatic send_event();
    int t0, t1;
    t0 = $time;
    foreach (segs[i]) begin
      @(negedge clk);
      in_valid = 1; in_data = seg_msg(segs[i]);
      @(posedge clk);
      if (!in_ready) seen_stall++;
    end
    @(negedge clk);
    in_valid = 1; in_data = make_msg(chan_t'(3), MT_EOE, '0);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // loop cycle counter (seed loop states of the linker)
  int loop_cycles;
  always_ff @(posedge clk) if (dut.state == dut.S_ISSUE || dut.state == dut.S_EVAL) loop_cycles++;

  always_ff @(posedge clk) if (!rst && out_valid && out_ready) got_q.push_back(out_data);

  task automatic wait_eoe_out();
    int n;
    n = 0;
    while (got_q.size() == 0 || msg_type(got_q[got_q.size()-1]) != MT_EOE) begin
      @(posedge clk);
      n++;
      if (n > 5000) break;
    end
  endtask

  task automatic compare(string what);
    checks++;
    if (got_q.size() != exp_q.size() + 1) begin
      failures++;
      $display("FAIL %s: %0d words, expected %0d", what, got_q.size(), exp_q.size() + 1);
    end
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++) begin
      checks++;
      if (got_q[i] !== exp_q[i]) begin
        failures++;
        $display("FAIL %s word %0d: got %h exp %h", what, i, got_q[i], exp_q[i]);
      end
    end
    checks++;
    if (got_q.size() == 0 || got_q[got_q.size()-1] !== make_msg(eoe_ch, MT_EOE, '0)) begin
      failures++; $display("FAIL %s: no end-of-event word", what);
    end
  endtask

  initial begin
    #10000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    seg_s trk [4];
    int exp_loop;
    in_valid = 0; in_data = '0; out_ready = 1;
    track_ch_base = chan_t'(64); eoe_ch = chan_t'(112);
    seen_stall = 0;
    repeat (3) @(posedge clk); rst = 0;
    repeat (2) @(posedge clk);

    // ---------------- event 1 ----------------
    for (int t = 0; t < 20; t++) begin
      int k, p;
      k = (t * 7) % 36 + 2; p = t * 30 + 5;
      trk[0] = '{0, k, p, t * 16 + 0};
      trk[1] = '{1, k, p + 1, t * 16 + 1};
      trk[2] = '{2, k + 1, p, t * 16 + 2};
      trk[3] = '{3, k - 1, p - 1, t * 16 + 3};
      for (int g = 0; g < 4; g++) segs.push_back(trk[g]);
      expect_link(t, trk, 4'b1111);
    end
    trk[0] = '{0, 10, 639, 900}; trk[1] = '{1, 10, 0, 901};
    trk[2] = '{2, 11, 639, 902}; trk[3] = '{3, 9, 638, 903};
    for (int g = 0; g < 4; g++) segs.push_back(trk[g]);
    expect_link(20, trk, 4'b1111);
    for (int t = 0; t < 10; t++) segs.push_back('{2, 20, t * 30 + 20, 700 + t});   // noise
    trk[1] = '{1, 20, 620, 801}; trk[3] = '{3, 21, 621, 803};
    segs.push_back(trk[1]); segs.push_back(trk[3]);
    expect_link(21, trk, 4'b1010);
    // seed loop: g0 21 unused; g1 21 used + 1 unused; g2 21 used + 10 noise; g3 22 used
    exp_loop = 2 * 21 + (21 + 2) + (21 + 2 * 10) + 22 + 4 + 1;

    loop_cycles = 0;
    begin
      int tstart;
      tstart = int'($time);
      send_event();
      checks++;
      if (seen_stall != 0) begin failures++; $display("FAIL: input stalled while receiving"); end
    end
    wait_eoe_out();
    compare("event 1");
    checks++;
    if (loop_cycles != exp_loop) begin failures++; $display("FAIL: seed loop %0d cycles, expected %0d", loop_cycles, exp_loop); end
    checks++;
    if (n_links != 7'd22 || link_overflow) begin failures++; $display("FAIL: n_links %0d ovf %b", n_links, link_overflow); end
    $display("event 1: %0d segments, seed loop %0d cycles, %0d links", segs.size(), loop_cycles, n_links);

    // ---------------- event 2: link overflow ----------------
    segs.delete(); exp_q.delete(); got_q.delete();
    for (int t = 0; t < 50; t++) begin
      trk[0] = '{0, t % 40, t * 12, t};
      trk[1] = '{1, t % 40, t * 12 + 1, 100 + t};
      segs.push_back(trk[0]); segs.push_back(trk[1]);
      if (t < 48) expect_link(t, trk, 4'b0011);
    end
    send_event();
    wait_eoe_out();
    compare("event 2");
    checks++;
    if (n_links != 7'd48 || !link_overflow) begin failures++; $display("FAIL: overflow n_links %0d ovf %b", n_links, link_overflow); end

    // ---------------- event 3: segment overflow ----------------
    segs.delete(); exp_q.delete(); got_q.delete();
    for (int t = 0; t < 70; t++) segs.push_back('{3, 5, t * 9, t});
    send_event();
    wait_eoe_out();
    compare("event 3");
    checks++;
    if (seg_dropped != 16'd6) begin failures++; $display("FAIL: dropped %0d", seg_dropped); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
