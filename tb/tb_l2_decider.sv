// tb_l2_decider: self-checking test of the L2 decision logic.
//
// Random events of 0..55 fitted tracks with random thresholds. For each the
// testbench computes the multiplicity above the pt threshold, the pt sum and
// the decision, and checks the decision pulse (two cycles after the
// end-of-event word is taken), the counters, and the words sent on: all
// stored tracks (at most 48) in order on a positive decision, then the
// decision word. Both decisions and the track overflow must occur. Every
// tenth event (index 4 mod 10) puts every pt exactly on the threshold and
// n_thr at the track count, and index 5 mod 10 sets sum_thr exactly to the
// pt sum, so the >= boundaries of both criteria are exercised. The jet
// criterion is checked against a model that adds each track's pt to sector
// phi/40 of 16; some events must be accepted by the jet criterion alone.
module tb_l2_decider;
  import ftt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, dec_valid, dec_accept, track_overflow;
  msg_t in_data, out_data;
  logic [PT_W-1:0] pt_thr;
  logic [5:0] n_thr;
  logic [PT_W+5:0] sum_thr, pt_sum, jet_thr;
  logic [4:0] jet_n, n_jets;
  chan_t l3_ch;
  logic [6:0] n_tracks, n_above;
  int checks = 0, failures = 0;

  l2_decider dut (.*);

  msg_t exp_q [$], got_q [$];
  int n_acc = 0, n_rej = 0, n_ovf = 0, n_jet_only = 0;
  int dec_seen, dec_at, eoe_at, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && out_valid && out_ready) got_q.push_back(out_data);
    if (dec_valid) begin dec_seen = 1; dec_at = cyc; end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  task automatic send(msg_t m);
    @(negedge clk);
    in_valid = 1; in_data = m;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    if (msg_type(m) == MT_EOE) eoe_at = cyc;
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; l3_ch = chan_t'(120);
    repeat (3) @(posedge clk); rst = 0;
    for (int e = 0; e < 150; e++) begin
      int nt, nab, sum, acc, nj, acc_nj;
      int ssum [16];
      nt  = (e % 10 == 9) ? 55 : $urandom_range(0, 12);
      pt_thr  = 16'($urandom_range(0, 4000));
      n_thr   = 6'($urandom_range(0, 5));
      sum_thr = 22'($urandom_range(0, 3) == 0 ? 0 : $urandom_range(1000, 40000));
      jet_thr = 22'($urandom_range(0, 3) == 0 ? 0 : $urandom_range(3000, 12000));
      jet_n   = 5'($urandom_range(0, 3));
      if (e % 10 == 7) begin n_thr = '0; sum_thr = '0; jet_n = 5'd1; jet_thr = 22'd6000; end
      foreach (ssum[i]) ssum[i] = 0;
      if (e % 10 == 4) begin nt = 1 + e % 7; n_thr = 6'(nt); sum_thr = '0; end
      if (e % 10 == 5) begin nt = 3; n_thr = '0; end
      nab = 0; sum = 0;
      exp_q.delete(); got_q.delete();
      for (int t = 0; t < nt; t++) begin
        fit_t f;
        f.pt = (e % 10 == 4) ? pt_thr : 16'($urandom_range(0, 8000)); f.phi = 10'($urandom_range(0, 639)); f.theta = 10'($urandom);
        if (f.pt >= pt_thr) nab++;
        sum += int'(f.pt);
        ssum[int'(f.phi) / 40] += int'(f.pt);
        if (t < 48) exp_q.push_back(make_msg(l3_ch, MT_FIT, f));
        send(make_msg(chan_t'(9), MT_FIT, f));
      end
      if (e % 10 == 5) sum_thr = 22'(sum);
      nj = 0;
      foreach (ssum[i]) if (jet_thr != 0 && ssum[i] >= int'(jet_thr)) nj++;
      acc_nj = ((n_thr != 0 && nab >= int'(n_thr)) || (sum_thr != 0 && sum >= int'(sum_thr))) ? 1 : 0;
      acc = (acc_nj != 0 || (jet_n != 0 && nj >= int'(jet_n))) ? 1 : 0;
      if (acc != 0 && acc_nj == 0) n_jet_only++;
      if (acc == 0) exp_q.delete();
      exp_q.push_back(make_msg(l3_ch, MT_DECISION, {35'(nt), acc[0]}));
      checks++;
      if (int'(n_tracks) != nt || int'(n_above) != nab || int'(pt_sum) != sum ||
          int'(n_jets) != nj || track_overflow != (nt > 48)) begin
        failures++; $display("FAIL: counters %0d/%0d %0d/%0d %0d/%0d jets %0d/%0d", n_tracks, nt, n_above, nab, pt_sum, sum, n_jets, nj);
      end
      if (nt > 48) n_ovf++;
      dec_seen = 0;
      send(make_msg(chan_t'(9), MT_EOE, '0));
      while (got_q.size() < exp_q.size()) @(posedge clk);
      repeat (3) @(posedge clk);
      checks++;
      if (dec_seen == 0 || dec_accept != acc[0] || dec_at - eoe_at != 2) begin
        failures++; $display("FAIL: decision seen %0d acc %b exp %0d after %0d", dec_seen, dec_accept, acc, dec_at - eoe_at);
      end
      checks++;
      if (got_q != exp_q) begin failures++; $display("FAIL: output words (%0d vs %0d)", got_q.size(), exp_q.size()); end
      if (acc != 0) n_acc++; else n_rej++;
    end
    checks++;
    if (n_acc == 0 || n_rej == 0 || n_ovf == 0 || n_jet_only == 0) begin failures++; $display("FAIL: coverage"); end
    $display("accepted %0d (by jets only %0d) rejected %0d overflow events %0d", n_acc, n_jet_only, n_rej, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
