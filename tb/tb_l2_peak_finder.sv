// tb_l2_peak_finder: self-checking test of the 3x3-in-5x5 peak finder.
//
// Random sparse hit matrices (and a few hand-made ones) are applied; the
// expected window, score, group mask and validity are computed by an
// independent search in the testbench: best score wins, the centred
// window wins ties, then row-major order.
module tb_l2_peak_finder;
  import ftt_pkg::*;
  logic [NGROUPS-1:0][4:0][4:0] hits;
  logic valid;
  logic [1:0] win_k, win_p;
  logic [NGROUPS-1:0] group_mask;
  logic [6:0] score;
  int checks = 0, failures = 0, n_valid = 0;

  l2_peak_finder dut (.*);

  task automatic check();
    int best, bk, bp, s;
    logic [3:0] m;
    best = -1; bk = 1; bp = 1;
    // centred window first
    for (int t = -1; t < 9; t++) begin
      int i, j;
      if (t < 0) begin i = 1; j = 1; end else begin i = t / 3; j = t % 3; end
      s = 0;
      for (int g = 0; g < 4; g++)
        for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) s += hits[g][i+a][j+b];
      if (s > best) begin best = s; bk = i; bp = j; end
    end
    m = '0;
    for (int g = 0; g < 4; g++)
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) if (hits[g][bk+a][bp+b]) m[g] = 1;
    #1;
    checks++;
    if (score != 7'(best) || win_k != 2'(bk) || win_p != 2'(bp) || group_mask != m ||
        valid != ($countones(m) >= 2)) begin
      failures++;
      $display("FAIL: got w=(%0d,%0d) s=%0d m=%b v=%b exp w=(%0d,%0d) s=%0d m=%b",
               win_k, win_p, score, group_mask, valid, bk, bp, best, m);
    end
    if (valid) n_valid++;
  endtask

  initial begin
    hits = '0; check();
    hits = '0; hits[0][2][2] = 1; check();                      // single group: no link
    hits = '0; hits[0][2][2] = 1; hits[2][3][3] = 1; check();   // 2 of 4
    hits = '0; hits[0][2][2] = 1; hits[1][4][4] = 1; hits[2][4][3] = 1; hits[3][3][4] = 1; check();
    hits = '0; hits[0][2][2] = 1; hits[1][0][0] = 1; check();   // outside any common window
    for (int k = 0; k < 2000; k++) begin
      for (int g = 0; g < 4; g++)
        for (int a = 0; a < 5; a++) for (int b = 0; b < 5; b++)
          hits[g][a][b] = ($urandom_range(0, 9) == 0);
      check();
    end
    checks++;
    if (n_valid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
