// l1_linker: coarse track linking and L1 trigger of the L1 linker card.
//
// As in the paper, the track segments of the four radial trigger groups are
// filled into four coarsely binned kappa-phi histograms of 8 x 60 bins held
// in registers, and the search for track candidates runs over all bins at
// once. A bin is a candidate when at least two of the four groups have a
// segment in the bin or in one of its eight neighbours (adjacent bins are
// taken into account; phi wraps around, kappa does not) and at least one
// group has a segment in the bin itself. A candidate is a peak when its
// group count is higher than that of the candidates before it (kappa-1 row
// and phi-1 neighbour) and not lower than that of those after it, so one
// cluster gives one peak. From the peaks two trigger conditions follow: the
// multiplicity of peaks in the kappa bins enabled by kappa_mask (kappa bins
// of high transverse momentum, i.e. above a momentum threshold) reaching
// mult_thr, and a back-to-back pair (two peaks 30 +-1 phi bins, i.e. about
// 180 degrees, apart).
//
// Segments arrive as MT_SEGMENT words with full-resolution kappa (0..39) and
// phi (0..639); coarse bins are kappa/5 and (3*phi)/32. The coarse binning
// rule, the peak rule and the exact trigger conditions are this design's
// choices; the paper gives the histogram size, the 2-of-4 coincidence, the
// use of adjacent bins and the kind of trigger conditions.
//
// Timing: one segment per cycle, in_ready always high. The MT_EOE word
// clears the histograms; peaks are registered one cycle later and the
// trigger result (trig_valid pulse) one cycle after that.
module l1_linker
  import ftt_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  output logic        in_ready,
  input  msg_t        in_data,
  input  logic [L1_KAPPA_BINS-1:0] kappa_mask,
  input  logic [5:0]  mult_thr,
  output logic        trig_valid,
  output logic        trig_mult,
  output logic        trig_b2b,
  output logic [8:0]  n_peaks,
  output logic [8:0]  n_high
);
  localparam int unsigned NK = L1_KAPPA_BINS;
  localparam int unsigned NP = L1_PHI_BINS;

  logic [NK-1:0][NP-1:0] hist [NGROUPS];
  logic [NK-1:0][NP-1:0] peak_q;
  logic                  eval_q;

  assign in_ready = 1'b1;

  segment_t seg;
  assign seg = msg_segment(in_data);
  logic seg_in, eoe_in;
  assign seg_in = in_valid && msg_type(in_data) == MT_SEGMENT;
  assign eoe_in = in_valid && msg_type(in_data) == MT_EOE;

  logic [2:0] kc;
  logic [5:0] pc;
  always_comb begin
    kc = (seg.kappa >= KAPPA_W'(KAPPA_BINS)) ? 3'(NK-1) : 3'(seg.kappa / 5);
    pc = 6'((16'(seg.phi) * 16'd3) >> 5);
    if (pc >= 6'(NP)) pc = 6'(NP-1);
  end

  // group count in the 3x3 neighbourhood, and candidate score (one
  // instance of this logic per bin, all bins evaluated in parallel)
  logic [2:0]            score [NK][NP];
  logic [NK-1:0][NP-1:0] peak;
  for (genvar k = 0; k < NK; k++) begin : g_k
    for (genvar p = 0; p < NP; p++) begin : g_p
      always_comb begin
        logic [2:0] n;
        logic       centre;
        n = '0;
        centre = 1'b0;
        for (int g = 0; g < NGROUPS; g++) begin
          logic any;
          any = 1'b0;
          for (int dk = -1; dk <= 1; dk++)
            for (int dp = -1; dp <= 1; dp++)
              if (k + dk >= 0 && k + dk < NK && hist[g][k+dk][(p + dp + NP) % NP]) any = 1'b1;
          if (any) n = n + 3'd1;
          if (hist[g][k][p]) centre = 1'b1;
        end
        score[k][p] = (centre && n >= 3'd2) ? n : 3'd0;
      end

      always_comb begin
        logic ok;
        ok = (score[k][p] != 3'd0);
        for (int dk = -1; dk <= 1; dk++)
          for (int dp = -1; dp <= 1; dp++)
            if (k + dk >= 0 && k + dk < NK && !(dk == 0 && dp == 0)) begin
              if (dk < 0 || (dk == 0 && dp < 0)) begin
                if (score[k+dk][(p + dp + NP) % NP] >= score[k][p]) ok = 1'b0;
              end else begin
                if (score[k+dk][(p + dp + NP) % NP] > score[k][p]) ok = 1'b0;
              end
            end
        peak[k][p] = ok;
      end
    end
  end

  // trigger quantities from the registered peaks
  logic [8:0]    cnt_all, cnt_high;
  logic [NP-1:0] phi_any;
  logic          b2b;
  always_comb begin
    cnt_all  = '0;
    cnt_high = '0;
    phi_any  = '0;
    for (int k = 0; k < NK; k++)
      for (int p = 0; p < NP; p++)
        if (peak_q[k][p]) begin
          cnt_all = cnt_all + 9'd1;
          if (kappa_mask[k]) cnt_high = cnt_high + 9'd1;
          phi_any[p] = 1'b1;
        end
    b2b = 1'b0;
    for (int p = 0; p < NP; p++)
      for (int d = 29; d <= 31; d++)
        if (phi_any[p] && phi_any[(p + d) % NP]) b2b = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int g = 0; g < NGROUPS; g++) hist[g] <= '0;
      peak_q     <= '0;
      eval_q     <= 1'b0;
      trig_valid <= 1'b0;
      trig_mult  <= 1'b0;
      trig_b2b   <= 1'b0;
      n_peaks    <= '0;
      n_high     <= '0;
    end else begin
      eval_q     <= eoe_in;
      trig_valid <= eval_q;
      if (eoe_in) begin
        peak_q <= peak;
        for (int g = 0; g < NGROUPS; g++) hist[g] <= '0;
      end else if (seg_in) begin
        hist[seg.group][kc][pc] <= 1'b1;
      end
      if (eval_q) begin
        n_peaks   <= cnt_all;
        n_high    <= cnt_high;
        trig_mult <= (mult_thr != '0) && (cnt_high >= 9'(mult_thr));
        trig_b2b  <= b2b;
      end
    end
  end
endmodule
