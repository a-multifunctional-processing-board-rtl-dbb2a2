// l2_decider: L2 trigger decision of the L2 decider card.
//
// Collects the fitted tracks of an event (MT_FIT words: pt, phi, theta) and
// forms the three kinds of track-based quantity the paper lists: the
// multiplicity of tracks above a transverse-momentum threshold, the scalar
// momentum sum, and a simple topological (jet) criterion. For the jets the
// azimuth is cut into NSECT sectors of PHI_BINS/NSECT phi units (16 x 40 =
// 22.5 degrees); the pt of every track is added to its sector, and a sector
// whose pt sum reaches jet_thr counts as a jet. At the end-of-event word the
// decision is made:
//   accept = (n_thr   != 0 && tracks with pt >= pt_thr >= n_thr)
//         || (sum_thr != 0 && sum of pt            >= sum_thr)
//         || (jet_n   != 0 && sectors with jets    >= jet_n).
// On a positive decision all stored track parameters are sent on, as in the
// paper, to the L3 farm (MT_FIT words on l3_ch), followed by an MT_DECISION
// word; a negative decision sends only the MT_DECISION word. Up to
// MAX_TRACKS = 48 tracks are stored; further tracks still count in the sums
// and set track_overflow. The decision pulse (dec_valid, dec_accept) is the
// signal to the central trigger and comes two cycles after the end-of-event
// word is taken. The paper only names the criteria; the formula, the
// sector jet finder, field widths and the word sequence are this design's
// choices. in_ready is low from the end-of-event word until the output is
// sent.
module l2_decider
  import ftt_pkg::*;
#(
  parameter int unsigned NSECT = 16
)
(
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  msg_t              in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output msg_t              out_data,
  input  logic [PT_W-1:0]   pt_thr,
  input  logic [5:0]        n_thr,
  input  logic [PT_W+5:0]   sum_thr,
  input  logic [PT_W+5:0]   jet_thr,
  input  logic [4:0]        jet_n,
  input  chan_t             l3_ch,
  output logic              dec_valid,
  output logic              dec_accept,
  output logic [6:0]        n_tracks,
  output logic [6:0]        n_above,
  output logic [PT_W+5:0]   pt_sum,
  output logic [4:0]        n_jets,
  output logic              track_overflow
);
  typedef enum logic [1:0] {S_COLLECT, S_DECIDE, S_SEND, S_FINAL} state_e;
  state_e state;

  fit_t       trk [MAX_TRACKS];
  logic [6:0] rd_idx;
  logic       accept_q;

  assign in_ready = (state == S_COLLECT);
  logic fit_in, eoe_in;
  assign fit_in = in_valid && in_ready && msg_type(in_data) == MT_FIT;
  assign eoe_in = in_valid && in_ready && msg_type(in_data) == MT_EOE;

  fit_t f;
  assign f = msg_fit(in_data);

  localparam int unsigned SECT_PHI = PHI_BINS / NSECT;
  logic [PT_W+5:0] sect_sum [NSECT];
  int unsigned     f_sect;
  always_comb begin
    f_sect = 32'(f.phi) / SECT_PHI;
    if (f_sect >= NSECT) f_sect = NSECT - 1;
  end

  // number of sectors whose pt sum reaches the jet threshold
  always_comb begin
    n_jets = '0;
    for (int s = 0; s < NSECT; s++)
      if (jet_thr != '0 && sect_sum[s] >= jet_thr) n_jets = n_jets + 5'd1;
  end

  logic accept_c;
  assign accept_c = ((n_thr != '0) && (n_above >= 7'(n_thr))) ||
                    ((sum_thr != '0) && (pt_sum >= sum_thr)) ||
                    ((jet_n != '0) && (n_jets >= jet_n));

  logic out_free;
  assign out_free = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_COLLECT;
      out_valid  <= 1'b0;
      dec_valid  <= 1'b0;
      dec_accept <= 1'b0;
      n_tracks   <= '0;
      n_above    <= '0;
      pt_sum     <= '0;
      track_overflow <= 1'b0;
      rd_idx     <= '0;
      accept_q   <= 1'b0;
      for (int s = 0; s < NSECT; s++) sect_sum[s] <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_COLLECT: begin
          if (fit_in) begin
            if (32'(n_tracks) < MAX_TRACKS) trk[n_tracks[5:0]] <= f;
            else track_overflow <= 1'b1;
            if (n_tracks != 7'h7f) n_tracks <= n_tracks + 7'd1;
            if (f.pt >= pt_thr && n_above != 7'h7f) n_above <= n_above + 7'd1;
            pt_sum <= pt_sum + (PT_W+6)'(f.pt);
            sect_sum[f_sect] <= sect_sum[f_sect] + (PT_W+6)'(f.pt);
          end
          if (eoe_in) state <= S_DECIDE;
        end
        S_DECIDE: begin
          accept_q   <= accept_c;
          dec_accept <= accept_c;
          dec_valid  <= 1'b1;
          rd_idx     <= '0;
          state      <= S_SEND;
        end
        S_SEND: begin
          if (!accept_q || rd_idx >= n_tracks || 32'(rd_idx) >= MAX_TRACKS) state <= S_FINAL;
          else if (out_free) begin
            out_valid <= 1'b1;
            out_data  <= make_msg(l3_ch, MT_FIT, trk[rd_idx[5:0]]);
            rd_idx    <= rd_idx + 7'd1;
          end
        end
        S_FINAL: if (out_free) begin
          out_valid <= 1'b1;
          out_data  <= make_msg(l3_ch, MT_DECISION, {35'(n_tracks), accept_q});
          n_tracks  <= '0;
          n_above   <= '0;
          pt_sum    <= '0;
          track_overflow <= 1'b0;
          for (int s = 0; s < NSECT; s++) sect_sum[s] <= '0;
          state     <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end
endmodule
