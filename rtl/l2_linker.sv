// l2_linker: track segment linker of the L2 linker card (data controller FPGA).
//
// Storage (as in the paper): every received track segment of trigger group g
// is written, at the next free address n of that group, into the group's
// seed RAM (its kappa-phi bin number), into the group's CAMs (same bin
// number) and into the group's tag RAM (the additional track information).
// The "virtual histogram" has 40 kappa x 640 phi bins; only its non-empty
// bins are stored.
//
// Linking (as in the paper): after the end-of-event word a loop walks
// through the four seed lists. For each seed not yet used by a link, the
// 25 bins of the 5x5 array around it are presented at once to 25 CAMs per
// group, i.e. 100 CAMs, each holding a copy of its group's bin numbers. The
// resulting 4x5x5 hit matrix (only segments not yet used) goes to the 3x3
// peak finder; when its best window has segments of at least two groups a
// track link is made. Kappa bins outside 0..39 do not exist; phi wraps
// around at 640.
//
// Choices of this design: segments already assigned to a link are marked
// used and are neither seeds nor matched again (the paper does not say how
// duplicate links are avoided); per group the link takes the seed itself
// (for the seed's group) or the first matching segment in the window, cells
// in row-major order, lowest address first; at most MAX_TRACKS=48 links are
// made per event (the paper's limit), further ones set link_overflow; each
// group keeps up to DEPTH segments, further ones are dropped and counted.
//
// Timing: one segment accepted per cycle while receiving (the paper's 2.462
// us for receiving is 256 words at 104 MHz); the CAM and RAM writes happen
// in the same cycle. Checking costs two cycles per seed (CAM search, then
// peak finding and link), one cycle per skipped (used) seed and one per
// group change, so 256 seeds take about 512 cycles, close to the paper's
// 5.115 us (532 cycles). in_ready is low while linking (stall).
//
// Output: for each link, one MT_TRKSEG word per linked segment on channel
// track_ch_base + link number (so the routing tables can send each track to
// its fitter), the last one typed MT_TRKLAST; after all links an MT_EOE
// word on eoe_ch. Input words of other types are consumed and ignored.
module l2_linker
  import ftt_pkg::*;
#(
  parameter int unsigned DEPTH      = 64,
  parameter int unsigned MAX_LINKS  = MAX_TRACKS
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  output logic       in_ready,
  input  msg_t       in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output msg_t       out_data,
  input  chan_t      track_ch_base,
  input  chan_t      eoe_ch,
  output logic [6:0] n_links,
  output logic       link_overflow,
  output logic [15:0] seg_dropped,
  output logic       busy
);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned CW  = $clog2(DEPTH + 1);
  localparam int unsigned NCELL = 25;

  typedef enum logic [2:0] {S_RECV, S_ISSUE, S_EVAL, S_DRAIN, S_EOE} state_e;
  state_e state;

  // ---------------- storage ----------------
  logic [BIN_W-1:0]  seed_ram [NGROUPS][DEPTH];
  logic [INFO_W-1:0] tag_ram  [NGROUPS][DEPTH];
  logic [CW-1:0]     cnt      [NGROUPS];
  logic [DEPTH-1:0]  used     [NGROUPS];

  segment_t in_seg;
  assign in_seg = msg_segment(in_data);
  logic in_fire, seg_in, eoe_in;
  assign in_ready = (state == S_RECV);
  assign in_fire  = in_valid && in_ready;
  assign seg_in   = in_fire && msg_type(in_data) == MT_SEGMENT;
  assign eoe_in   = in_fire && msg_type(in_data) == MT_EOE;

  logic seg_room;
  assign seg_room = (32'(cnt[in_seg.group]) < DEPTH);

  // ---------------- seed loop ----------------
  logic [1:0]     cur_g;
  logic [2:0]     cur_gx;      // 0..4, 4 = done
  logic [CW-1:0]  cur_i;
  logic [BIN_W-1:0] seed_bin;
  logic [KAPPA_W-1:0] seed_k;
  logic [PHI_W-1:0]   seed_p;
  assign cur_g    = cur_gx[1:0];
  assign seed_bin = seed_ram[cur_g][cur_i[AW-1:0]];
  assign seed_k   = seed_bin[BIN_W-1 -: KAPPA_W];
  assign seed_p   = seed_bin[PHI_W-1:0];

  logic issue;     // present the seed's 5x5 array to the CAMs this cycle
  logic seed_here, seed_used;
  assign seed_here = (cur_gx < 3'd4) && (cur_i < cnt[cur_g]);
  assign seed_used = seed_here && used[cur_g][cur_i[AW-1:0]];
  assign issue     = (state == S_ISSUE) && seed_here && !seed_used;

  // keys of the 25 cells and whether the cell exists (kappa in range)
  logic [BIN_W-1:0] cell_key [NCELL];
  logic [NCELL-1:0] cell_ok;
  always_comb begin
    for (int a = 0; a < 5; a++)
      for (int b = 0; b < 5; b++) begin
        int k, p;
        k = int'(seed_k) + a - 2;
        p = int'(seed_p) + b - 2;
        if (p < 0) p = p + PHI_BINS;
        if (p >= PHI_BINS) p = p - PHI_BINS;
        cell_ok[a*5+b]  = (k >= 0) && (k < KAPPA_BINS);
        cell_key[a*5+b] = {KAPPA_W'(k), PHI_W'(p)};
      end
  end

  logic [NCELL-1:0] cell_ok_q;
  logic [1:0]       ev_g;
  logic [AW-1:0]    ev_i;

  // ---------------- 100 CAMs ----------------
  logic [DEPTH-1:0] match [NGROUPS][NCELL];
  logic cam_clr;
  for (genvar g = 0; g < NGROUPS; g++) begin : g_grp
    for (genvar c = 0; c < NCELL; c++) begin : g_cell
      cam #(.DEPTH(DEPTH), .KW(BIN_W)) u_cam (
        .clk, .rst, .clr(cam_clr),
        .we(seg_in && seg_room && in_seg.group == 2'(g)),
        .waddr(cnt[g][AW-1:0]),
        .wkey({in_seg.kappa, in_seg.phi}),
        .search(issue), .key(cell_key[c]), .match(match[g][c]));
    end
  end

  // ---------------- hit matrix and peak finder ----------------
  logic [DEPTH-1:0] avail [NGROUPS][NCELL];
  logic [NGROUPS-1:0][4:0][4:0] hits;
  always_comb begin
    for (int g = 0; g < NGROUPS; g++)
      for (int c = 0; c < NCELL; c++) begin
        avail[g][c] = cell_ok_q[c] ? (match[g][c] & ~used[g]) : '0;
        hits[g][c/5][c%5] = |avail[g][c];
      end
  end

  logic pf_valid;
  logic [1:0] win_k, win_p;
  logic [NGROUPS-1:0] pf_mask;
  l2_peak_finder u_pf (.hits, .valid(pf_valid), .win_k, .win_p,
                       .group_mask(pf_mask), .score());

  // per group: first matching address inside the chosen window
  logic [AW-1:0] sel_addr [NGROUPS];
  always_comb begin
    for (int g = 0; g < NGROUPS; g++) begin
      logic found;
      found = 1'b0;
      sel_addr[g] = '0;
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < 3; b++) begin
          int c;
          c = (32'(win_k) + a) * 5 + 32'(win_p) + b;
          for (int e = 0; e < DEPTH; e++)
            if (!found && avail[g][c][e]) begin
              found = 1'b1;
              sel_addr[g] = AW'(e);
            end
        end
      if (g == int'(ev_g)) sel_addr[g] = ev_i;
    end
  end

  // ---------------- link queue and serializer ----------------
  typedef struct packed {
    logic [5:0]         id;
    logic [NGROUPS-1:0] mask;
    logic [NGROUPS-1:0][BIN_W+INFO_W-1:0] seg;
  } link_t;

  link_t new_link;
  always_comb begin
    new_link.id   = 6'(n_links);
    new_link.mask = pf_mask;
    for (int g = 0; g < NGROUPS; g++)
      new_link.seg[g] = {seed_ram[g][sel_addr[g]], tag_ram[g][sel_addr[g]]};
  end

  logic make_link;
  assign make_link = (state == S_EVAL) && pf_valid && (32'(n_links) < MAX_LINKS);

  logic  lq_valid, lq_ready;
  link_t lq_data;
  sync_fifo #(.W($bits(link_t)), .DEPTH(64)) u_linkq (
    .clk, .rst, .in_valid(make_link), .in_ready(), .in_data(new_link),
    .out_valid(lq_valid), .out_ready(lq_ready), .out_data(lq_data), .count());

  // serializer: walk the groups of the head link
  logic [2:0] ser_g;
  logic       out_free;
  logic [NGROUPS-1:0] rest_mask;
  assign out_free  = !out_valid || out_ready;
  always_comb begin
    rest_mask = '0;
    for (int g = 0; g < NGROUPS; g++)
      if (g > int'(ser_g)) rest_mask[g] = lq_data.mask[g];
  end
  logic ser_emit;
  assign ser_emit = lq_valid && out_free && (ser_g < 3'd4) && lq_data.mask[ser_g[1:0]];
  assign lq_ready = lq_valid && out_free && (ser_g < 3'd4) && (rest_mask == '0);

  logic eoe_emit;
  assign eoe_emit = (state == S_EOE) && out_free;
  assign cam_clr  = eoe_emit;
  assign busy     = (state != S_RECV);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_RECV;
      out_valid <= 1'b0;
      ser_g     <= '0;
      n_links   <= '0;
      link_overflow <= 1'b0;
      seg_dropped   <= '0;
      cur_gx    <= '0;
      cur_i     <= '0;
      cell_ok_q <= '0;
      for (int g = 0; g < NGROUPS; g++) begin
        cnt[g]  <= '0;
        used[g] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;

      // serializer
      if (lq_valid && out_free && ser_g < 3'd4) begin
        if (ser_emit) begin
          segment_t s;
          s.group = ser_g[1:0];
          {s.kappa, s.phi, s.info} = lq_data.seg[ser_g[1:0]];
          out_valid <= 1'b1;
          out_data  <= make_msg(track_ch_base + chan_t'(lq_data.id),
                                (rest_mask == '0) ? MT_TRKLAST : MT_TRKSEG, s);
        end
        ser_g <= (rest_mask == '0) ? 3'd0 : ser_g + 3'd1;
      end

      case (state)
        S_RECV: begin
          if (seg_in) begin
            if (seg_room) begin
              seed_ram[in_seg.group][cnt[in_seg.group][AW-1:0]] <= {in_seg.kappa, in_seg.phi};
              tag_ram[in_seg.group][cnt[in_seg.group][AW-1:0]]  <= in_seg.info;
              cnt[in_seg.group] <= cnt[in_seg.group] + 1'b1;
            end else begin
              seg_dropped <= seg_dropped + 1'b1;
            end
          end
          if (eoe_in) begin
            state   <= S_ISSUE;
            cur_gx  <= '0;
            cur_i   <= '0;
            n_links <= '0;
            link_overflow <= 1'b0;
          end
        end
        S_ISSUE: begin
          if (cur_gx == 3'd4) state <= S_DRAIN;
          else if (!seed_here) begin
            cur_gx <= cur_gx + 3'd1;
            cur_i  <= '0;
          end else if (seed_used) begin
            cur_i <= cur_i + 1'b1;
          end else begin
            cell_ok_q <= cell_ok;
            ev_g  <= cur_g;
            ev_i  <= cur_i[AW-1:0];
            state <= S_EVAL;
          end
        end
        S_EVAL: begin
          if (pf_valid) begin
            if (make_link) begin
              n_links <= n_links + 7'd1;
              for (int g = 0; g < NGROUPS; g++)
                if (pf_mask[g]) used[g][sel_addr[g]] <= 1'b1;
            end else begin
              link_overflow <= 1'b1;
            end
          end
          cur_i <= cur_i + 1'b1;
          state <= S_ISSUE;
        end
        S_DRAIN: if (!lq_valid) state <= S_EOE;
        S_EOE: if (eoe_emit) begin
          out_valid <= 1'b1;
          out_data  <= make_msg(eoe_ch, MT_EOE, '0);
          for (int g = 0; g < NGROUPS; g++) begin
            cnt[g]  <= '0;
            used[g] <= '0;
          end
          state <= S_RECV;
        end
        default: state <= S_RECV;
      endcase
    end
  end
endmodule
