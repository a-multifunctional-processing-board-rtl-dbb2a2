// msg_router: routing stage of the data controller FPGA.
//
// Takes NIN streams of 48-bit messages, looks up the channel number (bits
// 47:39) of each head word in a shared route_table (one read port per
// input) and forwards the word to one of NOUT destinations. Each destination
// has a one-word output register with valid/ready. An input is accepted when
// the register of its destination is empty or draining and no input of
// higher priority (lower index) wants the same destination in that cycle;
// otherwise it stalls. A message whose channel has no valid table entry is
// dropped and counted. The board uses two inputs: the board's own user
// logic (input 0) and the merged stream from the I/O cards and the control
// port (input 1). Keeping the user logic's output apart means a user block
// that is busy and not taking new input can still send its results, so the
// routing cannot deadlock. The routing table follows the paper (static and
// dynamic partitions); the input split, priority, output registers and drop
// policy are this design's choices. Latency: one cycle from acceptance to
// out_valid.
module msg_router
  import ftt_pkg::*;
#(
  parameter int unsigned NIN     = 2,
  parameter int unsigned NOUT    = 6,
  parameter int unsigned NSTATIC = 32,
  parameter logic [NSTATIC-1:0][$clog2(NOUT)-1:0] STATIC_DEST = '0
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   cfg_we,
  input  chan_t                  cfg_ch,
  input  logic [$clog2(NOUT)-1:0] cfg_dest,
  input  logic                   cfg_valid,
  input  logic [NIN-1:0]         in_valid,
  output logic [NIN-1:0]         in_ready,
  input  msg_t                   in_data [NIN],
  output logic [NOUT-1:0]        out_valid,
  input  logic [NOUT-1:0]        out_ready,
  output msg_t                   out_data [NOUT],
  output logic [15:0]            drop_count
);
  localparam int unsigned DW = $clog2(NOUT);
  logic [NIN-1:0][DW-1:0] dest;
  logic [NIN-1:0]         hit;
  logic [NIN-1:0][CH_W-1:0] rd_ch;
  logic                   cfg_reject;

  always_comb
    for (int i = 0; i < NIN; i++) rd_ch[i] = msg_chan(in_data[i]);

  route_table #(.NCH(NCHAN), .DW(DW), .NSTATIC(NSTATIC), .NRD(NIN),
                .STATIC_DEST(STATIC_DEST)) u_table (
    .clk, .rst, .cfg_we, .cfg_ch, .cfg_dest, .cfg_valid, .cfg_reject,
    .rd_ch, .rd_dest(dest), .rd_hit(hit));

  logic [NIN-1:0]  go;       // input moves into an output register
  logic [NIN-1:0]  drop;     // input word is dropped (no route)
  logic [NOUT-1:0] taken;
  always_comb begin
    taken = '0;
    go    = '0;
    drop  = '0;
    for (int i = 0; i < NIN; i++) begin
      if (in_valid[i] && !hit[i]) drop[i] = 1'b1;
      else if (in_valid[i] && 32'(dest[i]) < NOUT && !taken[dest[i]] &&
               (!out_valid[dest[i]] || out_ready[dest[i]])) begin
        go[i] = 1'b1;
        taken[dest[i]] = 1'b1;
      end
    end
  end
  assign in_ready = go | drop | ~in_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid  <= '0;
      drop_count <= '0;
    end else begin
      for (int o = 0; o < NOUT; o++)
        if (out_valid[o] && out_ready[o]) out_valid[o] <= 1'b0;
      for (int i = 0; i < NIN; i++)
        if (go[i]) begin
          out_valid[dest[i]] <= 1'b1;
          out_data[dest[i]]  <= in_data[i];
        end
      drop_count <= drop_count + 16'($countones(drop));
    end
  end
endmodule
