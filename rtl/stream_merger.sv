// stream_merger: collects several message streams into one.
//
// The paper's merger cards collect track segments from six inputs, buffer
// them in FIFOs and multiplex them onto one output; the data controller uses
// the same function to gather the words from its I/O cards and its own user
// logic before routing. Each input has a sync_fifo of FIFO_DEPTH words; a
// round-robin pointer picks the next non-empty FIFO, one word per cycle, into
// a registered valid/ready output. NIN=6 is the merger card's input count
// from the paper; the FIFO depth and the round-robin order are this design's
// choices. A full FIFO deasserts its in_ready (stall).
module stream_merger
  import ftt_pkg::*;
#(
  parameter int unsigned NIN        = 6,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [NIN-1:0] in_valid,
  output logic [NIN-1:0] in_ready,
  input  msg_t           in_data [NIN],
  output logic           out_valid,
  input  logic           out_ready,
  output msg_t           out_data
);
  localparam int unsigned IW = (NIN > 1) ? $clog2(NIN) : 1;
  logic [NIN-1:0] f_valid, f_ready;
  msg_t           f_data [NIN];

  for (genvar i = 0; i < NIN; i++) begin : g_fifo
    sync_fifo #(.W(MSG_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_data[i]),
      .out_valid(f_valid[i]), .out_ready(f_ready[i]), .out_data(f_data[i]),
      .count());
  end

  logic [IW-1:0] rr;       // input with highest priority this cycle
  logic [IW-1:0] pick;
  logic          any;
  logic          take;

  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int k = 0; k < NIN; k++) begin
      int unsigned idx;
      idx = (32'(rr) + k) % NIN;
      if (!any && f_valid[idx]) begin
        any  = 1'b1;
        pick = IW'(idx);
      end
    end
  end

  assign take = any && (!out_valid || out_ready);
  always_comb begin
    f_ready = '0;
    if (take) f_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      rr        <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= f_data[pick];
        rr        <= (32'(pick) == NIN-1) ? '0 : pick + 1'b1;
      end
    end
  end
endmodule
