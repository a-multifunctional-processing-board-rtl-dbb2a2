// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// Storage is a register array of DEPTH words (DEPTH a power of two) with
// read and write pointers one bit wider than the address. in_ready is low
// when full; out_valid is high when not empty and out_data shows the oldest
// word combinationally, so a word written in cycle n can leave in cycle n+1.
// Used by the I/O card controller and the merger for the data buffering the
// paper names; depth is this design's choice.
module sync_fifo #(
  parameter int unsigned W     = 48,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign count     = wptr - rptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready) begin
        mem[wptr[AW-1:0]] <= in_data;
        wptr <= wptr + 1'b1;
      end
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

  // A producer must hold its word until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst) (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_hold: assert property (p_hold);
endmodule
