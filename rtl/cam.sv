// cam: content addressable memory, the search element of the L2 linker.
//
// A CAM is an inverse RAM: a key is compared with all stored words at once
// and the result is the set of addresses that hold it. Each of the DEPTH
// entries stores a KW-bit key (here a kappa-phi bin number) and a valid bit.
// Writes go to an explicit address (the linker fills address n with the n-th
// segment of its trigger group, so the address also indexes the tag RAM and
// the seed list one-to-one). A search takes one clock: the key presented in
// cycle n gives the match vector, one bit per address, registered at the end
// of cycle n. clr invalidates all entries in one cycle (start of an event).
// The one-step search follows the paper; DEPTH and the clear port are this
// design's choices.
module cam #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned KW    = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [KW-1:0]            wkey,
  input  logic                     search,
  input  logic [KW-1:0]            key,
  output logic [DEPTH-1:0]         match
);
  logic [KW-1:0]    keys [DEPTH];
  logic [DEPTH-1:0] valid;

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      valid <= '0;
    end else if (we) begin
      keys[waddr]  <= wkey;
      valid[waddr] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) match <= '0;
    else if (search)
      for (int e = 0; e < DEPTH; e++) match[e] <= valid[e] && (keys[e] == key);
  end
endmodule
