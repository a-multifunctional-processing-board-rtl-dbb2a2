// route_table: channel-number lookup table of one programmable component.
//
// Every message carries a 9-bit channel number; the table maps it to the
// local destination (an output port) the message is forwarded to. As in the
// paper, the table has a static partition, fixed when the component is
// configured (here: the first NSTATIC channels, contents given by the
// STATIC_DEST parameter, always valid, not writable), and a dynamic partition
// written at startup through the configuration port (here: the local bus).
// Dynamic entries start invalid; a lookup of an invalid entry returns
// hit=0 so the caller can drop the message. Size of the static partition,
// the valid bits and the reset behaviour are this design's choices.
// NRD combinational read ports serve several lookups per cycle; a write
// takes effect in the next cycle.
module route_table #(
  parameter int unsigned NCH     = 512,
  parameter int unsigned DW      = 3,
  parameter int unsigned NSTATIC = 32,
  parameter int unsigned NRD     = 1,
  parameter logic [NSTATIC-1:0][DW-1:0] STATIC_DEST = '0
) (
  input  logic                     clk,
  input  logic                     rst,
  // configuration (dynamic partition)
  input  logic                     cfg_we,
  input  logic [$clog2(NCH)-1:0]   cfg_ch,
  input  logic [DW-1:0]            cfg_dest,
  input  logic                     cfg_valid,   // 0 clears the entry
  output logic                     cfg_reject,  // write hit the static partition
  // lookups
  input  logic [NRD-1:0][$clog2(NCH)-1:0] rd_ch,
  output logic [NRD-1:0][DW-1:0]          rd_dest,
  output logic [NRD-1:0]                  rd_hit
);
  logic [DW-1:0] dest_q  [NCH];
  logic          valid_q [NCH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NCH; c++) valid_q[c] <= 1'b0;
      cfg_reject <= 1'b0;
    end else begin
      cfg_reject <= 1'b0;
      if (cfg_we) begin
        if (cfg_ch < NSTATIC) cfg_reject <= 1'b1;
        else begin
          dest_q[cfg_ch]  <= cfg_dest;
          valid_q[cfg_ch] <= cfg_valid;
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) begin
      if (rd_ch[r] < NSTATIC) begin
        rd_dest[r] = STATIC_DEST[rd_ch[r]];
        rd_hit[r]  = 1'b1;
      end else begin
        rd_dest[r] = dest_q[rd_ch[r]];
        rd_hit[r]  = valid_q[rd_ch[r]];
      end
    end
  end
endmodule
