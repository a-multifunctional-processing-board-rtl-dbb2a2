// async_fifo: dual-clock FIFO between the LVDS receive clock and the board clock.
//
// The receiving side of the LVDS channel link runs in its own clock domain,
// asynchronous to the 104 MHz board clock; the paper buffers and synchronises
// the incoming words in an asynchronous FIFO on the I/O card. This is the
// usual Gray-code design: binary pointers are kept in each domain, their
// Gray-coded copies cross through two-flop synchronisers, and full/empty are
// derived from the synchronised Gray pointers. The write side has no
// back-pressure (the channel link cannot be stalled): a word arriving while
// the FIFO is full is dropped and counted on wr_overflow. The read side is
// valid/ready with the oldest word shown combinationally. DEPTH is this
// design's choice.
module async_fifo #(
  parameter int unsigned W     = 48,
  parameter int unsigned DEPTH = 16
) (
  input  logic         wr_clk,
  input  logic         wr_rst,
  input  logic         wr_valid,
  input  logic [W-1:0] wr_data,
  output logic         wr_full,
  output logic         wr_overflow,   // one-cycle pulse: word dropped
  input  logic         rd_clk,
  input  logic         rd_rst,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1, wq2;   // write Gray pointer in the read domain
  logic [AW:0] rq1, rq2;   // read Gray pointer in the write domain

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write domain
  logic [AW:0] wbin_nx;
  assign wbin_nx = wbin + 1'b1;
  assign wr_full = (wgray == {~rq2[AW:AW-1], rq2[AW-2:0]});

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin <= '0; wgray <= '0; rq1 <= '0; rq2 <= '0; wr_overflow <= 1'b0;
    end else begin
      rq1 <= rgray; rq2 <= rq1;
      wr_overflow <= wr_valid && wr_full;
      if (wr_valid && !wr_full) begin
        mem[wbin[AW-1:0]] <= wr_data;
        wbin  <= wbin_nx;
        wgray <= bin2gray(wbin_nx);
      end
    end
  end

  // Read domain
  logic [AW:0] rbin_nx;
  assign rbin_nx  = rbin + 1'b1;
  assign rd_valid = (rgray != wq2);
  assign rd_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin <= '0; rgray <= '0; wq1 <= '0; wq2 <= '0;
    end else begin
      wq1 <= wgray; wq2 <= wq1;
      if (rd_valid && rd_ready) begin
        rbin  <= rbin_nx;
        rgray <= bin2gray(rbin_nx);
      end
    end
  end

  initial begin
    assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("DEPTH must be a power of two >= 4");
  end
endmodule
