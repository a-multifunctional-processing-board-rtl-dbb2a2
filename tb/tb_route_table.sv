// tb_route_table: self-checking test of the channel routing table.
//
// Checks the static partition (fixed contents, writes rejected), that
// dynamic entries start invalid, are written at startup and can be
// cleared, and that several read ports work at once, against a table
// model kept in the testbench.
module tb_route_table;
  localparam int NCH = 512, DW = 3, NSTATIC = 32, NRD = 2;
  function automatic logic [NSTATIC-1:0][DW-1:0] mk_static();
    for (int c = 0; c < NSTATIC; c++) mk_static[c] = DW'(c % 5);
  endfunction
  localparam logic [NSTATIC-1:0][DW-1:0] SD = mk_static();

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cfg_we, cfg_valid, cfg_reject;
  logic [8:0] cfg_ch;
  logic [DW-1:0] cfg_dest;
  logic [NRD-1:0][8:0] rd_ch;
  logic [NRD-1:0][DW-1:0] rd_dest;
  logic [NRD-1:0] rd_hit;
  int checks = 0, failures = 0;

  route_table #(.NCH(NCH), .DW(DW), .NSTATIC(NSTATIC), .NRD(NRD), .STATIC_DEST(SD)) dut (.*);

  logic [DW-1:0] m_dest [NCH];
  logic          m_val  [NCH];

  task automatic wr(int ch, int d, bit v);
    @(negedge clk);
    cfg_we = 1; cfg_ch = 9'(ch); cfg_dest = DW'(d); cfg_valid = v;
    @(negedge clk);
    cfg_we = 0;
    checks++;
    if (cfg_reject !== (ch < NSTATIC)) begin failures++; $display("FAIL: reject ch %0d", ch); end
    if (ch >= NSTATIC) begin m_dest[ch] = DW'(d); m_val[ch] = v; end
  endtask

  task automatic check_all();
    for (int c = 0; c < NCH; c += 2) begin
      rd_ch[0] = 9'(c); rd_ch[1] = 9'(c + 1);
      #1;
      for (int r = 0; r < NRD; r++) begin
        checks++;
        if (rd_hit[r] !== m_val[c+r] || (m_val[c+r] && rd_dest[r] !== m_dest[c+r])) begin
          failures++;
          $display("FAIL: ch %0d hit %b dest %0d", c + r, rd_hit[r], rd_dest[r]);
        end
      end
    end
  endtask

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; cfg_ch = 0; cfg_dest = 0; cfg_valid = 0; rd_ch = '0;
    for (int c = 0; c < NCH; c++) begin
      m_val[c]  = (c < NSTATIC);
      m_dest[c] = (c < NSTATIC) ? SD[c] : '0;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    check_all();
    for (int k = 0; k < 200; k++) wr($urandom_range(0, NCH - 1), $urandom_range(0, 7), 1'b1);
    wr(5, 7, 1);          // static: must be rejected
    wr(300, 2, 1);
    wr(300, 0, 0);        // clear again
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
