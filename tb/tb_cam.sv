// tb_cam: self-checking test of the content addressable memory.
//
// Fills the CAM with random 16-bit keys (with deliberate duplicates),
// searches with stored and absent keys and compares the one-cycle match
// vector with a linear search over a model array; then checks that clr
// empties the CAM.
module tb_cam;
  localparam int DEPTH = 64, KW = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic clr, we, search;
  logic [5:0] waddr;
  logic [KW-1:0] wkey, key;
  logic [DEPTH-1:0] match;
  int checks = 0, failures = 0;

  cam #(.DEPTH(DEPTH), .KW(KW)) dut (.*);

  logic [KW-1:0] mk [DEPTH];
  logic          mv [DEPTH];

  task automatic search_check(logic [KW-1:0] k);
    logic [DEPTH-1:0] exp;
    @(negedge clk);
    search = 1; key = k;
    @(negedge clk);
    search = 0;
    for (int e = 0; e < DEPTH; e++) exp[e] = mv[e] && mk[e] == k;
    checks++;
    if (match !== exp) begin failures++; $display("FAIL: key %h match %h exp %h", k, match, exp); end
  endtask

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clr = 0; we = 0; search = 0; waddr = 0; wkey = 0; key = 0;
    for (int e = 0; e < DEPTH; e++) mv[e] = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int e = 0; e < 40; e++) begin
      @(negedge clk);
      we = 1; waddr = 6'(e);
      wkey = (e % 7 == 3) ? 16'h1234 : KW'($urandom);
      mk[e] = wkey; mv[e] = 1;
    end
    @(negedge clk); we = 0;
    search_check(16'h1234);              // several matches
    for (int e = 0; e < 40; e++) search_check(mk[e]);
    for (int k = 0; k < 20; k++) search_check(KW'($urandom));
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int e = 0; e < DEPTH; e++) mv[e] = 0;
    search_check(16'h1234);
    search_check(mk[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
