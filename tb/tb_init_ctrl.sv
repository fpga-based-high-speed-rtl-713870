// tb_init_ctrl - RESET and PLL_LOCKED sequencing: no BUSY_O while in reset
// or unlocked; after both are good BUSY_O for exactly BUSY_CYCLES clocks,
// then DONE_O with the datapath reset released; loss of lock restarts.
`timescale 1ns/1ps
module tb_init_ctrl;
  logic clk = 0, reset = 1, pll_locked = 0;
  logic busy_o, done_o, dp_rst;
  int checks = 0, failures = 0;

  init_ctrl #(.BUSY_CYCLES(16)) dut (.*);

  always #12.5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic expect_seq(input string what);
    int nbusy;
    nbusy = 0;
    while (!busy_o) @(negedge clk);
    while (busy_o) begin
      checks++;
      if (!dp_rst || done_o) begin failures++; $display("FAIL %s: reset/done during busy", what); end
      nbusy++;
      @(negedge clk);
    end
    checks++;
    if (nbusy != 16) begin failures++; $display("FAIL %s: busy for %0d cycles", what, nbusy); end
    checks++;
    if (!done_o || dp_rst) begin failures++; $display("FAIL %s: not done after busy", what); end
  endtask

  initial begin
    repeat (10) @(negedge clk);
    pll_locked = 1;                       // locked, but RESET still high
    repeat (10) @(negedge clk);
    checks++;
    if (busy_o || done_o || !dp_rst) begin failures++; $display("FAIL left reset early"); end
    reset = 0;
    expect_seq("power-up");
    repeat (20) @(negedge clk);
    checks++;
    if (!done_o) begin failures++; $display("FAIL done dropped"); end
    pll_locked = 0;                       // lose lock
    repeat (4) @(negedge clk);
    checks++;
    if (done_o || !dp_rst) begin failures++; $display("FAIL still done after unlock"); end
    pll_locked = 1;
    expect_seq("relock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
