// tb_rx_gearbox - aligned words (index 0,1,2) arrive on the 120 MHz clock
// with an arbitrary phase to the 40 MHz frame clock, starting mid-frame;
// the reassembled frames must come out in order, one per frame clock,
// beginning with the first complete frame.
`timescale 1ps/1ps
module tb_rx_gearbox;
  localparam int TM = 8332;
  logic clk_frame = 0, clk_mgt = 0, rst_frame = 1, rst_mgt = 1;
  logic [39:0] word = '0;
  logic [1:0] word_idx = '0;
  logic word_valid = 0;
  logic [119:0] frame;
  logic frame_valid;
  int checks = 0, failures = 0, nout = 0;
  logic [119:0] sent [$];
  logic [119:0] cur;

  rx_gearbox #(.DEPTH(8)) dut (.*);

  always #(TM/2) clk_mgt = ~clk_mgt;
  always #(3*TM/2) clk_frame = ~clk_frame;
  initial begin #(5000*TM); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk_frame) if (frame_valid) begin
    checks++;
    if (sent.size() == 0 || frame !== sent[0]) begin failures++; $display("FAIL frame %0d", nout); end
    if (sent.size() != 0) void'(sent.pop_front());
    nout++;
  end

  initial begin
    int phase;
    phase = 1 + $urandom % 2;
    repeat (3) @(posedge clk_frame);
    rst_frame <= 0; rst_mgt <= 0;
    repeat (phase) @(posedge clk_mgt);
    // start with a partial frame (words 1 and 2) that must be skipped
    for (int w = 1; w < 3; w++) begin
      word <= {$urandom, 8'($urandom)}; word_idx <= 2'(w); word_valid <= 1;
      @(posedge clk_mgt);
    end
    for (int f = 0; f < 400; f++) begin
      cur = {$urandom, $urandom, $urandom, $urandom};
      sent.push_back(cur);
      for (int w = 0; w < 3; w++) begin
        word <= cur[119 - 40*w -: 40]; word_idx <= 2'(w); word_valid <= 1;
        @(posedge clk_mgt);
      end
    end
    word_valid <= 0;
    repeat (10) @(posedge clk_frame);
    checks++;
    if (nout != 400) begin failures++; $display("FAIL %0d frames out of 400", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
