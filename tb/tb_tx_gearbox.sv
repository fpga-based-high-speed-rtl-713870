// tb_tx_gearbox - 40 MHz / 120 MHz clocks locked 3:1. Random frames go in
// one per frame clock; once tx_valid is high the 40-bit words must be the
// frames in order, MSB word first, exactly three words per frame with no gap
// (equal 4.8 Gb/s in and out).
`timescale 1ps/1ps
module tb_tx_gearbox;
  localparam int TM = 8332;            // MGT period, frame period = 3*TM
  logic clk_frame = 0, clk_mgt = 0, rst_frame = 1, rst_mgt = 1;
  logic [119:0] frame = '0;
  logic [39:0] tx_word;
  logic tx_valid;
  int checks = 0, failures = 0, nwords = 0, first_frame_lat = -1;
  logic [119:0] sent [$];
  logic [119:0] cur;

  tx_gearbox #(.DEPTH(4)) dut (.*);

  always #(TM/2) clk_mgt = ~clk_mgt;
  always #(3*TM/2) clk_frame = ~clk_frame;
  initial begin #(2000*TM); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // frame source: every frame clock a new random frame
  always @(posedge clk_frame) if (!rst_frame) begin
    sent.push_back(frame);
    frame <= {$urandom, $urandom, $urandom, $urandom};
  end

  int mcyc = 0;
  always @(posedge clk_mgt) begin
    mcyc++;
    if (tx_valid) begin
      if (nwords % 3 == 0) cur = sent.pop_front();
      if (first_frame_lat < 0) first_frame_lat = mcyc;
      checks++;
      if (tx_word !== cur[119 - 40*(nwords % 3) -: 40]) begin
        failures++; $display("FAIL word %0d got %h exp %h", nwords, tx_word, cur[119 - 40*(nwords % 3) -: 40]);
      end
      nwords++;
    end else if (nwords > 0) begin
      failures++; $display("FAIL gap in output after %0d words", nwords);
    end
  end

  initial begin
    frame = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk_frame);
    rst_frame <= 0; rst_mgt <= 0; mcyc = 0;
    repeat (600) @(posedge clk_frame);
    checks++;
    if (nwords < 3 * 590) begin failures++; $display("FAIL rate: %0d words for 600 frames", nwords); end
    checks++;
    if (sent.size() > 3) begin failures++; $display("FAIL backlog %0d frames", sent.size()); end
    $display("first word after %0d MGT clocks, %0d words", first_frame_lat, nwords);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
