// tb_scrambler - checks the scrambler against the lane-step reference:
// reset seed, one-clock latency, hold when en is low, and that a long run of
// all-zero input never produces an all-zero (DC) line word.
`timescale 1ns/1ps
module tb_scrambler;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic [51:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [15:0] st [4];

  scrambler #(.LANES(4), .LANE_W(13)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic [51:0] exp, input string what);
    checks++;
    if (dout !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, dout, exp); end
  endtask

  function automatic logic [51:0] packst();
    logic [51:0] v;
    for (int l = 0; l < 4; l++) v[13*l +: 13] = st[l][12:0];
    return v;
  endfunction

  initial begin
    for (int l = 0; l < 4; l++) st[l] = scr_seed(l, 13);
    repeat (3) @(posedge clk);
    #1 rst = 0;
    chk(packst(), "seed");
    // random data, random enable
    for (int i = 0; i < 400; i++) begin
      din = {$urandom, $urandom};
      en  = ($urandom % 4) != 0;
      @(posedge clk); #1;
      if (en) for (int l = 0; l < 4; l++) st[l] = scr_step(st[l], 16'(din[13*l +: 13]), 13);
      chk(packst(), en ? "scramble" : "hold");
    end
    // all-zero input: line words must keep changing and never be all zero
    en = 1; din = '0;
    for (int i = 0; i < 200; i++) begin
      logic [51:0] nprev;
      nprev = dout;
      @(posedge clk); #1;
      for (int l = 0; l < 4; l++) st[l] = scr_step(st[l], 16'd0, 13);
      chk(packst(), "zero input");
      checks++;
      if (dout == '0 || dout == nprev) begin failures++; $display("FAIL static line word %h", dout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
