// tb_descrambler - feeds words scrambled by the reference model into the
// descrambler and checks that the plain words come back one clock later,
// starting with the second word (self-synchronisation), including after an
// injected line error has flushed through.
`timescale 1ns/1ps
module tb_descrambler;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic [51:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [15:0] st [4];
  logic [51:0] plain, plain_q, scr;

  descrambler #(.LANES(4), .LANE_W(13)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    // transmitter started from an arbitrary state: the receiver must not care
    for (int l = 0; l < 4; l++) st[l] = 16'($urandom) & 16'h1fff;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 500; i++) begin
      plain = {$urandom, $urandom};
      for (int l = 0; l < 4; l++) begin
        st[l] = scr_step(st[l], 16'(plain[13*l +: 13]), 13);
        scr[13*l +: 13] = st[l][12:0];
      end
      din = scr;
      if (i == 250) din[17] = ~din[17];   // single line error
      en = 1;
      @(posedge clk); #1;
      if (i >= 1 && !(i == 250 || i == 251)) begin
        checks++;
        if (dout !== plain) begin failures++; $display("FAIL word %0d got %h exp %h", i, dout, plain); end
      end
      if (i == 250) begin
        checks++;
        if ($countones(dout ^ plain) != 1) begin failures++; $display("FAIL error spread %0d", $countones(dout ^ plain)); end
      end
    end
    // hold when en is low
    plain_q = dout; en = 0; din = '1;
    repeat (3) @(posedge clk);
    #1 checks++;
    if (dout !== plain_q) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
