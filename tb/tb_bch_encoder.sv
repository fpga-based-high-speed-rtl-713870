// tb_bch_encoder - checks all 128 messages in every one of the eight encoder
// slots against a brute-force reference table (codeword = message followed
// by the unique parity byte making it a multiple of g(x)), plus the known
// codeword of message 1, which is g(x) itself.
`timescale 1ns/1ps
module tb_bch_encoder;
  import tb_ref_pkg::*;
  logic [55:0]  msg;
  logic [119:0] cw;
  int checks = 0, failures = 0;

  bch_encoder #(.NCW(8)) dut (.*);

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    msg = 56'd1; #1;
    checks++;
    if (cw[14:0] !== 15'h01D1) begin failures++; $display("FAIL g(x) codeword %h", cw[14:0]); end
    for (int m = 0; m < 128; m++) begin
      for (int e = 0; e < 8; e++) msg[7*e +: 7] = 7'((m + 17*e) % 128);
      #1;
      for (int e = 0; e < 8; e++) begin
        checks++;
        if (cw[15*e +: 15] !== ref_encode(msg[7*e +: 7])) begin
          failures++; $display("FAIL msg %h cw %h exp %h", msg[7*e +: 7], cw[15*e +: 15], ref_encode(msg[7*e +: 7]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
