// tb_deinterleaver - frames built with the reference interleaver formula must
// come back as the original codeword vector; also checks single-bit frames.
`timescale 1ns/1ps
module tb_deinterleaver;
  import tb_ref_pkg::*;
  logic [119:0] frame, cw, src;
  int checks = 0, failures = 0;

  deinterleaver dut (.*);

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int e = 0; e < 8; e++)
      for (int b = 0; b < 15; b++) begin
        frame = 120'd1 << il_pos(e, b); #1;
        checks++;
        if (cw !== (120'd1 << (15*e + b))) begin failures++; $display("FAIL pos %0d", il_pos(e, b)); end
      end
    for (int t = 0; t < 200; t++) begin
      src = {$urandom, $urandom, $urandom, $urandom};
      frame = ref_interleave(src); #1;
      checks++;
      if (cw !== src) begin failures++; $display("FAIL random %h", src); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
