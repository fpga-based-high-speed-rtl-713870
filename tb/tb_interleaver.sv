// tb_interleaver - checks the interleaver permutation bit by bit against the
// closed-form position formula, that the header stays in frame[119:116],
// and that every burst of up to 7 (14) consecutive frame bits below the
// header touches each codeword at most once (twice).
`timescale 1ns/1ps
module tb_interleaver;
  import tb_ref_pkg::*;
  logic [119:0] cw, frame;
  int checks = 0, failures = 0;
  int owner [120];   // codeword that lands on each frame bit

  interleaver dut (.*);

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int e = 0; e < 8; e++)
      for (int b = 0; b < 15; b++) begin
        cw = '0; cw[15*e + b] = 1'b1; #1;
        checks++;
        if (frame !== (120'd1 << il_pos(e, b))) begin
          failures++; $display("FAIL cw%0d bit %0d -> %h", e, b, frame);
        end
        owner[il_pos(e, b)] = e;
      end
    for (int t = 0; t < 50; t++) begin
      cw = {$urandom, $urandom, $urandom, $urandom}; #1;
      checks++;
      if (frame[119:116] !== cw[119:116] || frame !== ref_interleave(cw)) begin failures++; $display("FAIL random frame"); end
    end
    for (int len = 1; len <= 14; len++)
      for (int start = 115; start - len + 1 >= 0; start--) begin
        int hits [8];
        int worst;
        hits = '{default: 0};
        for (int p = start; p > start - len; p--) hits[owner[p]]++;
        worst = 0;
        foreach (hits[e]) if (hits[e] > worst) worst = hits[e];
        checks++;
        if (worst > ((len <= 7) ? 1 : 2)) begin failures++; $display("FAIL burst len %0d at %0d hits %0d", len, start, worst); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
