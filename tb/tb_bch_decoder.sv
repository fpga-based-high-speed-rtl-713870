// tb_bch_decoder - every message with every single and every double bit
// error (spread over the eight parallel decoders) must come back corrected
// with the 'corrected' flag, error-free words unflagged, two clocks after
// the input. Three-error words are checked never to be passed through as if
// clean; all four-bit-flip patterns landing on S1 = 0 must be flagged.
`timescale 1ns/1ps
module tb_bch_decoder;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [119:0] cw = '0;
  logic out_valid;
  logic [55:0] msg;
  logic [7:0] corrected, uncorrectable;
  int checks = 0, failures = 0, n_unc = 0;

  bch_decoder #(.NCW(8)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  typedef struct { logic [55:0] m; int nerr; } exp_t;
  exp_t q[$];

  // error patterns: index 0 none, 1..15 single, then all 105 pairs
  logic [14:0] pat [121];
  initial begin
    int k;
    pat[0] = '0; k = 1;
    for (int i = 0; i < 15; i++) begin pat[k] = 15'(1) << i; k++; end
    for (int i = 0; i < 15; i++) for (int j = i + 1; j < 15; j++) begin pat[k] = (15'(1) << i) | (15'(1) << j); k++; end
  end

  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      exp_t x;
      bit bad;
      x = q.pop_front();
      checks++;
      bad = 0;
      if (x.nerr <= 2) begin
        if (msg !== x.m) begin bad = 1; if (failures < 10) $display("FAIL msg %h exp %h nerr %0d", msg, x.m, x.nerr); end
        if (uncorrectable != 0) begin bad = 1; if (failures < 10) $display("FAIL unc flag"); end
        if ((x.nerr == 0) != (corrected == 0)) begin bad = 1; if (failures < 10) $display("FAIL corrected flag %b nerr %0d", corrected, x.nerr); end
      end else begin
        if (uncorrectable == 0 && corrected == 0) begin bad = 1; if (failures < 10) $display("FAIL 3 errors looked clean"); end
        if (uncorrectable != 0) n_unc++;
      end
      failures += int'(bad);
    end
  end

  initial begin
    exp_t x;
    int lat;
    repeat (3) @(posedge clk);
    rst = 0;
    // latency check
    @(negedge clk);
    in_valid = 1; cw = '0;
    @(negedge clk); in_valid = 0;
    x.m = '0; x.nerr = 0; q.push_back(x);
    lat = 0;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 1) begin failures++; $display("FAIL latency %0d", lat + 1); end
    @(negedge clk);
    // every message x every 0/1/2 error pattern; slot e uses message m+e
    for (int m = 0; m < 128; m++) begin
      for (int p = 0; p < 121; p++) begin
        for (int e = 0; e < 8; e++) begin
          logic [6:0] mm;
          mm = 7'(m + 13*e);
          x.m[7*e +: 7] = mm;
          cw[15*e +: 15] = ref_encode(mm) ^ pat[(p + 37*e) % 121];
        end
        x.nerr = 0;
        for (int e = 0; e < 8; e++) if ($countones(pat[(p + 37*e) % 121]) > x.nerr) x.nerr = $countones(pat[(p + 37*e) % 121]);
        in_valid = 1; q.push_back(x);
        @(negedge clk);
      end
    end
    // three errors in every codeword
    for (int t = 0; t < 300; t++) begin
      for (int e = 0; e < 8; e++) begin
        logic [14:0] ep;
        ep = '0;
        while ($countones(ep) < 3) ep[$urandom % 15] = 1'b1;
        x.m[7*e +: 7] = 7'($urandom);
        cw[15*e +: 15] = ref_encode(x.m[7*e +: 7]) ^ ep;
      end
      x.nerr = 3; in_valid = 1; q.push_back(x);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_unc == 0) begin failures++; $display("FAIL no uncorrectable word detected"); end
    $display("uncorrectable 3-error frames flagged: %0d of 300", n_unc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
