// tb_frame_aligner - builds a serial stream of 120-bit frames (headers 1010
// or 0101, random payload), cuts it into 40-bit words starting at a random
// bit offset and checks that the aligner
//  * locks, with fewer than 120 bit slips,
//  * locks exactly 33 header checks (1 + 32 confirmations) after its last slip,
//  * then delivers the original frames, header word flagged as word 0;
// and, in a second run, that a stream whose header is spoiled in every 20th
// frame never locks (the 32 confirmations restart) until the spoiling stops.
`timescale 1ns/1ps
module tb_frame_aligner;
  logic clk = 0, rst = 1;
  logic [39:0] rx_word = '0, word;
  logic [1:0] word_idx;
  logic word_valid, header_lock, bitslip, hdr_match;
  logic [6:0] bs_count;
  int checks = 0, failures = 0;

  frame_aligner #(.CONFIRM(32)) dut (.*);

  always #4 clk = ~clk;
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- serial source ----
  logic [119:0] frames [$];
  bit           bits [$];
  int           spoil_every = 0, nframes = 0;

  function automatic void add_frame();
    logic [119:0] f;
    f = {($urandom % 2) ? 4'b1010 : 4'b0101, 20'($urandom), $urandom, $urandom, $urandom};
    frames.push_back(f);
    if (spoil_every != 0 && nframes % spoil_every == 0) f[119:116] = 4'b1111;
    nframes++;
    for (int i = 119; i >= 0; i--) bits.push_back(f[i]);
  endfunction

  always @(posedge clk) begin
    while (bits.size() < 40) add_frame();
    for (int i = 39; i >= 0; i--) rx_word[i] <= bits.pop_front();
  end

  // ---- observation ----
  int slips, checks_since_slip, lock_checks;
  bit locked_seen;
  always @(posedge clk) if (!rst) begin
    if (bitslip) begin slips++; checks_since_slip = 0; end
    else if (word_idx == 2'd0 && !header_lock) checks_since_slip++;
    if (header_lock && !locked_seen) begin locked_seen = 1; lock_checks = checks_since_slip; end
  end

  task automatic run(input int offset, input int spoil);
    logic [119:0] asm_f;
    int matched, first;
    frames.delete(); bits.delete(); nframes = 0; spoil_every = spoil;
    rst = 1; slips = 0; checks_since_slip = 0; locked_seen = 0;
    repeat (2) add_frame();
    repeat (offset) void'(bits.pop_front());
    repeat (3) @(posedge clk);
    #1 rst = 0;
    if (spoil != 0) begin
      repeat (3000) @(posedge clk);
      checks++;
      if (header_lock) begin failures++; $display("FAIL locked with spoiled headers"); end
      checks++;
      if (slips < 10) begin failures++; $display("FAIL too few slips (%0d) with spoiled headers", slips); end
      spoil_every = 0;
    end
    while (!header_lock) @(posedge clk);
    @(negedge clk);
    checks++;
    if (slips >= 120 && spoil == 0) begin failures++; $display("FAIL %0d slips", slips); end
    checks++;
    if (lock_checks != 33) begin failures++; $display("FAIL locked after %0d checks past the last slip", lock_checks); end
    checks++;
    if (bs_count != 7'(slips)) begin failures++; $display("FAIL bs_count %0d slips %0d", bs_count, slips); end
    // collect 20 aligned frames and find them in the sent list
    while (!(word_valid && word_idx == 2'd0)) @(negedge clk);
    matched = 0; first = -1;
    for (int k = 0; k < 20; k++) begin
      for (int w = 0; w < 3; w++) begin
        checks++;
        if (!word_valid || word_idx != 2'(w)) begin failures++; $display("FAIL word index %0d exp %0d", word_idx, w); end
        asm_f[119 - 40*w -: 40] = word;
        @(negedge clk);
      end
      if (first < 0) foreach (frames[i]) if (frames[i] == asm_f) first = i;
      checks++;
      if (first < 0 || frames[first + k] !== asm_f) begin failures++; $display("FAIL frame %0d not in sequence", k); end
    end
    $display("offset %0d: locked after %0d slips", offset, slips);
  endtask

  initial begin
    run(0, 0);
    run(1, 0);
    run(39, 0);
    run(40, 0);
    run(119, 0);
    for (int i = 0; i < 5; i++) run($urandom % 120, 0);
    run(57, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
