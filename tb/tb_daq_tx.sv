// tb_daq_tx - sender chain: random standard and wide-bus frames (mode
// switching at random) go in on the 40 MHz clock; the 40-bit line words are
// reassembled into frames and compared with the reference sender model
// (reference scrambler, brute-force BCH table, formula interleaver). Also
// checks that three line words leave per frame clock.
`timescale 1ps/1ps
module tb_daq_tx;
  import tb_ref_pkg::*;
  localparam int TM = 8332;
  logic clk_frame = 0, clk_mgt = 0, rst_frame = 1, rst_mgt = 1;
  logic wide = 0;
  logic [3:0] sc = '0;
  logic [111:0] data = '0;
  logic [39:0] tx_word;
  logic tx_valid;
  logic [51:0] scr_out;
  logic [119:0] enc_out;
  int checks = 0, failures = 0, nw = 0, nframes = 0, n_wide = 0, n_std = 0;
  logic [119:0] exp_q [$];
  logic [119:0] asm_f;
  tx_model m;

  daq_tx dut (.*);

  always #(TM/2) clk_mgt = ~clk_mgt;
  always #(3*TM/2) clk_frame = ~clk_frame;
  initial begin #(10000*TM); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // source: the model sees each input in the clock it is taken
  always @(posedge clk_frame) if (!rst_frame) begin
    exp_q.push_back(m.frame(wide, sc, data));
    if (wide) n_wide++; else n_std++;
    if ($urandom % 8 == 0) wide <= !wide;
    sc   <= 4'($urandom);
    data <= {$urandom, $urandom, $urandom, $urandom};
  end

  // the first frames after reset carry the pipeline's reset contents: skip
  // (at most three) until the first expected frame appears, then compare all
  int skipped = 0;
  bit synced = 0;
  always @(posedge clk_mgt) if (!rst_mgt && tx_valid) begin
    asm_f[119 - 40*(nw % 3) -: 40] = tx_word;
    nw++;
    if (nw % 3 == 0 && !synced) begin
      if (exp_q.size() != 0 && asm_f === exp_q[0]) synced = 1;
      else skipped++;
      checks++;
      if (skipped > 3) begin failures++; $display("FAIL no sync"); end
    end
    if (nw % 3 == 0 && synced) begin
      checks++;
      if (exp_q.size() == 0 || asm_f !== exp_q[0]) begin
        failures++;
        if (failures < 5) $display("FAIL frame %0d got %h exp %h", nframes, asm_f, exp_q[0]);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      nframes++;
    end
  end

  initial begin
    m = new();
    repeat (3) @(posedge clk_frame);
    rst_frame <= 0; rst_mgt <= 0;
    repeat (1000) @(posedge clk_frame);
    checks++;
    if (nframes < 990) begin failures++; $display("FAIL only %0d frames for 1000 frame clocks", nframes); end
    checks++;
    if (n_wide == 0 || n_std == 0) begin failures++; $display("FAIL mode switch not exercised"); end
    $display("frames %0d (standard %0d, wide %0d)", nframes, n_std, n_wide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
