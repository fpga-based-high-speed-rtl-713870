// tb_async_fifo - write clock 120 MHz, read clock 125 MHz. Fills the FIFO
// with no reads (full must rise after DEPTH words and further writes must
// be dropped), drains it (empty must rise, data in order), then runs random
// concurrent traffic against a queue model.
`timescale 1ps/1ps
module tb_async_fifo;
  localparam int D = 16;
  logic wr_clk = 0, rd_clk = 0, wr_rst = 1, rd_rst = 1;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [127:0] wr_data = '0, rd_data;
  logic [127:0] model [$];
  int checks = 0, failures = 0, accepted = 0;

  async_fifo #(.WIDTH(128), .DEPTH(D)) dut (.*);

  always #4166 wr_clk = ~wr_clk;
  always #4000 rd_clk = ~rd_clk;
  initial begin #(200000000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  bit rd_pending = 0;
  always @(posedge rd_clk) begin
    if (rd_pending) begin
      checks++;
      if (model.size() == 0 || rd_data !== model[0]) begin failures++; $display("FAIL read data %h", rd_data); end
      if (model.size() != 0) void'(model.pop_front());
    end
    rd_pending = rd_en && !empty;
  end

  always @(posedge wr_clk) if (wr_en && !full) begin model.push_back(wr_data); accepted++; end

  initial begin
    repeat (4) @(posedge rd_clk);
    @(negedge wr_clk) wr_rst = 0;
    @(negedge rd_clk) rd_rst = 0;
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty after reset"); end
    // fill without reading
    for (int i = 0; i < D + 8; i++) begin
      @(negedge wr_clk); wr_en = 1; wr_data = {4{$urandom}};
    end
    @(negedge wr_clk); wr_en = 0;
    checks++;
    if (!full) begin failures++; $display("FAIL not full"); end
    checks++;
    if (accepted != D) begin failures++; $display("FAIL accepted %0d of %0d", accepted, D + 8); end
    // drain
    repeat (6) @(negedge rd_clk);
    while (!empty) begin @(negedge rd_clk); rd_en = 1; end
    @(negedge rd_clk); rd_en = 0;
    repeat (4) @(negedge rd_clk);
    checks++;
    if (model.size() != 0 || !empty) begin failures++; $display("FAIL %0d left after drain", model.size()); end
    // random traffic
    fork
      for (int i = 0; i < 3000; i++) begin
        @(negedge wr_clk); wr_en = ($urandom % 3) != 0; wr_data = {4{$urandom}};
      end
      for (int i = 0; i < 3300; i++) begin
        @(negedge rd_clk); rd_en = ($urandom % 3) != 0;
      end
    join
    @(negedge wr_clk); wr_en = 0;
    repeat (20) @(negedge rd_clk) rd_en = 1;
    @(negedge rd_clk) rd_en = 0;
    repeat (4) @(negedge rd_clk);
    checks++;
    if (model.size() != 0) begin failures++; $display("FAIL %0d words never read", model.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
