// tb_dp_ram - writes random lanes on one clock, reads on an unrelated clock,
// and compares every read with a model memory (addresses kept apart so no
// read races a write to the same entry).
`timescale 1ns/1ps
module tb_dp_ram;
  logic wclk = 0, rclk = 0;
  logic [2:0] we = '0;
  logic [1:0] waddr = '0, raddr = '0;
  logic [119:0] wdata = '0, rdata;
  logic [119:0] model [4];
  int checks = 0, failures = 0;

  dp_ram #(.WIDTH(120), .LANE_W(40), .DEPTH(4)) dut (.*);

  always #4.1 wclk = ~wclk;
  always #6.3 rclk = ~rclk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    // initialise through full-width writes
    for (int a = 0; a < 4; a++) begin
      @(negedge wclk); we = 3'b111; waddr = 2'(a); wdata = {$urandom, $urandom, $urandom, $urandom}; model[a] = wdata;
    end
    @(negedge wclk); we = '0;
    for (int t = 0; t < 300; t++) begin
      // write random lanes of one entry
      @(negedge wclk);
      waddr = 2'($urandom); we = 3'($urandom); wdata = {$urandom, $urandom, $urandom, $urandom};
      for (int l = 0; l < 3; l++) if (we[l]) model[waddr][40*l +: 40] = wdata[40*l +: 40];
      @(negedge wclk); we = '0;
      // read every entry back on the read clock
      for (int a = 0; a < 4; a++) begin
        @(negedge rclk); raddr = 2'(a);
        @(negedge rclk);
        checks++;
        if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d got %h exp %h", a, rdata, model[a]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
