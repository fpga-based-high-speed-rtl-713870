// async_fifo - asynchronous FIFO between the receive chain and the DMA.
//
// Received frame records are written on the 120 MHz MGT clock (Wr_Clk,
// Wr_En, Data, Full) and read by the DMA on the 125 MHz PCIe clock (Rd_Clk,
// Rd_En, Empty, Data). Classic dual-clock design: binary pointers one bit
// wider than the address, converted to Gray code and passed to the other
// clock through two flops. full is raised when the write Gray pointer equals
// the synchronised read pointer with its two top bits inverted; empty when
// the read Gray pointer equals the synchronised write pointer. Both flags are
// registered and pessimistic (they clear a few clocks late).
//
// Timing: a write with wr_en && !full stores wr_data at the wr_clk edge. A
// read with rd_en && !empty puts the oldest word on rd_data at the next
// rd_clk edge (registered output, not first-word-fall-through). Writes while
// full and reads while empty are ignored. The paper names an asynchronous
// FIFO and its ports; width, depth and the pointer scheme are this design's.
module async_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] rgray_s, wgray_s;
  logic [AW:0] wbin_n, wgray_n, rbin_n, rgray_n;
  logic        do_wr, do_rd;

  // ---------------- write side ----------------
  assign do_wr   = wr_en && !full;
  assign wbin_n  = wbin_q + (AW+1)'(do_wr);
  assign wgray_n = wbin_n ^ (wbin_n >> 1);

  sync2 #(.WIDTH(AW+1)) u_sync_r2w (.clk(wr_clk), .rst(wr_rst), .d(rgray_q), .q(rgray_s));

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin_q  <= '0;
      wgray_q <= '0;
      full    <= 1'b0;
    end else begin
      wbin_q  <= wbin_n;
      wgray_q <= wgray_n;
      full    <= (wgray_n == {~rgray_s[AW:AW-1], rgray_s[AW-2:0]});
    end
  end

  always_ff @(posedge wr_clk) begin
    if (do_wr) mem[wbin_q[AW-1:0]] <= wr_data;
  end

  // ---------------- read side ----------------
  assign do_rd   = rd_en && !empty;
  assign rbin_n  = rbin_q + (AW+1)'(do_rd);
  assign rgray_n = rbin_n ^ (rbin_n >> 1);

  sync2 #(.WIDTH(AW+1)) u_sync_w2r (.clk(rd_clk), .rst(rd_rst), .d(wgray_q), .q(wgray_s));

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin_q  <= '0;
      rgray_q <= '0;
      empty   <= 1'b1;
    end else begin
      rbin_q  <= rbin_n;
      rgray_q <= rgray_n;
      empty   <= (rgray_n == wgray_s);
    end
  end

  always_ff @(posedge rd_clk) begin
    if (do_rd) rd_data <= mem[rbin_q[AW-1:0]];
  end

endmodule
