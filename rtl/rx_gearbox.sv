// rx_gearbox - receive DEMUX 40 -> 120 bits with clock domain crossing.
//
// Write side (120 MHz MGT clock): each aligned 40-bit word from the frame
// aligner is written into its lane of the current dual-port RAM entry: word 0
// (the header word) into frame[119:80], word 1 into frame[79:40], word 2 into
// frame[39:0]. Writing starts at the first word 0 after lock. When word 2 is
// written the entry is complete and the write pointer advances; the pointer
// is kept in Gray code and passed to the frame clock through two flops.
// Read side (40 MHz frame clock): whenever the read pointer is behind the
// synchronised write pointer one entry is read; the RAM read is registered so
// frame/frame_valid appear the clock after the read decision.
//
// Writer and reader run at the same frame rate (the clocks are locked 3:1),
// so the pointers keep a small constant distance; DEPTH = 8 leaves room for
// the synchroniser delay and any phase between the recovered frame boundary
// and the frame clock. The RAM-plus-controller structure is the paper's; the
// pointer scheme and depth are this design's.
module rx_gearbox
  import daq_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk_mgt,
  input  logic               rst_mgt,
  input  logic [WORD_W-1:0]  word,
  input  logic [1:0]         word_idx,
  input  logic               word_valid,
  input  logic               clk_frame,
  input  logic               rst_frame,
  output logic [FRAME_W-1:0] frame,
  output logic               frame_valid
);

  // ---------------- write side ----------------
  logic          armed_q;
  logic [AW:0]   wptr_q, wgray_q;
  logic [AW:0]   rptr_q, wgray_s, wptr_s;
  logic          wr;
  logic [2:0]    we;

  assign wr = word_valid && (armed_q || word_idx == 2'd0);
  assign we = wr ? (3'b100 >> word_idx) : 3'b000;

  always_ff @(posedge clk_mgt) begin
    if (rst_mgt) begin
      armed_q <= 1'b0;
      wptr_q  <= '0;
      wgray_q <= '0;
    end else begin
      if (wr) armed_q <= 1'b1;
      if (!word_valid) armed_q <= 1'b0;
      if (wr && word_idx == 2'd2) begin
        wptr_q  <= wptr_q + 1'b1;
        wgray_q <= (wptr_q + 1'b1) ^ ((wptr_q + 1'b1) >> 1);
      end
    end
  end

  dp_ram #(.WIDTH(FRAME_W), .LANE_W(WORD_W), .DEPTH(DEPTH)) u_ram (
    .wclk (clk_mgt),   .we (we), .waddr (wptr_q[AW-1:0]), .wdata ({3{word}}),
    .rclk (clk_frame), .raddr (rptr_q[AW-1:0]), .rdata (frame)
  );

  // ---------------- read side ----------------
  logic        rd;

  sync2 #(.WIDTH(AW+1)) u_sync (.clk(clk_frame), .rst(rst_frame), .d(wgray_q), .q(wgray_s));

  always_comb begin
    wptr_s[AW] = wgray_s[AW];
    for (int i = AW - 1; i >= 0; i--) wptr_s[i] = wptr_s[i+1] ^ wgray_s[i];
  end

  assign rd = (rptr_q != wptr_s);

  always_ff @(posedge clk_frame) begin
    if (rst_frame) begin
      rptr_q      <= '0;
      frame_valid <= 1'b0;
    end else begin
      frame_valid <= rd;
      if (rd) rptr_q <= rptr_q + 1'b1;
    end
  end

endmodule
