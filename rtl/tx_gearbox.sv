// tx_gearbox - transmit MUX 120 -> 40 bits with clock domain crossing.
//
// A dual-port RAM sits between the 40 MHz frame clock and the 120 MHz MGT
// clock. Write side: every frame clock the 120-bit frame is written at
// address_A, which then increments. After the first write a 'started' flag
// is raised; it reaches the MGT side through a two-flop synchroniser. Read
// side: from then on the controller steps through the RAM at address_B, one
// entry every three MGT clocks, sending word 0 = frame[119:80] (the word
// holding the header) first, then frame[79:40] and frame[39:0].
//
// Both clocks come from one PLL with a 3:1 ratio, so write and read rates are
// equal (4.8 Gb/s each way) and the read address stays a fixed distance
// (about one entry) behind the write address. With DEPTH = 4 an entry is
// rewritten no earlier than four frames after it was written, well after it
// has been read. The RAM read is registered and the word register adds one
// more stage, so tx_word lags the RAM read address by two MGT clocks.
// The RAM plus control-logic structure and the 120/40 widths are the paper's;
// the control scheme and depth are this design's.
module tx_gearbox
  import daq_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk_frame,
  input  logic               rst_frame,
  input  logic [FRAME_W-1:0] frame,
  input  logic               clk_mgt,
  input  logic               rst_mgt,
  output logic [WORD_W-1:0]  tx_word,
  output logic               tx_valid
);

  // ---------------- write side (frame clock) ----------------
  logic [AW-1:0] waddr_q;
  logic          started_q;

  always_ff @(posedge clk_frame) begin
    if (rst_frame) begin
      waddr_q   <= '0;
      started_q <= 1'b0;
    end else begin
      waddr_q   <= waddr_q + 1'b1;
      started_q <= 1'b1;
    end
  end

  // ---------------- read side (MGT clock) ----------------
  logic          started_s;
  logic [AW-1:0] raddr_q;
  logic [1:0]    widx_q;      // word index of the entry now on rdata
  logic          run_q, run2_q;
  logic [FRAME_W-1:0] rdata;

  sync2 #(.WIDTH(1)) u_sync (.clk(clk_mgt), .rst(rst_mgt), .d(started_q), .q(started_s));

  always_ff @(posedge clk_mgt) begin
    if (rst_mgt) begin
      raddr_q <= '0;
      widx_q  <= '0;
      run_q   <= 1'b0;
      run2_q  <= 1'b0;
    end else begin
      run2_q <= run_q;
      if (!run_q) begin
        run_q <= started_s;
      end else begin
        widx_q <= (widx_q == 2'd2) ? 2'd0 : widx_q + 2'd1;
        if (widx_q == 2'd2) raddr_q <= raddr_q + 1'b1;
      end
    end
  end

  dp_ram #(.WIDTH(FRAME_W), .LANE_W(WORD_W), .DEPTH(DEPTH)) u_ram (
    .wclk (clk_frame), .we ({3{!rst_frame}}), .waddr (waddr_q), .wdata (frame),
    .rclk (clk_mgt),   .raddr (raddr_q),      .rdata (rdata)
  );

  // rdata holds entry raddr one clock after raddr; widx lags by the same clock
  logic [1:0] widx_d;
  always_ff @(posedge clk_mgt) begin
    if (rst_mgt) begin
      widx_d   <= '0;
      tx_word  <= '0;
      tx_valid <= 1'b0;
    end else begin
      widx_d   <= widx_q;
      tx_valid <= run2_q;
      unique case (widx_d)
        2'd0:    tx_word <= rdata[119:80];
        2'd1:    tx_word <= rdata[79:40];
        default: tx_word <= rdata[39:0];
      endcase
    end
  end

endmodule
