// dp_ram - simple dual-port RAM with independent write and read clocks.
//
// Write port (wclk): WIDTH bits split into WIDTH/LANE_W lanes, each with its
// own write enable, so the receive gearbox can write one 40-bit word of a
// 120-bit frame at a time while the transmit gearbox writes whole frames.
// Read port (rclk): full WIDTH, registered (rdata valid one rclk after raddr).
// Reading an entry in the same cycle it is written returns old or new data;
// the gearbox controllers keep their addresses apart so that never happens.
// Written as an array so synthesis maps it to block or distributed RAM. The
// paper names this dual-port RAM; depth and lane enables are this design's.
module dp_ram #(
  parameter int unsigned WIDTH  = 120,
  parameter int unsigned LANE_W = 40,
  parameter int unsigned DEPTH  = 4,
  localparam int unsigned LANES = WIDTH / LANE_W,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              wclk,
  input  logic [LANES-1:0]  we,
  input  logic [AW-1:0]     waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              rclk,
  input  logic [AW-1:0]     raddr,
  output logic [WIDTH-1:0]  rdata
);

  logic [LANES-1:0][LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    for (int l = 0; l < LANES; l++)
      if (we[l]) mem[waddr][l] <= wdata[l*LANE_W +: LANE_W];
  end

  always_ff @(posedge rclk) rdata <= mem[raddr];

endmodule
