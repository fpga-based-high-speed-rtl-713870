// descrambler - inverse of the scrambler on the receive side.
//
// Per lane of LANE_W bits:  d = s ^ s_prev ^ rotr1(s_prev), where s_prev is the
// previous received scrambled word of that lane. Because the rule uses only
// received words, the descrambler is correct from the second word after reset
// (or after any line error) on; a single line bit error corrupts at most three
// output bits (one in this word, two in the next).
//
// Interface: din taken when en is high; dout registered, valid one clock later
// (latency 1, like the scrambler). Two 52-bit registers for the default size:
// the previous word and the output. rst is synchronous and clears both.
// The lane split is the paper's; the feedback rule is this design's (it must
// match the scrambler).
module descrambler #(
  parameter int unsigned LANES  = 4,
  parameter int unsigned LANE_W = 13
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      en,
  input  logic [LANES*LANE_W-1:0]   din,
  output logic [LANES*LANE_W-1:0]   dout
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [LANE_W-1:0] prev_q, out_q;
    logic [LANE_W-1:0] s;
    assign s = din[l*LANE_W +: LANE_W];

    always_ff @(posedge clk) begin
      if (rst) begin
        prev_q <= '0;
        out_q  <= '0;
      end else if (en) begin
        prev_q <= s;
        out_q  <= s ^ prev_q ^ {prev_q[0], prev_q[LANE_W-1:1]};
      end
    end

    assign dout[l*LANE_W +: LANE_W] = out_q;
  end

endmodule
