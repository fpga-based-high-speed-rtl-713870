// scrambler - self-synchronising, word-parallel scrambler for the frame
// payload.
//
// The payload is cut into LANES independent lanes of LANE_W bits (the paper
// uses four 13-bit lanes for the 52-bit slow-control + data payload of a
// standard frame). Each frame clock every lane computes
//     s = d ^ s_prev ^ rotr1(s_prev)
// where s_prev is the lane's previous scrambled word. Feedback comes only from
// the previous scrambled word, so the matching descrambler recovers after one
// word without any synchronisation and no redundancy is added to the line.
// The feedback rule and the reset seeds are this design's choice: the paper
// gives the lane split and the one-clock latency but no polynomial.
//
// Interface: din is taken when en is high; dout (registered) is both the
// output and the scrambler state, valid one clock after din (latency 1).
// When en is low the state and dout hold. rst is synchronous, active high, and
// loads a distinct non-zero seed into each lane so that an all-zero input still
// produces a changing pattern on the line.
module scrambler #(
  parameter int unsigned LANES  = 4,
  parameter int unsigned LANE_W = 13
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      en,
  input  logic [LANES*LANE_W-1:0]   din,
  output logic [LANES*LANE_W-1:0]   dout
);

  function automatic logic [LANE_W-1:0] seed(input int unsigned lane);
    logic [LANE_W-1:0] v;
    for (int unsigned b = 0; b < LANE_W; b++) v[b] = ((b + lane) % 3) == 0;
    return v;
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [LANE_W-1:0] s_q;
    logic [LANE_W-1:0] d;
    assign d = din[l*LANE_W +: LANE_W];

    always_ff @(posedge clk) begin
      if (rst)     s_q <= seed(l);
      else if (en) s_q <= d ^ s_q ^ {s_q[0], s_q[LANE_W-1:1]};
    end

    assign dout[l*LANE_W +: LANE_W] = s_q;
  end

endmodule
