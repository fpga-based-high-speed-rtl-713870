// daq_tx - sender chain: scrambler -> BCH encoders -> interleaver -> MUX.
//
// Each 40 MHz frame clock one frame is built from the slow-control nibble sc
// and the data word, in one of two formats chosen per frame by 'wide':
//  standard (wide = 0): {sc, data[47:0]} (52 bits) is scrambled in four
//    13-bit lanes; the header 1010 and the 52 scrambled bits form the 56
//    message bits of eight BCH(15,7,2) encoders; the 120 coded bits are
//    interleaved with the header kept at frame[119:116].
//  wide bus (wide = 1): no FEC. {sc, data[47:0]} goes through the same four
//    lanes and data[111:48] through four further 16-bit lanes; the frame is
//    {0101, scrambled 52 bits, scrambled 64 bits}, not interleaved.
// The frame then enters the transmit gearbox and leaves as three 40-bit
// words per frame on the 120 MHz MGT clock, header word first.
//
// Latency: scrambler 1 frame clock, encoder/frame register 1 frame clock,
// then the gearbox (about 3 frame clocks including its synchroniser start-up
// distance). The standard format, header values, lane split and encoder
// count are the paper's; how the wide-bus frame is scrambled and laid out is
// this design's (the paper only gives its field widths).
module daq_tx
  import daq_pkg::*;
(
  input  logic               clk_frame,
  input  logic               rst_frame,
  input  logic               clk_mgt,
  input  logic               rst_mgt,
  input  logic               wide,
  input  logic [3:0]         sc,
  input  logic [DATA_W-1:0]  data,
  output logic [WORD_W-1:0]  tx_word,
  output logic               tx_valid,
  // observation points (timing-diagram signals)
  output logic [PAY_W-1:0]   scr_out,
  output logic [FRAME_W-1:0] enc_out
);

  logic [PAY_W-1:0]   scr_a;
  logic [WIDE_X-1:0]  scr_b;
  logic               wide_q, wide_q2;
  logic [FRAME_W-1:0] cw, enc_q, frame, frame_il;

  scrambler #(.LANES(4), .LANE_W(13)) u_scr_a (
    .clk (clk_frame), .rst (rst_frame), .en (1'b1),
    .din ({sc, data[47:0]}), .dout (scr_a)
  );

  scrambler #(.LANES(4), .LANE_W(16)) u_scr_b (
    .clk (clk_frame), .rst (rst_frame), .en (wide),
    .din (data[111:48]), .dout (scr_b)
  );

  bch_encoder #(.NCW(N_CW)) u_enc (.msg ({HDR_STD, scr_a}), .cw (cw));

  always_ff @(posedge clk_frame) begin
    if (rst_frame) begin
      wide_q  <= 1'b0;
      wide_q2 <= 1'b0;
      enc_q   <= '0;
    end else begin
      wide_q  <= wide;
      wide_q2 <= wide_q;
      enc_q   <= wide_q ? {HDR_WIDE, scr_a, scr_b} : cw;
    end
  end

  interleaver u_il (.cw (enc_q), .frame (frame_il));

  assign frame = wide_q2 ? enc_q : frame_il;

  tx_gearbox u_gb (
    .clk_frame (clk_frame), .rst_frame (rst_frame), .frame (frame),
    .clk_mgt   (clk_mgt),   .rst_mgt   (rst_mgt),
    .tx_word   (tx_word),   .tx_valid  (tx_valid)
  );

  assign scr_out = scr_a;
  assign enc_out = enc_q;

endmodule
