// daq_rx - receiver chain: frame aligner -> DEMUX -> deinterleaver ->
// BCH decoder -> descrambler.
//
// The frame aligner finds the header in the 40-bit deserialiser stream by
// bit slipping and locks after 32 further header matches; the receive
// gearbox rebuilds 120-bit frames on the 40 MHz frame clock. Each frame's
// format comes from its own header: a header within one bit of 0101 is a
// wide-bus frame, anything else is treated as standard (a standard header is
// also protected by codeword 7, so up to two header bit errors are mended by
// the decoder). Standard frames are deinterleaved and decoded (2 clocks);
// wide-bus frames bypass the decoder through an equally long delay line.
// The descrambler (1 clock) then restores {sc, data}.
//
// Output: one rx_rec_t record per received frame, out_valid for one frame
// clock, 3 frame clocks after the gearbox delivers the frame. out_corrected
// and out_uncorrectable give the per-codeword decoder flags of that frame
// (zero for wide-bus frames). The chain order is the paper's; the per-frame
// format detection and the record layout are this design's.
module daq_rx
  import daq_pkg::*;
(
  input  logic               clk_mgt,
  input  logic               rst_mgt,
  input  logic [WORD_W-1:0]  rx_word,
  input  logic               clk_frame,
  input  logic               rst_frame,
  output logic               out_valid,
  output rx_rec_t            out_rec,
  output logic [N_CW-1:0]    out_corrected,
  output logic [N_CW-1:0]    out_uncorrectable,
  output logic               header_lock,
  output logic [6:0]         bs_count,
  output logic               bitslip
);

  // ---------------- MGT clock: alignment ----------------
  logic [WORD_W-1:0] al_word;
  logic [1:0]        al_idx;
  logic              al_valid, hdr_match;

  frame_aligner u_fa (
    .clk (clk_mgt), .rst (rst_mgt), .rx_word (rx_word),
    .word (al_word), .word_idx (al_idx), .word_valid (al_valid),
    .header_lock (header_lock), .bitslip (bitslip), .bs_count (bs_count),
    .hdr_match (hdr_match)
  );

  // ---------------- MGT -> frame clock ----------------
  logic [FRAME_W-1:0] frame;
  logic               frame_valid;

  rx_gearbox u_gb (
    .clk_mgt (clk_mgt), .rst_mgt (rst_mgt),
    .word (al_word), .word_idx (al_idx), .word_valid (al_valid),
    .clk_frame (clk_frame), .rst_frame (rst_frame),
    .frame (frame), .frame_valid (frame_valid)
  );

  // ---------------- frame clock: decode ----------------
  logic [3:0]         hdr;
  logic               is_wide;
  logic [FRAME_W-1:0] cw;

  assign hdr     = frame[FRAME_W-1 -: 4];
  assign is_wide = $countones(hdr ^ HDR_WIDE) <= 1;

  deinterleaver u_dil (.frame (frame), .cw (cw));

  logic               dec_valid;
  logic [MSG_W-1:0]   dec_msg;
  logic [N_CW-1:0]    dec_corr, dec_unc;

  bch_decoder #(.NCW(N_CW)) u_dec (
    .clk (clk_frame), .rst (rst_frame), .in_valid (frame_valid), .cw (cw),
    .out_valid (dec_valid), .msg (dec_msg),
    .corrected (dec_corr), .uncorrectable (dec_unc)
  );

  // delay line matching the decoder latency, carries the raw frame and mode
  logic [FRAME_W-1:0] frame_d1, frame_d2;
  logic               wide_d1, wide_d2;

  always_ff @(posedge clk_frame) begin
    frame_d1 <= frame;
    frame_d2 <= frame_d1;
    if (rst_frame) begin
      wide_d1 <= 1'b0;
      wide_d2 <= 1'b0;
    end else begin
      wide_d1 <= is_wide;
      wide_d2 <= wide_d1;
    end
  end

  logic [PAY_W-1:0]  dsc_a_in, dsc_a;
  logic [WIDE_X-1:0] dsc_b;

  assign dsc_a_in = wide_d2 ? frame_d2[115:64] : dec_msg[PAY_W-1:0];

  descrambler #(.LANES(4), .LANE_W(13)) u_dsc_a (
    .clk (clk_frame), .rst (rst_frame), .en (dec_valid),
    .din (dsc_a_in), .dout (dsc_a)
  );

  descrambler #(.LANES(4), .LANE_W(16)) u_dsc_b (
    .clk (clk_frame), .rst (rst_frame), .en (dec_valid && wide_d2),
    .din (frame_d2[63:0]), .dout (dsc_b)
  );

  logic            wide_d3;
  logic [3:0]      hdr_d3;
  logic [N_CW-1:0] corr_d3, unc_d3;

  always_ff @(posedge clk_frame) begin
    if (rst_frame) begin
      out_valid <= 1'b0;
      wide_d3   <= 1'b0;
      hdr_d3    <= '0;
      corr_d3   <= '0;
      unc_d3    <= '0;
    end else begin
      out_valid <= dec_valid;
      wide_d3   <= wide_d2;
      hdr_d3    <= wide_d2 ? frame_d2[FRAME_W-1 -: 4] : dec_msg[MSG_W-1 -: 4];
      corr_d3   <= wide_d2 ? '0 : dec_corr;
      unc_d3    <= wide_d2 ? '0 : dec_unc;
    end
  end

  always_comb begin
    out_rec               = '0;
    out_rec.wide          = wide_d3;
    out_rec.uncorrectable = |unc_d3;
    out_rec.header        = hdr_d3;
    out_rec.sc            = dsc_a[51:48];
    out_rec.data          = wide_d3 ? {dsc_b, dsc_a[47:0]} : {64'd0, dsc_a[47:0]};
  end

  assign out_corrected     = corr_d3;
  assign out_uncorrectable = unc_d3;

endmodule
