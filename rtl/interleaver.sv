// interleaver - block interleaver over the eight BCH codewords of a standard
// frame.
//
// Bits are read out column by column (bit j of cw7, cw6, ..., cw0, then bit
// j-1, ...) so that a burst of line errors is spread over different codewords:
// outside the header, any burst of up to 7 consecutive bits touches each
// codeword at most once,
// and any burst of up to 14 bits at most twice, which the BCH(15,7,2) code
// still corrects. The 4-bit header (the top message bits of cw7) stays at
// frame[119:116] so the receiver can find it; message bits fill
// frame[115:64] and parity bits frame[63:0]. The permutation is daq_pkg's
// IL_MAP.
//
// Purely combinational (no added latency, as in the paper). The column-wise
// rule and the fixed header position follow the paper's figures; the exact
// order inside the message and parity regions is this design's choice.
module interleaver
  import daq_pkg::*;
(
  input  logic [FRAME_W-1:0] cw,
  output logic [FRAME_W-1:0] frame
);

  for (genvar p = 0; p < FRAME_W; p++) begin : g_bit
    assign frame[p] = cw[IL_MAP[p]];
  end

endmodule
