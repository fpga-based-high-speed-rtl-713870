// deinterleaver - inverse of the interleaver on the receive side.
//
// Puts every frame bit p back at codeword position IL_MAP[p], giving the
// layout {cw7, ..., cw0} expected by the BCH decoder. Purely combinational.
module deinterleaver
  import daq_pkg::*;
(
  input  logic [FRAME_W-1:0] frame,
  output logic [FRAME_W-1:0] cw
);

  for (genvar p = 0; p < FRAME_W; p++) begin : g_bit
    assign cw[IL_MAP[p]] = frame[p];
  end

endmodule
