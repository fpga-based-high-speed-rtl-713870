// bch_encoder - NCW parallel systematic BCH(15,7,2) encoders.
//
// The 56 message bits {header[3:0], scrambled payload[51:0]} are cut into
// eight 7-bit groups; codeword e takes msg[7e+6:7e] and appends the 8 parity
// bits of g(x) = x^8+x^7+x^6+x^4+1 (remainder of msg(x)*x^8 / g(x)).
// Output layout: cw[15e+14 : 15e] = {msg7_e, parity8_e}, so cw7 (the top 15
// bits) starts with the header. Each codeword corrects any 2 bit errors.
//
// Purely combinational; the sender registers the result (one frame clock of
// latency). The code parameters and the eight-encoder split are the paper's;
// the generator polynomial is the textbook one for this code.
module bch_encoder
  import daq_pkg::*;
#(
  parameter int unsigned NCW = 8
) (
  input  logic [NCW*CW_K-1:0] msg,
  output logic [NCW*CW_N-1:0] cw
);

  for (genvar e = 0; e < NCW; e++) begin : g_cw
    logic [CW_K-1:0] m;
    assign m = msg[e*CW_K +: CW_K];
    assign cw[e*CW_N +: CW_N] = {m, bch_parity(m)};
  end

endmodule
