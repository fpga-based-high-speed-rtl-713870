// daq_pkg - constants, types and GF(16)/BCH(15,7) helper functions shared by
// the optical-link DAQ sender and receiver.
//
// Frame: 120 bits per 40 MHz frame clock, sent as three 40-bit words at
// 120 MHz (4.8 Gb/s). Two frame formats exist, told apart by a 4-bit header
// that always sits in frame[119:116]:
//   standard   1010 : header, 4-bit slow control, 48-bit data, 64-bit FEC
//                      (eight BCH(15,7,2) codewords, interleaved)
//   wide bus   0101 : header, 4-bit slow control, 112-bit data, no FEC
// The header values, field widths, the 4 x 13-bit scrambler split and the
// eight (15,7,2) codewords follow the paper. The BCH generator polynomial,
// the field polynomial and the exact interleaving order are this design's
// choices (the paper does not print them).
package daq_pkg;

  localparam int unsigned FRAME_W = 120;
  localparam int unsigned WORD_W  = 40;
  localparam int unsigned N_CW    = 8;    // BCH codewords per standard frame
  localparam int unsigned CW_N    = 15;   // codeword length
  localparam int unsigned CW_K    = 7;    // message bits per codeword
  localparam int unsigned CW_P    = CW_N - CW_K;  // 8 parity bits
  localparam int unsigned MSG_W   = N_CW * CW_K;  // 56 = header + 52
  localparam int unsigned PAY_W   = 52;   // SC + 48 data bits (standard)
  localparam int unsigned WIDE_X  = 64;   // extra data bits in a wide frame
  localparam int unsigned DATA_W  = 112;  // data field of a wide frame
  localparam int unsigned REC_W   = 128;  // received-frame record to the FIFO

  localparam logic [3:0] HDR_STD  = 4'b1010;
  localparam logic [3:0] HDR_WIDE = 4'b0101;

  typedef enum logic {MODE_STD = 1'b0, MODE_WIDE = 1'b1} frame_mode_e;

  // Received frame record handed to the DMA side (128 bits).
  typedef struct packed {
    logic        wide;           // 1 = wide-bus frame
    logic        uncorrectable;  // some codeword had more than 2 errors
    logic [5:0]  rsvd;           // zero
    logic [3:0]  header;         // header as received
    logic [3:0]  sc;             // slow control
    logic [111:0] data;          // data (standard frames use [47:0])
  } rx_rec_t;

  // ---------------------------------------------------------------------
  // GF(16), primitive polynomial x^4 + x + 1, alpha = 4'b0010.
  // ---------------------------------------------------------------------
  function automatic logic [3:0] gf_mul(input logic [3:0] a, input logic [3:0] b);
    logic [3:0] r;
    logic [3:0] aa;
    r  = '0;
    aa = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) r ^= aa;
      aa = aa[3] ? ({aa[2:0], 1'b0} ^ 4'b0011) : {aa[2:0], 1'b0};
    end
    return r;
  endfunction

  // alpha^k for any k >= 0
  function automatic logic [3:0] gf_alpha(input int unsigned k);
    logic [3:0] r;
    r = 4'b0001;
    for (int unsigned i = 0; i < (k % 15); i++) r = gf_mul(r, 4'b0010);
    return r;
  endfunction

  // multiplicative inverse, a^14 (0 maps to 0)
  function automatic logic [3:0] gf_inv(input logic [3:0] a);
    logic [3:0] r;
    r = 4'b0001;
    for (int i = 0; i < 14; i++) r = gf_mul(r, a);
    return r;
  endfunction

  // ---------------------------------------------------------------------
  // BCH(15,7,2): g(x) = x^8 + x^7 + x^6 + x^4 + 1 (= m1(x) m3(x)).
  // Systematic codeword c = {msg[6:0], parity[7:0]}; bit i of c is the
  // coefficient of x^i.
  // ---------------------------------------------------------------------
  localparam logic [8:0] BCH_G = 9'b1_1101_0001;

  function automatic logic [7:0] bch_parity(input logic [6:0] msg);
    logic [14:0] r;
    r = {msg, 8'h00};
    for (int i = 14; i >= 8; i--)
      if (r[i]) r[i -: 9] = r[i -: 9] ^ BCH_G;
    return r[7:0];
  endfunction

  // syndrome S_j = c(alpha^j)
  function automatic logic [3:0] bch_syndrome(input logic [14:0] c, input int unsigned j);
    logic [3:0] s;
    s = '0;
    for (int unsigned i = 0; i < 15; i++)
      if (c[i]) s ^= gf_alpha(i * j);
    return s;
  endfunction

  // ---------------------------------------------------------------------
  // Interleaver map. Pre-interleave layout is {cw7, ..., cw0}; codeword e,
  // bit b sits at flat index 15*e + b (message bits 14..8, parity 7..0).
  // Frame bits are filled from 119 downwards:
  //   119..116  header = cw7 bits 14..11 (never moved)
  //   115..64   message bits, column by column: for j = 6..0, e = 7..0
  //             (cw7 j = 6..3 are the header and are skipped)
  //   63..0     parity bits, column by column: for j = 7..0, e = 7..0
  // IL_MAP[p] is the flat source index of frame bit p.
  // ---------------------------------------------------------------------
  typedef int unsigned il_map_t [FRAME_W];

  function automatic il_map_t il_map();
    il_map_t m;
    int p;
    p = FRAME_W - 1;
    for (int b = 14; b >= 11; b--) begin m[p] = 15*7 + b; p--; end
    for (int j = 6; j >= 0; j--)
      for (int e = 7; e >= 0; e--)
        if (!(e == 7 && j >= 3)) begin m[p] = 15*e + 8 + j; p--; end
    for (int j = 7; j >= 0; j--)
      for (int e = 7; e >= 0; e--) begin m[p] = 15*e + j; p--; end
    return m;
  endfunction

  localparam il_map_t IL_MAP = il_map();

endpackage
