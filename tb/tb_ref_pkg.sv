// tb_ref_pkg - reference models used by the testbenches. They are written
// independently of the RTL: the BCH table is found by brute-force search for
// the parity byte that makes each codeword a multiple of g(x), and the
// interleaver position is computed from a closed formula instead of a
// lookup map.
package tb_ref_pkg;

  localparam logic [8:0] G = 9'h1D1;   // x^8+x^7+x^6+x^4+1

  // polynomial remainder of a 15-bit word by g(x)
  function automatic logic [7:0] poly_mod(input logic [14:0] c);
    logic [14:0] r;
    r = c;
    for (int i = 14; i >= 8; i--)
      if (r[i]) r = r ^ (15'(G) << (i - 8));
    return r[7:0];
  endfunction

  logic [14:0] cw_tab [128];
  bit          tab_ok = 0;

  function automatic void build_table();
    for (int m = 0; m < 128; m++)
      for (int p = 0; p < 256; p++)
        if (poly_mod({7'(m), 8'(p)}) == 8'h00) cw_tab[m] = {7'(m), 8'(p)};
    tab_ok = 1;
  endfunction

  function automatic logic [14:0] ref_encode(input logic [6:0] m);
    if (!tab_ok) build_table();
    return cw_tab[m];
  endfunction

  // scrambler reference: one lane step
  function automatic logic [15:0] scr_step(input logic [15:0] prev, input logic [15:0] d, input int w);
    logic [15:0] rot;
    rot = '0;
    for (int b = 0; b < w; b++) rot[b] = prev[(b + 1) % w];
    return (d ^ prev ^ rot) & ((16'd1 << w) - 16'd1);
  endfunction

  function automatic logic [15:0] scr_seed(input int lane, input int w);
    logic [15:0] v;
    v = '0;
    for (int b = 0; b < w; b++) v[b] = ((b + lane) % 3) == 0;
    return v;
  endfunction

  // frame bit position of codeword e, bit b (b 14..8 message, 7..0 parity)
  function automatic int il_pos(input int e, input int b);
    int j, nprev, idx;
    if (b >= 8) begin
      j = b - 8;
      if (e == 7 && j >= 3) return 119 - (6 - j);          // header
      nprev = 0;
      for (int jj = 6; jj > j; jj--) nprev += (jj >= 3) ? 7 : 8;
      idx = (j >= 3) ? (6 - e) : (7 - e);
      return 115 - nprev - idx;
    end
    return 63 - ((7 - b) * 8 + (7 - e));
  endfunction

  function automatic logic [119:0] ref_interleave(input logic [119:0] cw);
    logic [119:0] f;
    for (int e = 0; e < 8; e++)
      for (int b = 0; b < 15; b++) f[il_pos(e, b)] = cw[15*e + b];
    return f;
  endfunction

  // ---------------------------------------------------------------
  // whole-frame sender model, with its scrambler state
  // ---------------------------------------------------------------
  class tx_model;
    logic [15:0] sa [4];
    logic [15:0] sb [4];
    function new();
      for (int l = 0; l < 4; l++) begin
        sa[l] = scr_seed(l, 13);
        sb[l] = scr_seed(l, 16);
      end
    endfunction
    // frame sent on the line for one input frame
    function logic [119:0] frame(input bit wide, input logic [3:0] sc, input logic [111:0] data);
      logic [51:0] pa, a;
      logic [63:0] b;
      logic [55:0] msg;
      logic [119:0] cw;
      pa = {sc, data[47:0]};
      for (int l = 0; l < 4; l++) begin
        sa[l] = scr_step(sa[l], 16'(pa[13*l +: 13]), 13);
        a[13*l +: 13] = sa[l][12:0];
      end
      if (wide) begin
        for (int l = 0; l < 4; l++) begin
          sb[l] = scr_step(sb[l], data[48 + 16*l +: 16], 16);
          b[16*l +: 16] = sb[l];
        end
        return {4'b0101, a, b};
      end
      msg = {4'b1010, a};
      for (int e = 0; e < 8; e++) cw[15*e +: 15] = ref_encode(msg[7*e +: 7]);
      return ref_interleave(cw);
    endfunction
  endclass

endpackage
