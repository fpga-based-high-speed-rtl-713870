// bch_decoder - NCW parallel BCH(15,7,2) decoders with error correction.
//
// Follows the three steps named in the paper, per 15-bit codeword:
//   1. syndromes S1 = c(alpha), S3 = c(alpha^3) (S2, S4 follow from S1) and
//      the error-locator polynomial sigma(x) = 1 + s1 x + s2 x^2 with
//      s1 = S1, s2 = (S3 + S1^3) / S1 (Peterson's direct solution for t = 2);
//   2. Chien search: position i is in error when sigma(alpha^-i) = 0;
//   3. the message bits at the found positions are inverted.
// A codeword is flagged uncorrectable when S1 = 0 but S3 != 0, or when the
// number of Chien roots differs from the degree of sigma (3 or more errors).
// Its message bits are then passed on uncorrected.
//
// Timing: two-stage pipeline on the frame clock. Stage 1 registers the
// codewords and syndromes, stage 2 the corrected messages and flags, so out_*
// is valid two clocks after in_valid/cw (latency 2, one result per clock).
// The pipeline split is this design's choice; GF(16) uses x^4+x+1.
module bch_decoder
  import daq_pkg::*;
#(
  parameter int unsigned NCW = 8
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic [NCW*CW_N-1:0]   cw,
  output logic                   out_valid,
  output logic [NCW*CW_K-1:0]   msg,
  output logic [NCW-1:0]        corrected,
  output logic [NCW-1:0]        uncorrectable
);

  logic v1_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
    end
  end

  for (genvar e = 0; e < NCW; e++) begin : g_cw
    // ---- stage 1: syndromes ----
    logic [CW_K-1:0] c_q;      // message bits of the codeword
    logic [3:0]      s1_q, s3_q;
    always_ff @(posedge clk) begin
      c_q  <= cw[e*CW_N + CW_P +: CW_K];
      s1_q <= bch_syndrome(cw[e*CW_N +: CW_N], 1);
      s3_q <= bch_syndrome(cw[e*CW_N +: CW_N], 3);
    end

    // ---- stage 2: locator, Chien search, correction ----
    logic [3:0]      sig1, sig2, s1cube;
    logic [CW_N-1:0] err_pos;
    logic [1:0]      deg;
    int unsigned     nroots;
    logic            bad;

    always_comb begin
      s1cube = gf_mul(gf_mul(s1_q, s1_q), s1_q);
      sig1   = s1_q;
      sig2   = gf_mul(s3_q ^ s1cube, gf_inv(s1_q));   // 0 when S1 = 0
      deg    = (sig2 != 4'd0) ? 2'd2 : ((sig1 != 4'd0) ? 2'd1 : 2'd0);
      nroots = 0;
      for (int unsigned i = 0; i < CW_N; i++) begin
        // sigma(alpha^-i) = 1 + sig1 alpha^-i + sig2 alpha^-2i
        err_pos[i] = (4'd1 ^ gf_mul(sig1, gf_alpha(15 - i))
                           ^ gf_mul(sig2, gf_alpha(30 - 2*i))) == 4'd0;
        nroots += int'(err_pos[i]);
      end
      bad = ((s1_q == 4'd0) && (s3_q != 4'd0)) || (nroots != int'(deg));
    end

    always_ff @(posedge clk) begin
      msg[e*CW_K +: CW_K] <= bad ? c_q : (c_q ^ err_pos[CW_N-1:CW_P]);
      corrected[e]        <= !bad && (deg != 2'd0);
      uncorrectable[e]    <= bad;
    end
  end

endmodule
