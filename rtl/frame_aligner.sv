// frame_aligner - frame aligner and pattern search (receive side, MGT clock).
//
// The deserialiser delivers 40-bit words at an unknown bit offset from the
// frame boundaries. Two sub-blocks recover the boundary:
//  * Right shifter: keeps the previous word and, from the 80-bit window
//    {previous, current}, outputs the 40 bits starting 'shift' bits after the
//    window's first bit (shift = 0..39). Registered (FRAME_ALIGNR_RIGHTSHIFT).
//  * Pattern search state machine: a word counter (0,1,2) marks the word that
//    should carry the header. At every word-0 the top 4 bits are compared with
//    the two valid headers 1010 (standard) and 0101 (wide bus).
//      SEARCH : on a mismatch a one-clock bit-slip command is issued; shift
//               moves one bit. When shift rolls over from 39 to 0 the word
//               counter holds for one clock, so each slip moves the examined
//               position exactly one bit along the 120-bit frame and at most
//               120 slips visit every position. On a match -> CONFIRM.
//      CONFIRM: the header must be found again CONFIRM (32) more times in a
//               row; a mismatch slips and returns to SEARCH.
//      LOCKED : header_lock is high and aligned words flow to the RX gearbox
//               with their word index (FRAME_ALIGNR_WrAddr lane).
// A slip takes effect on the word examined three (or four) clocks later.
// bs_count counts slips (FRAME_ALIGNR_BSCOUNTER, wraps at 128).
//
// The shifter/pattern-search split, the bit slip and the 32 confirmations
// are the paper's. How the word position is found, and holding lock until
// reset (the paper says nothing about losing lock), are this design's.
module frame_aligner
  import daq_pkg::*;
#(
  parameter int unsigned CONFIRM = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [WORD_W-1:0] rx_word,
  output logic [WORD_W-1:0] word,
  output logic [1:0]        word_idx,
  output logic              word_valid,
  output logic              header_lock,
  output logic              bitslip,
  output logic [6:0]        bs_count,
  output logic              hdr_match
);

  typedef enum logic [1:0] {S_SEARCH, S_CONFIRM, S_LOCKED} fa_state_e;

  fa_state_e         state_q;
  logic [WORD_W-1:0] prev_q;
  logic [5:0]        shift_q;
  logic [1:0]        wc_q;
  logic              hold_q;
  logic [$clog2(CONFIRM+1)-1:0] cnt_q;
  logic [2*WORD_W-1:0] window;
  logic              check;

  // ---------------- right shifter ----------------
  assign window = {prev_q, rx_word};

  always_ff @(posedge clk) begin
    prev_q <= rx_word;
    word   <= window[7'(2*WORD_W-1) - 7'(shift_q) -: WORD_W];
  end

  // ---------------- pattern search ----------------
  assign check     = (wc_q == 2'd0);
  assign hdr_match = (word[WORD_W-1 -: 4] == HDR_STD) || (word[WORD_W-1 -: 4] == HDR_WIDE);

  always_comb begin
    bitslip = 1'b0;
    if (check && !hdr_match && state_q != S_LOCKED) bitslip = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q  <= S_SEARCH;
      shift_q  <= '0;
      wc_q     <= '0;
      hold_q   <= 1'b0;
      cnt_q    <= '0;
      bs_count <= '0;
    end else begin
      hold_q <= bitslip && (shift_q == 6'd39);
      if (!hold_q) wc_q <= (wc_q == 2'd2) ? 2'd0 : wc_q + 2'd1;

      if (bitslip) begin
        shift_q  <= (shift_q == 6'd39) ? 6'd0 : shift_q + 6'd1;
        bs_count <= bs_count + 7'd1;
      end

      if (check) begin
        unique case (state_q)
          S_SEARCH: if (hdr_match) begin
            state_q <= S_CONFIRM;
            cnt_q   <= '0;
          end
          S_CONFIRM: if (!hdr_match) begin
            state_q <= S_SEARCH;
          end else if (cnt_q == $bits(cnt_q)'(CONFIRM - 1)) begin
            state_q <= S_LOCKED;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  assign header_lock = (state_q == S_LOCKED);
  assign word_valid  = header_lock;
  assign word_idx    = wc_q;

endmodule
