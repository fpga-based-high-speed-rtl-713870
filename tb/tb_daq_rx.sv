// tb_daq_rx - receiver chain on its own. The reference sender model builds
// standard and wide-bus frames from random inputs; the 40-bit words go
// through the line model with a bit offset, so the receiver must find the
// frame boundary first. After lock, line errors are injected into standard
// frames: one bit, two bits of one codeword, or an uncorrectable pattern
// (bits 0, 1 and 4 of one codeword). Every record is compared with the
// input that produced it, and the corrected / uncorrectable flags are
// compared with what was injected.
`timescale 1ps/1ps
module tb_daq_rx;
  import daq_pkg::*;
  import tb_ref_pkg::*;
  localparam int TM = 8332;
  logic clk_frame = 0, clk_mgt = 0, rst_frame = 1, rst_mgt = 1;
  logic [39:0] tx_word = '0, err_mask = '0, rx_word;
  logic out_valid, header_lock, bitslip;
  rx_rec_t out_rec;
  logic [7:0] out_corrected, out_uncorrectable;
  logic [6:0] bs_count;
  int checks = 0, failures = 0;

  daq_rx dut (.*);
  mgt_link_model #(.OFFSET(83)) u_line (.clk(clk_mgt), .tx_word(tx_word), .err_mask(err_mask), .rx_word(rx_word));

  always #(TM/2) clk_mgt = ~clk_mgt;
  always #(3*TM/2) clk_frame = ~clk_frame;
  initial begin #(20000*TM); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- sender: reference model on the line clock ----------------
  typedef struct { bit wide; logic [3:0] sc; logic [111:0] data; int kind; int e; } exp_t;
  exp_t sent [$];
  tx_model m;
  logic [119:0] cur_f, cur_m;
  int nw = 0, inject = 0;
  int n_kind [4] = '{default: 0};

  always @(posedge clk_mgt) begin
    exp_t s;
    int b1, b2;
    if (nw % 3 == 0) begin
      s.wide = ($urandom % 3 == 0);
      s.sc   = 4'($urandom);
      s.data = {$urandom, $urandom, $urandom, $urandom};
      s.kind = 0;
      s.e    = $urandom % 7;
      cur_f  = m.frame(s.wide, s.sc, s.data);
      cur_m  = '0;
      if (inject != 0 && !s.wide) begin
        s.kind = $urandom % 4;
        case (s.kind)
          1: begin b1 = $urandom % 116; cur_m[b1] = 1'b1; end
          2: begin
            b1 = $urandom % 15;
            do b2 = $urandom % 15; while (b2 == b1);
            cur_m[il_pos(s.e, b1)] = 1'b1; cur_m[il_pos(s.e, b2)] = 1'b1;
          end
          3: begin
            cur_m[il_pos(s.e, 0)] = 1'b1; cur_m[il_pos(s.e, 1)] = 1'b1; cur_m[il_pos(s.e, 4)] = 1'b1;
          end
          default: ;
        endcase
        n_kind[s.kind]++;
      end
      sent.push_back(s);
    end
    tx_word  <= cur_f[119 - 40*(nw % 3) -: 40];
    err_mask <= cur_m[119 - 40*(nw % 3) -: 40];
    nw++;
  end

  // ---------------- record checker ----------------
  bit synced = 0;
  int n_rec = 0, n_wide = 0, n_std = 0, n_corr = 0, n_unc = 0;

  bit wide_seen = 0;   // the wide-bus descramblers also need one frame of history

  function automatic bit same(input exp_t s, input rx_rec_t r);
    if (s.wide != r.wide || s.sc != r.sc) return 0;
    if (s.wide && wide_seen) return r.data == s.data;
    return r.data[47:0] == s.data[47:0];
  endfunction

  always @(posedge clk_frame) if (!rst_frame && out_valid && header_lock) begin
    if (!synced) begin
      // the descramblers need one frame of history: find the first match
      for (int i = 0; i < sent.size(); i++)
        if (same(sent[i], out_rec)) begin
          for (int k = 0; k < i; k++) void'(sent.pop_front());
          synced = 1;
          break;
        end
    end
    if (synced) begin
      exp_t s;
      s = sent.pop_front();
      n_rec++;
      if (out_rec.wide) n_wide++; else n_std++;
      checks++;
      if (!same(s, out_rec)) begin
        failures++;
        if (failures < 6) $display("FAIL record %0d: wide %0d sc %h data %h exp wide %0d sc %h data %h",
                                   n_rec, out_rec.wide, out_rec.sc, out_rec.data, s.wide, s.sc, s.data);
      end
      checks++;
      case (s.kind)
        0: if (out_corrected != 0 || out_uncorrectable != 0) begin failures++; $display("FAIL flags on a clean frame"); end
        1: if ($countones(out_corrected) != 1 || out_uncorrectable != 0) begin failures++; $display("FAIL single error flags %b %b", out_corrected, out_uncorrectable); end
        2: if (out_corrected != 8'(1 << s.e) || out_uncorrectable != 0) begin failures++; $display("FAIL double error flags %b %b e=%0d", out_corrected, out_uncorrectable, s.e); end
        3: if (out_uncorrectable != 8'(1 << s.e)) begin failures++; $display("FAIL uncorrectable flags %b e=%0d", out_uncorrectable, s.e); end
        default: ;
      endcase
      checks++;
      if (out_rec.uncorrectable != (s.kind == 3)) begin failures++; $display("FAIL record uncorrectable bit"); end
      if (out_rec.wide) wide_seen = 1;
      n_corr += $countones(out_corrected);
      n_unc  += (out_uncorrectable != 0);
    end
  end

  initial begin
    int t;
    m = new();
    repeat (3) @(posedge clk_frame);
    rst_frame <= 0; rst_mgt <= 0;
    t = 0;
    while (!header_lock && t < 5000) begin @(posedge clk_frame); t++; end
    checks++;
    if (!header_lock) begin failures++; $display("FAIL no header lock"); end
    $display("lock after %0d frame clocks, %0d bit slips", t, bs_count);
    repeat (50) @(posedge clk_frame);
    checks++;
    if (!synced) begin failures++; $display("FAIL records never matched the sent frames"); end
    @(posedge clk_mgt) inject = 1;
    repeat (1500) @(posedge clk_frame);
    @(posedge clk_mgt) inject = 0;
    repeat (20) @(posedge clk_frame);
    checks++;
    if (n_rec < 1500 || n_wide == 0 || n_std == 0) begin failures++; $display("FAIL too few records %0d (%0d wide)", n_rec, n_wide); end
    checks++;
    if (n_kind[1] == 0 || n_kind[2] == 0 || n_kind[3] == 0 || n_unc != n_kind[3]) begin
      failures++; $display("FAIL injected %0d/%0d/%0d, uncorrectable seen %0d", n_kind[1], n_kind[2], n_kind[3], n_unc);
    end
    checks++;
    if (bs_count == 0) begin failures++; $display("FAIL no bit slip for a non-zero offset"); end
    $display("records %0d (standard %0d, wide %0d), injected single %0d double %0d uncorrectable %0d, corrected %0d",
             n_rec, n_std, n_wide, n_kind[1], n_kind[2], n_kind[3], n_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
