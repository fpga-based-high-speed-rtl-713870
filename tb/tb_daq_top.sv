// tb_daq_top - end-to-end test of one board with its transmitter looped back
// to its receiver through a serial-link model, at the design's default
// sizes (the top is instantiated without parameters).
//
// Sequence: PLL lock and RESET release (BUSY_O then DONE_O), frame alignment
// through a link that shifts the stream by OFFSET bits (bit slips, header
// lock), then a stream of standard and wide-bus frames with random mode
// switches. Line errors are injected into standard frames on the transmit
// side: single bits, two bits in one codeword, 12-bit bursts (spread by the
// interleaver) and an uncorrectable three-bit pattern; the DMA side stops
// reading for a while so the FIFO fills and frames are dropped. Every record
// read from the FIFO on the 125 MHz clock is compared with the frame sent;
// the decoder counters are compared with the injected errors. Each mechanism
// is counted and a failure is reported for any that never happened.
`timescale 1ps/1ps
module tb_daq_top;
  import tb_ref_pkg::*;
  import daq_pkg::*;

  localparam int TM = 8332;           // 120 MHz MGT clock (frame clock = TM*3)
  localparam int TP = 8000;           // 125 MHz PCIe clock
  localparam int OFFSET = 57;         // bit shift of the link

  logic clk_frame = 0, clk_mgt = 0, clk_pcie = 0;
  logic reset = 1, pll_locked = 0;
  logic tx_wide = 0;
  logic [3:0] tx_sc = '0;
  logic [111:0] tx_data = '0;
  logic [39:0] tx_word, rx_word, err_mask = '0;
  logic tx_valid;
  logic fifo_rd_en = 0, fifo_empty;
  logic [127:0] fifo_rd_data;
  logic busy_o, done_o, header_lock_o;
  logic [6:0] bs_count;
  logic [15:0] cnt_corrected, cnt_uncorrectable, cnt_dropped;

  daq_top dut (.*);

  mgt_link_model #(.OFFSET(OFFSET)) u_link (.clk (clk_mgt), .tx_word (tx_word), .err_mask (err_mask), .rx_word (rx_word));

  always #(TM/2)   clk_mgt   = ~clk_mgt;
  always #(3*TM/2) clk_frame = ~clk_frame;
  always #(TP/2)   clk_pcie  = ~clk_pcie;

  int checks = 0, failures = 0;
  initial begin
    #(400_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_busy = 0, n_switch = 0, n_std_rec = 0, n_wide_rec = 0, n_empty = 0;
  int inj_single = 0, inj_double = 0, inj_burst = 0, inj_unc = 0, exp_corr = 0;
  int n_resync = 0, n_records = 0;

  always @(posedge clk_frame) if (busy_o) n_busy++;

  // ---------------- source ----------------
  typedef struct { bit wide; logic [3:0] sc; logic [111:0] data; } sent_t;
  sent_t sent [$];
  bit sending = 0;

  always @(posedge clk_frame) begin
    if (sending) begin
      sent_t s;
      s.wide = tx_wide; s.sc = tx_sc; s.data = tx_data;
      sent.push_back(s);
      if ($urandom % 16 == 0) tx_wide <= !tx_wide;
    end
    tx_sc   <= 4'($urandom);
    tx_data <= {$urandom, $urandom, $urandom, $urandom};
  end

  // ---------------- error injection on the transmit line ----------------
  int inject_mode = 0;           // 0 off, 1 on
  int scen = 0;
  int nw = 0;
  logic [119:0] fmask;           // error mask of the frame being sent
  bit std_frame;

  function automatic logic [119:0] make_mask(input int sc_kind);
    logic [119:0] m;
    int e, b1, b2, p;
    m = '0;
    case (sc_kind)
      1: begin p = $urandom % 116; m[p] = 1'b1; inj_single++; exp_corr += 1; end
      2: begin
        e = $urandom % 7;                      // codewords 0..6 (no header bits)
        b1 = $urandom % 15;
        do b2 = $urandom % 15; while (b2 == b1);
        m[il_pos(e, b1)] = 1'b1; m[il_pos(e, b2)] = 1'b1;
        inj_double++; exp_corr += 1;
      end
      3: begin
        int hit [8];
        p = 11 + $urandom % 105;               // 12-bit burst inside [115:0]
        hit = '{default: 0};
        for (int i = 0; i < 12; i++) m[p - i] = 1'b1;
        for (int ee = 0; ee < 8; ee++)
          for (int bb = 0; bb < 15; bb++)
            if (m[il_pos(ee, bb)]) hit[ee] = 1;
        foreach (hit[ee]) exp_corr += hit[ee];
        inj_burst++;
      end
      4: begin
        // bits 0, 1, 4 of one codeword: S1 = 0, S3 != 0, always detected
        e = $urandom % 8;
        m[il_pos(e, 0)] = 1'b1; m[il_pos(e, 1)] = 1'b1; m[il_pos(e, 4)] = 1'b1;
        inj_unc++;
      end
      default: ;
    endcase
    return m;
  endfunction

  // err_mask is set between edges for the word now on tx_word
  always @(negedge clk_mgt) begin
    err_mask = '0;
    if (dut.rst_mgt) nw = 0;
    else if (tx_valid) begin
      int w;
      w = nw % 3;
      if (w == 0) begin
        std_frame = (tx_word[39:36] == HDR_STD);
        fmask = '0;
        if (inject_mode == 1 && std_frame) begin
          scen = (scen + 1) % 5;
          fmask = make_mask(scen);
        end
      end
      err_mask = fmask[119 - 40*w -: 40];
    end
  end
  always @(posedge clk_mgt) if (!dut.rst_mgt && tx_valid) nw++;

  // ---------------- DMA-side reader and checker ----------------
  bit reading = 0, rd_pending = 0, synced = 0;
  int skipped = 0, last_drop = 0;
  bit last_wide = 0;

  function automatic bit rec_match(input rx_rec_t r, input sent_t s);
    if (r.wide != s.wide || r.sc != s.sc) return 0;
    if (s.wide) return r.data == s.data && r.header == HDR_WIDE;
    return r.data == {64'd0, s.data[47:0]} && r.header == HDR_STD;
  endfunction

  always @(posedge clk_pcie) begin
    if (rd_pending) begin
      rx_rec_t r;
      int found;
      r = rx_rec_t'(fifo_rd_data);
      n_records++;
      if (!synced) begin
        found = -1;
        for (int i = 0; i < sent.size(); i++) if (found < 0 && rec_match(r, sent[i])) found = i;
        if (found >= 0) begin
          synced = 1;
          repeat (found + 1) void'(sent.pop_front());
        end else begin
          skipped++;
          checks++;
          if (skipped > 4) begin failures++; $display("FAIL no record matches the frames sent"); end
        end
      end else begin
        checks++;
        if (sent.size() != 0 && rec_match(r, sent[0])) begin
          void'(sent.pop_front());
        end else begin
          found = -1;
          if (int'(cnt_dropped) != last_drop)
            for (int i = 0; i < sent.size(); i++) if (found < 0 && rec_match(r, sent[i])) found = i;
          if (found >= 0) begin
            n_resync++;
            last_drop = int'(cnt_dropped);
            repeat (found + 1) void'(sent.pop_front());
          end else begin
            failures++;
            if (failures < 6) $display("FAIL record %0d at %0t: wide %b sc %h data %h exp wide %b sc %h data %h drops %0d", n_records, $time, r.wide, r.sc, r.data, sent[0].wide, sent[0].sc, sent[0].data, cnt_dropped);
            if (sent.size() != 0) void'(sent.pop_front());
          end
        end
        if (r.wide) n_wide_rec++; else n_std_rec++;
        if (n_records > 1 && r.wide != last_wide) n_switch++;
        last_wide = r.wide;
        if (!r.wide && r.uncorrectable) ; // counted through cnt_uncorrectable
      end
    end
    rd_pending = fifo_rd_en && !fifo_empty;
    if (fifo_empty && reading && synced) n_empty++;
  end

  always @(negedge clk_pcie) fifo_rd_en <= reading;

  // ---------------- sequence ----------------
  task automatic expect_mech(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    $display("  %-28s %0d", name, n);
  endtask

  initial begin
    int corr0, t0;
    repeat (5) @(posedge clk_frame);
    pll_locked = 1;
    repeat (5) @(posedge clk_frame);
    reset = 0;
    // start-up: BUSY_O then DONE_O
    t0 = 0;
    while (!done_o && t0 < 1000) begin @(posedge clk_frame); t0++; end
    checks++;
    if (!done_o) begin failures++; $display("FAIL DONE_O never rose"); end
    sending = 1;
    reading = 1;
    // alignment
    t0 = 0;
    while (!header_lock_o && t0 < 20000) begin @(posedge clk_frame); t0++; end
    checks++;
    if (!header_lock_o) begin failures++; $display("FAIL no header lock"); end
    $display("header lock after %0d frame clocks, %0d bit slips", t0, bs_count);
    repeat (40) @(posedge clk_frame);
    // clean traffic, then error injection
    repeat (300) @(posedge clk_frame);
    corr0 = int'(cnt_corrected);
    checks++;
    if (corr0 != 0 || cnt_uncorrectable != 0) begin failures++; $display("FAIL errors reported on a clean link: %0d %0d", corr0, cnt_uncorrectable); end
    @(negedge clk_mgt) inject_mode = 1;
    repeat (600) @(posedge clk_frame);
    @(negedge clk_mgt) inject_mode = 0;
    repeat (20) @(posedge clk_frame);
    checks++;
    if (int'(cnt_corrected) != exp_corr) begin failures++; $display("FAIL corrected codewords %0d expected %0d", cnt_corrected, exp_corr); end
    checks++;
    if (int'(cnt_uncorrectable) != inj_unc) begin failures++; $display("FAIL uncorrectable frames %0d expected %0d", cnt_uncorrectable, inj_unc); end
    checks++;
    if (cnt_dropped != 0) begin failures++; $display("FAIL %0d records dropped while the FIFO was being read", cnt_dropped); end
    // DMA stalls: FIFO fills up and frames are dropped
    reading = 0;
    repeat (700) @(posedge clk_frame);
    reading = 1;
    repeat (800) @(posedge clk_frame);
    // the source keeps running: only the frames still in flight may be missing
    repeat (100) @(posedge clk_frame);
    checks++;
    if (sent.size() > 32) begin failures++; $display("FAIL %0d frames never arrived", sent.size()); end

    $display("mechanisms:");
    expect_mech("busy phase (frame clocks)", n_busy);
    expect_mech("bit slips", int'(bs_count));
    expect_mech("header lock", int'(header_lock_o));
    expect_mech("single-bit corrections", inj_single);
    expect_mech("two-bit corrections", inj_double);
    expect_mech("burst corrections", inj_burst);
    expect_mech("codewords corrected", int'(cnt_corrected));
    expect_mech("uncorrectable frames", int'(cnt_uncorrectable));
    expect_mech("standard records", n_std_rec);
    expect_mech("wide-bus records", n_wide_rec);
    expect_mech("mode switches", n_switch);
    expect_mech("FIFO drops (full)", int'(cnt_dropped));
    expect_mech("FIFO empty while reading", n_empty);
    $display("records %0d, resyncs after drops %0d", n_records, n_resync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
