// daq_top - one board of the optical-link data acquisition chain.
//
// Sender and receiver of a 4.8 Gb/s link carrying one 120-bit frame per
// 40 MHz frame clock, with two-bit-per-codeword BCH error correction, and the
// hand-over of received frames to the PCIe DMA through an asynchronous FIFO:
//
//   tx_sc/tx_data -> daq_tx -> tx_word (40 bits @ 120 MHz, to the serialiser)
//   rx_word (from the deserialiser) -> daq_rx -> frame record (40 MHz)
//        -> MGT-clock write strobe -> async_fifo -> DMA read port (125 MHz)
//
// Clocks: clk_frame (40 MHz) and clk_mgt (120 MHz) come from one PLL and are
// phase-locked 3:1, so a frame-clock register is stable for three MGT clocks;
// clk_pcie (125 MHz) is unrelated. init_ctrl holds the datapath in reset until
// RESET is low and the PLL is locked, shows BUSY_O for a while and then
// DONE_O; the reset reaches the MGT and PCIe domains through reset
// synchronisers.
//
// Received records cross into the MGT domain by a toggle: each new record
// toggles a flag in the frame domain; the MGT domain writes the record into
// the FIFO on the clock after it sees the toggle change. If the FIFO is full
// the record is dropped and cnt_dropped counts it. cnt_corrected counts
// codewords repaired by the decoder, cnt_uncorrectable frames with a codeword
// beyond repair. The serialiser/deserialiser (inside the transceiver), the
// PLL, the DMA engine and the PCIe core are outside this module: their
// signals are ports. The chain is the paper's; the FIFO hand-over, counters
// and record layout are this design's.
module daq_top
  import daq_pkg::*;
(
  input  logic               clk_frame,
  input  logic               clk_mgt,
  input  logic               clk_pcie,
  input  logic               reset,
  input  logic               pll_locked,
  // data source (pattern generator / front end), frame clock
  input  logic               tx_wide,
  input  logic [3:0]         tx_sc,
  input  logic [DATA_W-1:0]  tx_data,
  // transceiver, MGT clock
  output logic [WORD_W-1:0]  tx_word,
  output logic               tx_valid,
  input  logic [WORD_W-1:0]  rx_word,
  // DMA side of the FIFO, PCIe clock
  input  logic               fifo_rd_en,
  output logic [REC_W-1:0]   fifo_rd_data,
  output logic               fifo_empty,
  // status
  output logic               busy_o,
  output logic               done_o,
  output logic               header_lock_o,
  output logic [6:0]         bs_count,
  output logic [15:0]        cnt_corrected,
  output logic [15:0]        cnt_uncorrectable,
  output logic [15:0]        cnt_dropped
);

  logic rst_frame, rst_mgt, rst_pcie;

  init_ctrl u_init (
    .clk (clk_frame), .reset (reset), .pll_locked (pll_locked),
    .busy_o (busy_o), .done_o (done_o), .dp_rst (rst_frame)
  );

  reset_sync u_rs_mgt  (.clk (clk_mgt),  .arst (rst_frame), .rst (rst_mgt));
  reset_sync u_rs_pcie (.clk (clk_pcie), .arst (rst_frame), .rst (rst_pcie));

  // ---------------- sender ----------------
  daq_tx u_tx (
    .clk_frame (clk_frame), .rst_frame (rst_frame),
    .clk_mgt   (clk_mgt),   .rst_mgt   (rst_mgt),
    .wide (tx_wide), .sc (tx_sc), .data (tx_data),
    .tx_word (tx_word), .tx_valid (tx_valid),
    .scr_out (), .enc_out ()
  );

  // ---------------- receiver ----------------
  logic            rx_valid;
  rx_rec_t         rx_rec;
  logic [N_CW-1:0] rx_corr, rx_unc;

  daq_rx u_rx (
    .clk_mgt (clk_mgt), .rst_mgt (rst_mgt), .rx_word (rx_word),
    .clk_frame (clk_frame), .rst_frame (rst_frame),
    .out_valid (rx_valid), .out_rec (rx_rec),
    .out_corrected (rx_corr), .out_uncorrectable (rx_unc),
    .header_lock (header_lock_o), .bs_count (bs_count), .bitslip ()
  );

  // ---------------- frame-domain record register and counters ----------------
  rx_rec_t rec_q;
  logic    tog_q;

  always_ff @(posedge clk_frame) begin
    if (rst_frame) begin
      tog_q             <= 1'b0;
      rec_q             <= '0;
      cnt_corrected     <= '0;
      cnt_uncorrectable <= '0;
    end else if (rx_valid) begin
      tog_q             <= !tog_q;
      rec_q             <= rx_rec;
      cnt_corrected     <= cnt_corrected + 16'($countones(rx_corr));
      if (|rx_unc) cnt_uncorrectable <= cnt_uncorrectable + 16'd1;
    end
  end

  // ---------------- frame -> MGT clock hand-over ----------------
  logic tog_m1_q, tog_m2_q, fifo_wr, fifo_full;

  always_ff @(posedge clk_mgt) begin
    if (rst_mgt) begin
      tog_m1_q    <= 1'b0;
      tog_m2_q    <= 1'b0;
      cnt_dropped <= '0;
    end else begin
      tog_m1_q <= tog_q;
      tog_m2_q <= tog_m1_q;
      if (fifo_wr && fifo_full) cnt_dropped <= cnt_dropped + 16'd1;
    end
  end

  assign fifo_wr = tog_m1_q ^ tog_m2_q;

  async_fifo #(.WIDTH(REC_W), .DEPTH(512)) u_fifo (
    .wr_clk (clk_mgt),  .wr_rst (rst_mgt),  .wr_en (fifo_wr), .wr_data (rec_q), .full (fifo_full),
    .rd_clk (clk_pcie), .rd_rst (rst_pcie), .rd_en (fifo_rd_en), .rd_data (fifo_rd_data), .empty (fifo_empty)
  );

endmodule
