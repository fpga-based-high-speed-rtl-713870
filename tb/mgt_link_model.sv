// mgt_link_model - behavioural model of serialiser + optical fibre +
// deserialiser (the transceiver hard block is not part of the RTL). Not
// synthesizable. Every clock it takes one 40-bit word (MSB first on the
// line), XORs err_mask into it to model line bit errors, and delivers the
// bit stream again as 40-bit words, delayed by OFFSET bits plus one word, so
// that the receiver sees the frames at an unknown bit position.
module mgt_link_model #(
  parameter int OFFSET = 0
) (
  input  logic        clk,
  input  logic [39:0] tx_word,
  input  logic [39:0] err_mask,
  output logic [39:0] rx_word
);

  bit line [$];

  initial begin
    for (int i = 0; i < OFFSET; i++) line.push_back(1'($urandom));
    rx_word = '0;
  end

  always @(posedge clk) begin
    logic [39:0] w, r;
    w = tx_word ^ err_mask;
    for (int i = 39; i >= 0; i--) line.push_back(w[i]);
    for (int i = 39; i >= 0; i--) r[i] = line.pop_front();
    rx_word <= r;
  end

endmodule
