// init_ctrl - start-up sequencer (RESET, PLL_LOCKED -> BUSY_O, DONE_O).
//
// RESET and PLL_LOCKED come from outside the frame clock domain and are first
// passed through two flops. While RESET is high or the PLL is not locked the
// sequencer sits in IDLE. Once both are good it enters BUSY (BUSY_O high) for
// BUSY_CYCLES frame clocks, giving the transceiver and clock network time to
// settle, and then DONE (DONE_O high). The datapath reset dp_rst is high in
// every state but DONE. Losing PLL lock or raising RESET returns to IDLE.
// The signal names and their order (RESET falls, BUSY_O pulses, DONE_O
// rises) follow the paper's timing diagram; the length of the busy phase is
// this design's choice.
module init_ctrl #(
  parameter int unsigned BUSY_CYCLES = 16
) (
  input  logic clk,
  input  logic reset,
  input  logic pll_locked,
  output logic busy_o,
  output logic done_o,
  output logic dp_rst
);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_DONE} init_state_e;

  init_state_e state_q;
  logic        reset_s, locked_s;
  logic [$clog2(BUSY_CYCLES+1)-1:0] cnt_q;

  sync2 #(.WIDTH(2)) u_sync (.clk(clk), .rst(1'b0), .d({reset, pll_locked}), .q({reset_s, locked_s}));

  always_ff @(posedge clk) begin
    if (reset_s || !locked_s) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          state_q <= S_BUSY;
          cnt_q   <= '0;
        end
        S_BUSY: begin
          if (cnt_q == $bits(cnt_q)'(BUSY_CYCLES - 1)) state_q <= S_DONE;
          else                          cnt_q   <= cnt_q + 1'b1;
        end
        default: ;
      endcase
    end
  end

  assign busy_o = (state_q == S_BUSY);
  assign done_o = (state_q == S_DONE);
  assign dp_rst = !done_o;

endmodule
