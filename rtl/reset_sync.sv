// reset_sync - reset synchroniser: asserts asynchronously with arst, releases
// two clk edges after arst falls, so every flop of the clock domain leaves
// reset on the same edge. Used to carry the datapath reset into the MGT and
// PCIe clock domains.
module reset_sync (
  input  logic clk,
  input  logic arst,
  output logic rst
);

  logic meta_q;

  always_ff @(posedge clk or posedge arst) begin
    if (arst) begin
      meta_q <= 1'b1;
      rst    <= 1'b1;
    end else begin
      meta_q <= 1'b0;
      rst    <= meta_q;
    end
  end

endmodule
