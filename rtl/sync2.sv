// sync2 - two-flop synchroniser for a WIDTH-bit bus whose value changes in
// at most one bit at a time (a level flag or a Gray-coded pointer).
// Output follows the input after two dst_clk edges. rst is synchronous to
// dst_clk and clears the output.
module sync2 #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] meta_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta_q <= '0;
      q      <= '0;
    end else begin
      meta_q <= d;
      q      <= meta_q;
    end
  end

endmodule
