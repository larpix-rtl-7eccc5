// timestamp_counter: free-running count of system clock cycles used as the
// hit timestamp (24 bits, one-cycle precision, as in the paper). It clears on
// chip reset and wraps at 2^W; both are this design's choices.
module timestamp_counter #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] count
);
  always_ff @(posedge clk) begin
    if (!rst_n) count <= '0;
    else        count <= count + 1'b1;
  end
endmodule
