// uart_tx: serial transmitter of the chip's data output line.
//
// The paper specifies a UART-like protocol at one bit per system clock.
// This design frames each 54-bit record as a start bit (0), the 54 bits
// LSB first and a stop bit (1): 56 clock cycles per record. The line idles
// high. load is accepted when ready is high; the start bit appears on
// tx in the next cycle. tx is driven from a flip-flop.
module uart_tx #(
  parameter int unsigned W = 54
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] word,
  output logic         ready,
  output logic         tx
);
  logic [W:0]               shreg;    // {stop, data}
  logic [$clog2(W+2)-1:0]   left;     // bits still to send after the current one

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx <= 1'b1; shreg <= '1; left <= '0;
    end else if (load && ready) begin
      tx    <= 1'b0;                     // start bit
      shreg <= {1'b1, word};
      left  <= ($clog2(W+2))'(W + 1);
    end else if (left != '0) begin
      tx    <= shreg[0];
      shreg <= {1'b1, shreg[W:1]};
      left  <= left - 1'b1;
    end else begin
      tx <= 1'b1;
    end
  end
  assign ready = (left == '0);
endmodule
