// uart_rx: serial receiver of the chip's data input line.
//
// Same frame as uart_tx: start bit 0, 54 bits LSB first, stop bit 1, one bit
// per system clock. All chips of a daisy chain and the controller share the
// system clock, so the line is sampled once per clock without
// oversampling. valid pulses for one cycle with word after a frame whose stop
// bit is 1; a frame with a bad stop bit is dropped and counted in frame_err.
module uart_rx #(
  parameter int unsigned W = 54
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rx,
  output logic         valid,
  output logic [W-1:0] word,
  output logic         frame_err
);
  logic                   busy;
  logic [$clog2(W+1)-1:0] nbits;     // data bits received so far
  logic [W-1:0]           shreg;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; nbits <= '0; shreg <= '0; valid <= 1'b0; word <= '0;
      frame_err <= 1'b0;
    end else begin
      valid     <= 1'b0;
      frame_err <= 1'b0;
      if (!busy) begin
        if (!rx) begin busy <= 1'b1; nbits <= '0; end
      end else if (nbits < ($clog2(W+1))'(W)) begin
        shreg <= {rx, shreg[W-1:1]};
        nbits <= nbits + 1'b1;
      end else begin
        busy <= 1'b0;
        if (rx) begin valid <= 1'b1; word <= shreg; end
        else    frame_err <= 1'b1;
      end
    end
  end
endmodule
