// periodic_reset_gen: source of the periodic front-end reset that drains
// sub-threshold charge (leakage) without digitizing it.
//
// When enabled, pulse is high for one cycle every `period` cycles (period 0
// or 1 gives a pulse every cycle). The paper reports reset rates of 3 to
// 10 kHz being enough; at a 5 MHz clock that is an interval of 500 to 1667
// cycles, so a 16-bit interval register is used (width is this design's
// choice). Disabling the feature restarts the count.
module periodic_reset_gen #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic [W-1:0] period,
  output logic         pulse
);
  logic [W-1:0] cnt;
  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      cnt   <= '0;
      pulse <= 1'b0;
    end else if (cnt + 1'b1 >= period) begin
      cnt   <= '0;
      pulse <= 1'b1;
    end else begin
      cnt   <= cnt + 1'b1;
      pulse <= 1'b0;
    end
  end
endmodule
