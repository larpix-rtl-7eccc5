// sar_logic: successive-approximation register of the 8-bit ADC.
//
// A start pulse clears the register and begins a conversion. In each of the
// following W cycles one bit is tried, MSB first: trial = result-so-far with
// the current bit set; the comparator answers in the same cycle and the bit
// is kept if comp is high. After W cycles busy falls, done pulses for one
// cycle and result holds the code until the next start. One bit per clock is
// this design's choice; the paper gives the 8-bit resolution and the total
// 11-cycle conversion-and-reset time of the channel.
module sar_logic #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         comp,
  output logic [W-1:0] trial,
  output logic         busy,     // CONVERT
  output logic         done,
  output logic [W-1:0] result
);
  logic [$clog2(W)-1:0] idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      result <= '0; idx <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        result <= '0;
        idx    <= $clog2(W)'(W - 1);
        busy   <= 1'b1;
      end else if (busy) begin
        if (comp) result[idx] <= 1'b1;
        if (idx == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx - 1'b1;
        end
      end
    end
  end

  always_comb begin
    trial = result;
    if (busy) trial[idx] = 1'b1;
  end
endmodule
