// channel_ctrl: digital control of one LArPix channel.
//
// A channel sits idle, dissipating nothing in the digitizer, until it is
// triggered: either its discriminator reports HIT and self-triggering is not
// masked, or the external trigger pin is high and the channel is enabled in
// the external-trigger mask. A triggered channel then runs a fixed cycle of
// 11 clocks (the figure the paper gives): 1 cycle STROBE (the ADC samples the
// amplifier output and the SAR starts), 8 cycles CONVERT (one SAR bit per
// clock), 2 cycles RESET of the amplifier. The split 1 + 8 + 2 is this
// design's choice. The 8-bit result is then offered to the FIFO writer with
// req; the channel waits, and cannot retrigger, until ack. A periodic reset
// pulse seen while idle resets the amplifier for RESET_CYC cycles with no
// digitization. The amplifier is also held in reset while the chip is in
// reset (this design's choice).
//
// Interface: hit is the raw discriminator output, sampled on the clock.
// req/ack is a valid/ready pair: the record is taken in the cycle both are
// high. The SAR comparator comp comes back combinationally from the analog
// ADC model for the code on sar_trial.
module channel_ctrl #(
  parameter int unsigned RESET_CYC = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       hit,
  input  logic       self_trig_en,
  input  logic       ext_trig,
  input  logic       ext_trig_en,
  input  logic       periodic_reset,
  output logic       csa_reset,     // RESET
  output logic       adc_strobe,    // STROBE
  output logic       adc_convert,   // CONVERT
  output logic [7:0] sar_trial,
  input  logic       comp,
  output logic       req,
  input  logic       ack,
  output logic [7:0] adc_data,
  output logic       triggered      // pulse: a digitization cycle started
);
  typedef enum logic [2:0] {IDLE, SAMPLE, CONV, RESET, PEND, PRESET} state_e;
  localparam int unsigned CONV_CYC = 8;
  state_e state;
  logic [3:0] cnt;           // cycles left in the current timed state, minus one
  logic [7:0] sar_result;

  wire trig = (hit && self_trig_en) || (ext_trig && ext_trig_en);

  sar_logic #(.W(8)) u_sar (
    .clk, .rst_n, .start(state == SAMPLE), .comp,
    .trial(sar_trial), .busy(adc_convert), .done(), .result(sar_result)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        IDLE:
          if (trig) begin
            state <= SAMPLE;
          end else if (periodic_reset) begin
            state <= PRESET;
            cnt   <= 4'(RESET_CYC - 1);
          end
        SAMPLE: begin
          state <= CONV;
          cnt   <= 4'(CONV_CYC - 1);
        end
        CONV:
          if (cnt == '0) begin
            state <= RESET;
            cnt   <= 4'(RESET_CYC - 1);
          end else cnt <= cnt - 1'b1;
        RESET:
          if (cnt == '0) state <= PEND;
          else           cnt <= cnt - 1'b1;
        PEND:
          if (ack) state <= IDLE;
        PRESET:
          if (cnt == '0) state <= IDLE;
          else           cnt <= cnt - 1'b1;
        default: state <= IDLE;
      endcase
    end
  end

  // The SAR register holds its result until the next conversion starts,
  // which cannot happen before the record has been taken.
  assign adc_data   = sar_result;
  assign adc_strobe = (state == SAMPLE);
  assign csa_reset  = (state == RESET) || (state == PRESET) || !rst_n;
  assign req        = (state == PEND);
  assign triggered  = (state == IDLE) && trig;

  // The SAR must be converting in exactly the CONV cycles.
  a_conv: assert property (@(posedge clk) disable iff (!rst_n)
                           (state == CONV) == adc_convert);
endmodule
