// sar_adc_model: behavioural model of the analog half of the 8-bit SAR ADC:
// sample-and-hold, capacitor DAC and comparator. Not meant for synthesis.
//
// On a rising clock edge with strobe high the amplifier output is held. The
// comparator output is combinational: comp = held >= OFFSET + trial*LSB, so
// the SAR logic (sar_logic) can decide one bit per clock. LSB and offset are
// set on the real chip by external reference voltages; the default LSB of
// 2 mV is the chip's default, the 400 mV offset is this design's choice that
// places the 0.55 V pedestal inside the 8-bit range.
module sar_adc_model #(
  parameter int LSB_UV    = 2_000,
  parameter int OFFSET_UV = 400_000
) (
  input  logic       clk,
  input  logic       strobe,   // STROBE: sample the amplifier output
  input  int         vin_uv,
  input  logic [7:0] trial,    // trial code from the SAR register
  output logic       comp      // held voltage >= DAC(trial)
);
  int held_uv = 0;
  always_ff @(posedge clk) if (strobe) held_uv <= vin_uv;
  assign comp = (held_uv >= OFFSET_UV + int'(trial) * LSB_UV);
endmodule
