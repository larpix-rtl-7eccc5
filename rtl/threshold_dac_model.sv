// threshold_dac_model: behavioural model of the threshold DACs that feed one
// channel's discriminator. This is an analog block; not meant for synthesis.
//
// The chip has one 8-bit coarse DAC spanning 0 to 1.8 V shared by all 32
// channels, and a 5-bit trim DAC per channel with a 1 mV step (both from the
// paper). The coarse DAC is taken as linear with full scale at code 255 and
// the trim as adding to the coarse level; both are this design's reading.
// Purely combinational: vthr_uv = global_code*FS/255 + trim_code*TRIM_LSB.
module threshold_dac_model #(
  parameter int GLOBAL_FS_UV = 1_800_000,
  parameter int TRIM_LSB_UV  = 1_000
) (
  input  logic [7:0] global_code,
  input  logic [4:0] trim_code,     // TDAC[4:0]
  output int         vthr_uv
);
  assign vthr_uv = (int'(global_code) * GLOBAL_FS_UV) / 255
                 + int'(trim_code) * TRIM_LSB_UV;
endmodule
