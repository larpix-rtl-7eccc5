// discriminator_model: behavioural model of the self-timed comparator that
// raises HIT when the amplifier output exceeds the threshold. Analog block;
// not meant for synthesis.
//
// The + input is the amplifier output, the - input the threshold from the
// DACs, as drawn in the block diagram. HIT = (vin > vthr). The diagram draws
// a hysteresis symbol but prints no value for it, so no hysteresis is
// modelled. The 30 ns latency is below one clock period and is modelled as
// zero delay; the channel control samples HIT on the system clock.
module discriminator_model (
  input  int   vin_uv,
  input  int   vthr_uv,
  output logic hit
);
  assign hit = (vin_uv > vthr_uv);
endmodule
