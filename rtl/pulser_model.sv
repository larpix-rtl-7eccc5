// pulser_model: behavioural model of the built-in test pulse generator.
// Analog block; not meant for synthesis.
//
// An 8-bit DAC sets the amplitude of a charge step injected into the
// amplifier input of every channel enabled in the pulse mask. The paper
// measures about 1500 electrons per DAC count; the model delivers
// code * E_PER_COUNT electrons during the single cycle in which fire is high.
module pulser_model
  import larpix_pkg::*;
#(
  parameter int E_PER_COUNT = 1500
) (
  input  logic             fire,
  input  logic [7:0]       dac_code,
  input  logic [NCHAN-1:0] enable,
  output int               charge_e [NCHAN]
);
  always_comb begin
    for (int c = 0; c < NCHAN; c++)
      charge_e[c] = (fire && enable[c]) ? int'(dac_code) * E_PER_COUNT : 0;
  end
endmodule
