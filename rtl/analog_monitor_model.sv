// analog_monitor_model: behavioural model of the analog monitor switch that
// connects one channel's amplifier output to the line-out pin. Analog block;
// not meant for synthesis. When enabled, line_out_uv follows channel sel;
// otherwise it reads 0. Select and enable come from a configuration register
// (this design's choice of encoding).
module analog_monitor_model
  import larpix_pkg::*;
(
  input  logic       enable,
  input  logic [4:0] sel,
  input  int         csa_uv [NCHAN],
  output int         line_out_uv
);
  assign line_out_uv = enable ? csa_uv[sel] : 0;
endmodule
