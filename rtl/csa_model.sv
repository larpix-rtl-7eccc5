// csa_model: behavioural model of one pulsed-reset charge-sensitive amplifier.
// This is an analog block; the model is not meant for synthesis.
//
// Charge arriving from the pad is integrated on the feedback capacitor with no
// continuous feedback, so the output is a staircase that only returns to the
// quiescent level when RESET closes the feedback switch. The model works in
// integer microvolts and electrons and updates once per system clock:
// vout = pedestal + gain * charge, clipped at the saturation voltage. Gain
// (4 uV per electron, or 45 uV per electron in the optional high-gain mode),
// the 0.55 V quiescent output in liquid argon and the saturation just under
// 1.8 V follow the paper; the 45 ns rise time is below
// one clock period and is not modelled, and neither is leakage current.
//
// Timing: charge_e presented in a cycle is added at the next rising clock
// edge; reset high at a rising edge clears the stored charge (it wins over
// charge arriving in the same cycle).
module csa_model #(
  parameter int GAIN_UV_PER_E = 4,
  parameter int HIGH_GAIN_UV_PER_E = 45,
  parameter int PEDESTAL_UV   = 550_000,
  parameter int SAT_UV        = 1_800_000
) (
  input  logic clk,
  input  int   charge_e,   // electrons collected during this cycle
  input  logic reset,      // RESET from the channel control
  input  logic high_gain,  // optional high-gain mode
  output int   vout_uv     // amplifier output, microvolts
);
  localparam int MAX_E = (SAT_UV - PEDESTAL_UV) / GAIN_UV_PER_E;

  int q_e = 0;             // charge held on the feedback capacitor
  int v;

  always_ff @(posedge clk) begin
    if (reset)                          q_e <= 0;
    else if (q_e + charge_e > MAX_E)    q_e <= MAX_E;
    else if (q_e + charge_e < 0)        q_e <= 0;
    else                                q_e <= q_e + charge_e;
  end

  always_comb begin
    v = PEDESTAL_UV + (high_gain ? HIGH_GAIN_UV_PER_E : GAIN_UV_PER_E) * q_e;
    vout_uv = (v > SAT_UV) ? SAT_UV : v;
  end
endmodule
