// config_regs: the chip's configuration register file.
//
// Fifty-one 8-bit registers, written and read by configuration records that the
// daisy-chain router decodes. They hold the settings the paper lists: a 5-bit
// threshold trim per channel, the 8-bit global threshold, the 8-bit test
// pulser DAC, the self-trigger inhibit mask, the external-trigger channel
// mask, the test-pulse channel mask, the analog monitor select, the
// periodic reset control and interval, and the amplifier high-gain switch
// (the paper's optional 45 uV/e mode). The address map is this design's own
// (see larpix_pkg). The reset values leave every channel self-triggering
// with the lowest threshold, which is how the paper describes the chip's
// power-up state; software is expected to set thresholds first.
//
// Timing: a write (wr high) updates the register at the clock edge. A write
// to the pulser DAC register also raises pulse_fire for the following cycle,
// which injects the newly written charge into the enabled channels.
// rdata is a combinational read of register raddr (0 for an unused address).
module config_regs
  import larpix_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr,
  input  logic [7:0]            waddr,
  input  logic [7:0]            wdata,
  input  logic [7:0]            raddr,
  output logic [7:0]            rdata,
  output logic [NCHAN-1:0][4:0] trim,
  output logic [7:0]            global_thr,
  output logic [7:0]            pulser_dac,
  output logic [NCHAN-1:0]      self_trig_mask,   // 1 = self-trigger inhibited
  output logic [NCHAN-1:0]      ext_trig_en,
  output logic [NCHAN-1:0]      pulse_en,
  output logic                  monitor_en,
  output logic [4:0]            monitor_sel,
  output logic                  prst_en,
  output logic [15:0]           prst_period,
  output logic                  csa_high_gain,
  output logic                  pulse_fire
);
  logic [7:0] regs [NREG];

  function automatic logic [7:0] reset_value(int unsigned a);
    if (a == REG_PRST_LO) return 8'hE8;   // 1000 cycles: 5 kHz at 5 MHz
    if (a == REG_PRST_HI) return 8'h03;
    return 8'h00;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned a = 0; a < NREG; a++) regs[a] <= reset_value(a);
      pulse_fire <= 1'b0;
    end else begin
      if (wr && waddr < 8'(NREG)) regs[waddr[5:0]] <= wdata;
      pulse_fire <= wr && (waddr == 8'(REG_PULSER_DAC));
    end
  end

  assign rdata = (raddr < 8'(NREG)) ? regs[raddr[5:0]] : 8'h00;

  always_comb begin
    for (int unsigned c = 0; c < NCHAN; c++) begin
      trim[c]           = regs[REG_TRIM0 + c][4:0];
      self_trig_mask[c] = regs[REG_MASK0     + c / 8][c % 8];
      ext_trig_en[c]    = regs[REG_EXTTRIG0  + c / 8][c % 8];
      pulse_en[c]       = regs[REG_PULSE_EN0 + c / 8][c % 8];
    end
  end
  assign global_thr  = regs[REG_GLOBAL_THR];
  assign pulser_dac  = regs[REG_PULSER_DAC];
  assign monitor_en  = regs[REG_MONITOR][7];
  assign monitor_sel = regs[REG_MONITOR][4:0];
  assign prst_en     = regs[REG_PRST_CTRL][0];
  assign prst_period = {regs[REG_PRST_HI], regs[REG_PRST_LO]};
  assign csa_high_gain = regs[REG_CSA_CTRL][0];
endmodule
