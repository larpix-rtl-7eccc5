// larpix_chip: one 32-channel LArPix readout ASIC.
//
// Each channel is an independent self-triggering signal processor: a
// charge-sensitive amplifier integrates the pad charge, a discriminator
// compares its output with a global-plus-trim threshold, and on a trigger
// the channel control samples the amplifier with the 8-bit SAR ADC, resets
// the amplifier (11 clocks in all) and hands the value to the hit writer,
// which stamps it with the 24-bit cycle counter and stores a 54-bit record in
// a 2048-deep FIFO. Records leave on one serial line at one bit per clock;
// configuration records arrive on another. Chips are daisy-chained: a record
// not meant for this chip is passed on to its output.
//
// The analog parts (amplifier, DACs, discriminator, ADC sample-and-hold and
// comparator, test pulser, monitor switch) are behavioural models working in
// integer microvolts and electrons; everything else is synthesizable logic.
// The pad input is given as the number of electrons arriving on each pad in
// each clock cycle. chip_id is taken from pins and rst_n is a synchronous
// active-low reset; both are this design's choices.
//
// The ev_* outputs are one-cycle event strobes (self or external trigger
// started, periodic reset, record forwarded, record written) for monitoring
// in simulation; they are not pins of the real chip.
module larpix_chip
  import larpix_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 2048,
  parameter int unsigned WRITE_CYC  = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHIP_W-1:0] chip_id,
  input  logic              data_in,
  output logic              data_out,
  input  logic              ext_trigger,
  input  int                pad_charge_e [NCHAN],
  output int                monitor_uv,
  output logic [NCHAN-1:0]  ev_trigger,
  output logic              ev_periodic_reset,
  output logic              ev_forward,
  output logic              ev_fifo_write,
  output logic              ev_fifo_full
);
  // ---------------- configuration and shared logic ----------------
  logic [NCHAN-1:0][4:0] trim;
  logic [7:0]            global_thr, pulser_dac;
  logic [NCHAN-1:0]      self_trig_mask, ext_trig_en, pulse_en;
  logic                  monitor_en, prst_en, pulse_fire;
  logic [4:0]            monitor_sel;
  logic [15:0]           prst_period;
  logic                  csa_high_gain;
  logic                  cfg_wr;
  logic [7:0]            cfg_addr, cfg_wdata, cfg_rdata;
  logic [TS_W-1:0]       timestamp;
  logic                  prst_pulse;

  config_regs u_cfg (
    .clk, .rst_n, .wr(cfg_wr), .waddr(cfg_addr), .wdata(cfg_wdata),
    .raddr(cfg_addr), .rdata(cfg_rdata),
    .trim, .global_thr, .pulser_dac, .self_trig_mask, .ext_trig_en, .pulse_en,
    .monitor_en, .monitor_sel, .prst_en, .prst_period, .csa_high_gain, .pulse_fire
  );

  timestamp_counter #(.W(TS_W)) u_ts (.clk, .rst_n, .count(timestamp));

  periodic_reset_gen #(.W(16)) u_prst (
    .clk, .rst_n, .enable(prst_en), .period(prst_period), .pulse(prst_pulse)
  );

  int pulse_e [NCHAN];
  pulser_model u_pulser (.fire(pulse_fire), .dac_code(pulser_dac), .enable(pulse_en),
                         .charge_e(pulse_e));

  // ---------------- 32 channels ----------------
  int                        csa_uv [NCHAN];
  logic [NCHAN-1:0]          req, ack;
  logic [NCHAN-1:0][7:0]     adc;

  for (genvar c = 0; c < NCHAN; c++) begin : g_ch
    int   vthr_uv;
    logic hit, csa_reset, strobe, comp;
    logic [7:0] trial;

    csa_model u_csa (.clk, .charge_e(pad_charge_e[c] + pulse_e[c]), .reset(csa_reset),
                     .high_gain(csa_high_gain),
                     .vout_uv(csa_uv[c]));
    threshold_dac_model u_thr (.global_code(global_thr), .trim_code(trim[c]),
                               .vthr_uv(vthr_uv));
    discriminator_model u_disc (.vin_uv(csa_uv[c]), .vthr_uv(vthr_uv), .hit(hit));
    sar_adc_model u_adc (.clk, .strobe(strobe), .vin_uv(csa_uv[c]), .trial(trial),
                         .comp(comp));
    channel_ctrl u_ctrl (
      .clk, .rst_n, .hit, .self_trig_en(!self_trig_mask[c]),
      .ext_trig(ext_trigger), .ext_trig_en(ext_trig_en[c]),
      .periodic_reset(prst_pulse), .csa_reset(csa_reset), .adc_strobe(strobe),
      .adc_convert(), .sar_trial(trial), .comp(comp), .req(req[c]), .ack(ack[c]),
      .adc_data(adc[c]), .triggered(ev_trigger[c])
    );
  end

  analog_monitor_model u_mon (.enable(monitor_en), .sel(monitor_sel), .csa_uv(csa_uv),
                              .line_out_uv(monitor_uv));

  // ---------------- record buffering ----------------
  logic                        fifo_wr, fifo_rd, fifo_empty, fifo_full, fifo_half;
  logic [REC_W-1:0]            fifo_wdata, fifo_rdata;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;

  hit_writer #(.NCH(NCHAN), .WRITE_CYC(WRITE_CYC), .FIFO_DEPTH(FIFO_DEPTH)) u_wr (
    .clk, .rst_n, .chip_id, .timestamp, .req, .adc, .ack,
    .fifo_full, .fifo_count, .fifo_wr, .fifo_wdata
  );

  hit_fifo #(.DEPTH(FIFO_DEPTH), .W(REC_W)) u_fifo (
    .clk, .rst_n, .wr(fifo_wr), .wdata(fifo_wdata), .rd(fifo_rd), .rdata(fifo_rdata),
    .empty(fifo_empty), .full(fifo_full), .half(fifo_half), .count(fifo_count)
  );

  // ---------------- serial I/O and daisy chain ----------------
  logic             rx_valid, tx_ready, tx_load;
  logic [REC_W-1:0] rx_word, tx_word;

  uart_rx #(.W(REC_W)) u_rx (.clk, .rst_n, .rx(data_in), .valid(rx_valid), .word(rx_word),
                             .frame_err());

  daisy_router u_router (
    .clk, .rst_n, .chip_id, .rx_valid, .rx_word,
    .cfg_wr, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .fifo_empty, .fifo_rdata, .fifo_rd,
    .tx_ready, .tx_load, .tx_word,
    .ev_forward, .ev_parity_drop(), .fwd_overflow()
  );

  uart_tx #(.W(REC_W)) u_tx (.clk, .rst_n, .load(tx_load), .word(tx_word), .ready(tx_ready),
                             .tx(data_out));

  assign ev_periodic_reset = prst_pulse;
  assign ev_fifo_write     = fifo_wr;
  assign ev_fifo_full      = fifo_full;
endmodule
