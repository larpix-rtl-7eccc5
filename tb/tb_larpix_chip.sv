// tb_larpix_chip: end-to-end test of one chip at its default size (32
// channels, 2048-deep FIFO), driven only through its pins like the external
// controller would: configuration records in on data_in, records decoded
// from data_out, charge on the pads, the external trigger pin.
//
// Sequence and what it shows:
//  1. power-up: default threshold is at the bottom, every channel keeps
//     self-triggering on its pedestal and the FIFO fills (FIFO full,
//     channels held back);
//  2. raise the global threshold by a configuration write, read it back
//     (configuration read), drain all buffered records;
//  3. charge on a pad -> one record with the expected ADC code, 11-cycle
//     conversion, timestamp close to the arrival of the charge;
//  4. masked channel: no record;
//  5. sub-threshold charge seen on the analog monitor, drained by the
//     periodic reset without a record;
//  6. built-in test pulse -> record with the expected code;
//  7. external trigger of 4 channels -> 4 pedestal records, timestamps 3
//     cycles apart;
//  7b. high-gain mode: a small charge read at 45 uV per electron;
//  8. daisy chain: a data record and a configuration record for another
//     chip pass through unchanged.
// Expected ADC codes are computed here from the analog constants:
// code = (0.55 V + 4 uV * electrons - 0.4 V) / 2 mV, clipped to 0..255.
module tb_larpix_chip;
  import larpix_pkg::*;
  localparam int WD_CYC = 1_000_000;
  localparam logic [7:0] ID = 8'd42;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, din, dout, ext;
  int pad [NCHAN];
  int mon;
  logic [NCHAN-1:0] ev_trig;
  logic ev_prst, ev_fwd, ev_wr, ev_full;
  larpix_chip dut (.clk, .rst_n, .chip_id(ID), .data_in(din), .data_out(dout),
    .ext_trigger(ext), .pad_charge_e(pad), .monitor_uv(mon), .ev_trigger(ev_trig),
    .ev_periodic_reset(ev_prst), .ev_forward(ev_fwd), .ev_fifo_write(ev_wr),
    .ev_fifo_full(ev_full));
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end

  // ---- mechanism counters ----
  int n_self = 0, n_full_cyc = 0, n_prst = 0, n_fwd = 0, n_ext = 0, n_pulse = 0,
      n_read = 0, n_mask = 0, n_mon = 0, n_hg = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ev_full) n_full_cyc++;
    if (rst_n && ev_prst) n_prst++;
    if (rst_n && ev_fwd)  n_fwd++;
  end

  // ---- serial receiver on data_out ----
  logic [53:0] rxq [$];
  longint      rxt [$];
  int  rbit = -1;
  logic [53:0] rsh;
  always @(posedge clk) if (rst_n) begin
    if (rbit < 0) begin
      if (!dout) rbit = 0;
    end else if (rbit < 54) begin
      rsh[rbit] = dout; rbit++;
    end else begin
      check(dout, "stop bit on data_out");
      check(parity_ok(rsh), "parity of received record");
      rxq.push_back(rsh); rxt.push_back(cyc);
      rbit = -1;
    end
  end

  // ---- serial sender on data_in ----
  task automatic send(input logic [53:0] w);
    @(negedge clk) din = 0;
    for (int b = 0; b < 54; b++) @(negedge clk) din = w[b];
    @(negedge clk) din = 1;
  endtask
  function automatic logic [53:0] cfg(input rec_type_e t, input logic [7:0] chip,
                                      input logic [7:0] a, input logic [7:0] d);
    cfg_rec_t r;
    r = '0; r.rtype = t; r.chip_id = chip; r.reg_addr = a; r.reg_data = d;
    r.parity = odd_parity(r[52:0]);
    return r;
  endfunction
  task automatic wr(input int a, input int d);
    send(cfg(REC_CFG_WRITE, ID, 8'(a), 8'(d)));
    repeat (3) @(posedge clk);              // stop bit, receiver, register
  endtask
  function automatic int exp_code(input int electrons);
    int v = 550_000 + 4 * electrons;
    if (v > 1_800_000) v = 1_800_000;
    v = (v - 400_000) / 2000;
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction
  // wait until the output has been quiet for one record time
  task automatic wait_quiet();
    longint last;
    last = cyc;
    while (cyc - last < 120) begin
      @(posedge clk);
      if (rbit >= 0 || !dout) last = cyc;
    end
  endtask
  task automatic inject(input int ch, input int e);
    @(negedge clk) pad[ch] = e;
    @(negedge clk) pad[ch] = 0;
  endtask

  initial begin
    hit_rec_t h;
    cfg_rec_t c;
    int n, t_inj, t_trig;
    logic [53:0] fw;
    rst_n = 0; din = 1; ext = 0;
    foreach (pad[i]) pad[i] = 0;
    repeat (4) @(posedge clk); #1 rst_n = 1;

    // 1. power-up flood fills the FIFO
    while (!ev_full && cyc < 20000) @(posedge clk);
    check(ev_full, "FIFO reaches full at power-up (low default threshold)");
    repeat (500) @(posedge clk);
    check(ev_full && ev_wr == 0, "writer held while FIFO full");

    // 2. raise threshold (code 100 -> 0.706 V), read it back, drain
    wr(REG_GLOBAL_THR, 100);
    send(cfg(REC_CFG_READ, ID, 8'(REG_GLOBAL_THR), 8'h00));
    wait_quiet();
    n = 0;
    while (rxq.size() > 0) begin
      fw = rxq.pop_front(); void'(rxt.pop_front());
      h = hit_rec_t'(fw);
      if (h.rtype == REC_DATA) begin
        n++;
        check(h.chip_id == ID && h.channel < 32, "flood record fields");
        check(h.data == 10'(exp_code(0)), $sformatf("pedestal code in flood records ch%0d got %0d", h.channel, h.data));
        if (h.fifo_flags[0]) n_full_cyc += 0;
      end else if (h.rtype == REC_CFG_READ) begin
        c = cfg_rec_t'(fw);
        check(c.chip_id == ID && c.reg_addr == 8'(REG_GLOBAL_THR) && c.reg_data == 8'd100,
              "configuration read reply");
        n_read++;
      end
    end
    $display("power-up flood: %0d records drained", n);
    check(n >= 2048, "whole FIFO delivered");
    n_self += n;

    // 3. charge on a pad: 60k electrons on channel 5
    t_inj = int'(cyc);
    fork
      inject(5, 60_000);
      begin
        while (!ev_trig[5]) @(posedge clk);
        t_trig = int'(cyc);
      end
    join
    wait_quiet();
    check(rxq.size() == 1, "one record for one hit");
    if (rxq.size() > 0) begin
      h = hit_rec_t'(rxq.pop_front()); void'(rxt.pop_front());
      check(h.rtype == REC_DATA && h.channel == 5, "record of channel 5");
      check(h.data == 10'(exp_code(60_000)), $sformatf("ADC %0d want %0d", h.data, exp_code(60_000)));
      // trigger, 11-cycle cycle, then the write; timestamp = cycle of the write
      check(int'(h.timestamp) >= t_trig + 11 - 4 && int'(h.timestamp) <= t_trig + 11 + 4,
            $sformatf("timestamp %0d vs trigger %0d", h.timestamp, t_trig));
      n_self++;
    end

    // 4. masked channel
    wr(REG_MASK0, 8'h20);                   // channel 5
    inject(5, 60_000);
    wait_quiet();
    check(rxq.size() == 0, "masked channel gives no record");
    if (rxq.size() == 0) n_mask++;
    wr(REG_MASK0, 8'h00);
    // its charge is still on the amplifier: now it triggers
    wait_quiet();
    check(rxq.size() == 1, "unmasked channel fires on held charge");
    rxq.delete(); rxt.delete();

    // 5. sub-threshold charge on channel 9, monitor, periodic reset
    wr(REG_MONITOR, 8'h80 | 9);
    inject(9, 20_000);
    repeat (3) @(posedge clk);
    check(mon == 550_000 + 80_000, $sformatf("monitor shows held charge (%0d)", mon));
    if (mon == 630_000) n_mon++;
    wr(REG_PRST_LO, 8'hF4); wr(REG_PRST_HI, 8'h01);   // 500 cycles = 10 kHz at 5 MHz
    wr(REG_PRST_CTRL, 1);
    repeat (600) @(posedge clk);
    check(mon == 550_000, "periodic reset drained the charge");
    wr(REG_PRST_CTRL, 0);
    wait_quiet();
    check(rxq.size() == 0, "periodic reset makes no record");

    // 6. test pulse: 40 counts * 1500 e on channel 3
    wr(REG_PULSE_EN0, 8'h08);
    wr(REG_PULSER_DAC, 40);
    wait_quiet();
    check(rxq.size() == 1, "one record from the test pulse");
    if (rxq.size() > 0) begin
      h = hit_rec_t'(rxq.pop_front()); void'(rxt.pop_front());
      check(h.channel == 3 && h.data == 10'(exp_code(60_000)), "test pulse record");
      n_pulse++;
    end
    wr(REG_PULSE_EN0, 0);

    // 7. external trigger of channels 0..3
    wr(REG_EXTTRIG0, 8'h0F);
    @(negedge clk) ext = 1;
    @(negedge clk) ext = 0;
    wait_quiet();
    check(rxq.size() == 4, $sformatf("four forced records, got %0d", rxq.size()));
    begin
      int ts [4];
      for (int i = 0; i < 4 && rxq.size() > 0; i++) begin
        h = hit_rec_t'(rxq.pop_front()); void'(rxt.pop_front());
        ts[i] = int'(h.timestamp);
        check(int'(h.channel) == i && h.data == 10'(exp_code(0)), "forced record: pedestal");
        if (i > 0) check(ts[i] - ts[i-1] == 3, "simultaneous records 3 cycles apart");
        n_ext++;
      end
    end
    wr(REG_EXTTRIG0, 0);

    // 7b. high-gain mode: 5000 electrons at 45 uV/e on channel 12
    wr(REG_CSA_CTRL, 1);
    inject(12, 5_000);
    wait_quiet();
    check(rxq.size() == 1, "one record in high-gain mode");
    if (rxq.size() > 0) begin
      h = hit_rec_t'(rxq.pop_front()); void'(rxt.pop_front());
      check(h.channel == 12 && h.data == 10'((550_000 + 45 * 5_000 - 400_000) / 2000),
            $sformatf("high-gain code %0d", h.data));
      n_hg++;
    end
    wr(REG_CSA_CTRL, 0);

    // 8. daisy chain pass-through
    h = '0; h.rtype = REC_DATA; h.chip_id = 8'd3; h.channel = 7'd17; h.timestamp = 24'h123456;
    h.data = 10'd99; h.parity = odd_parity(h[52:0]);
    send(h);
    send(cfg(REC_CFG_WRITE, 8'd43, 8'd32, 8'd7));
    wait_quiet();
    check(rxq.size() == 2, "two records passed through");
    if (rxq.size() == 2) begin
      check(rxq[0] == 54'(h), "upstream data record unchanged");
      check(rxq[1] == cfg(REC_CFG_WRITE, 8'd43, 8'd32, 8'd7), "other chip's config unchanged");
    end
    rxq.delete();

    $display("mechanisms: self=%0d fifo_full_cycles=%0d cfg_read=%0d mask=%0d monitor=%0d periodic_reset=%0d pulse=%0d ext=%0d forward=%0d high_gain=%0d",
             n_self, n_full_cyc, n_read, n_mask, n_mon, n_prst, n_pulse, n_ext, n_fwd, n_hg);
    check(n_self > 0,     "self trigger happened");
    check(n_full_cyc > 0, "FIFO full happened");
    check(n_read > 0,     "configuration read happened");
    check(n_mask > 0,     "channel mask happened");
    check(n_mon > 0,      "analog monitor happened");
    check(n_prst > 0,     "periodic reset happened");
    check(n_pulse > 0,    "test pulse happened");
    check(n_ext > 0,      "external trigger happened");
    check(n_fwd > 0,      "daisy-chain forward happened");
    check(n_hg > 0,       "high-gain mode happened");
    finish();
  end
endmodule
