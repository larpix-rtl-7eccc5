// tb_larpix_chain: a daisy chain of NCHIP chips sharing one data input and
// one data output. NCHIP = 28 is the 896-channel board that read out the
// 832-pad anode. The
// controller configures every chip through the single input line, reads one
// register of each back, and then charges one pad on every chip; every
// record must reach the end of the chain with its chip's ID: as many
// records arrive from each chip as it wrote into its FIFO. The 4-chip
// (128-channel) and 16-chip (512-channel) boards differ only in NCHIP.
module tb_larpix_chain;
  import larpix_pkg::*;
  localparam int NCHIP = 28;
  localparam int WD_CYC = 4_000_000;
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
  logic rst_n, din, ext;
  logic [NCHIP:0] line;              // line[0] from the controller, line[NCHIP] back to it
  int pad [NCHIP][NCHAN];
  int mon [NCHIP];
  assign line[0] = din;
  logic [NCHIP-1:0] wr_ev;
  int nwritten [NCHIP];
  initial foreach (nwritten[k]) nwritten[k] = 0;
  always @(posedge clk) if (rst_n) for (int k = 0; k < NCHIP; k++) if (wr_ev[k]) nwritten[k]++;
  for (genvar k = 0; k < NCHIP; k++) begin : g_chip
    larpix_chip u (.clk, .rst_n, .chip_id(8'(k + 1)), .data_in(line[k]), .data_out(line[k+1]),
      .ext_trigger(ext), .pad_charge_e(pad[k]), .monitor_uv(mon[k]), .ev_trigger(),
      .ev_periodic_reset(), .ev_forward(), .ev_fifo_write(wr_ev[k]), .ev_fifo_full());
  end
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end

  longint cyc = 0;
  always @(posedge clk) cyc++;
  logic [53:0] rxq [$];
  int  rbit = -1;
  logic [53:0] rsh;
  always @(posedge clk) if (rst_n) begin
    if (rbit < 0) begin
      if (!line[NCHIP]) rbit = 0;
    end else if (rbit < 54) begin
      rsh[rbit] = line[NCHIP]; rbit++;
    end else begin
      check(line[NCHIP] && parity_ok(rsh), "frame and parity at the end of the chain");
      rxq.push_back(rsh);
      rbit = -1;
    end
  end
  task automatic send(input logic [53:0] w);
    @(negedge clk) din = 0;
    for (int b = 0; b < 54; b++) @(negedge clk) din = w[b];
    @(negedge clk) din = 1;
  endtask
  function automatic logic [53:0] cfg(input rec_type_e t, input int chip, input int a, input int d);
    cfg_rec_t r;
    r = '0; r.rtype = t; r.chip_id = 8'(chip); r.reg_addr = 8'(a); r.reg_data = 8'(d);
    r.parity = odd_parity(r[52:0]);
    return r;
  endfunction
  task automatic wait_quiet();
    longint last;
    last = cyc;
    while (cyc - last < 200) begin
      @(posedge clk);
      if (rbit >= 0 || !line[NCHIP]) last = cyc;
    end
  endtask

  initial begin
    hit_rec_t h;
    cfg_rec_t c;
    int ndata [NCHIP+1];
    int nread;
    rst_n = 0; din = 1; ext = 0;
    foreach (pad[k, i]) pad[k][i] = 0;
    repeat (4) @(posedge clk); #1 rst_n = 1;
    // configure every chip: threshold code 100 (0.706 V), then read it back
    for (int k = 1; k <= NCHIP; k++) send(cfg(REC_CFG_WRITE, k, REG_GLOBAL_THR, 100));
    for (int k = 1; k <= NCHIP; k++) send(cfg(REC_CFG_READ, k, REG_GLOBAL_THR, 0));
    wait_quiet();
    foreach (ndata[k]) ndata[k] = 0;
    nread = 0;
    while (rxq.size() > 0) begin
      h = hit_rec_t'(rxq.pop_front());
      if (h.rtype == REC_DATA) begin
        check(h.chip_id >= 1 && h.chip_id <= NCHIP, "data record chip ID");
        if (h.chip_id >= 1 && h.chip_id <= NCHIP) ndata[h.chip_id]++;
      end else if (h.rtype == REC_CFG_READ) begin
        c = cfg_rec_t'(54'(h));
        check(c.reg_addr == REG_GLOBAL_THR && c.reg_data == 8'd100, "read-back through the chain");
        nread++;
      end
    end
    check(nread == NCHIP, $sformatf("one read reply per chip (%0d)", nread));
    for (int k = 1; k <= NCHIP; k++) begin
      $display("chip %0d: %0d of %0d power-up records reached the end of the chain", k, ndata[k], nwritten[k-1]);
      check(ndata[k] > 0 && ndata[k] == nwritten[k-1], "each chip's power-up records all delivered");
    end
    // one hit per chip, on channel (k*5) with 60k electrons
    for (int k = 0; k < NCHIP; k++) begin
      @(negedge clk) pad[k][k * 5 % 32] = 60_000;
      @(negedge clk) pad[k][k * 5 % 32] = 0;
    end
    wait_quiet();
    check(rxq.size() == NCHIP, "one record per chip");
    while (rxq.size() > 0) begin
      h = hit_rec_t'(rxq.pop_front());
      check(h.rtype == REC_DATA && h.chip_id >= 1 && int'(h.channel) == (int'(h.chip_id) - 1) * 5 % 32
            && h.data == 10'd195, "hit record from each chip");
    end
    finish();
  end
endmodule
