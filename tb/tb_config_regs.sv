// tb_config_regs: reset values, write/read of every register against a
// shadow copy, decoding of the fields and the test-pulse fire strobe.
module tb_config_regs;
  import larpix_pkg::*;
  localparam int WD_CYC = 20000;
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
  logic rst_n, wr, mon_en, prst_en, fire, hg;
  logic [7:0] waddr, wdata, raddr, rdata, gthr, pdac;
  logic [31:0][4:0] trim; logic [31:0] mask, exten, pen; logic [4:0] msel; logic [15:0] per;
  config_regs dut (.clk, .rst_n, .wr, .waddr, .wdata, .raddr, .rdata, .trim, .global_thr(gthr),
    .pulser_dac(pdac), .self_trig_mask(mask), .ext_trig_en(exten), .pulse_en(pen),
    .monitor_en(mon_en), .monitor_sel(msel), .prst_en, .prst_period(per), .csa_high_gain(hg), .pulse_fire(fire));
  logic [7:0] shadow [51];
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  task automatic write(input int a, input logic [7:0] d);
    wr = 1; waddr = 8'(a); wdata = d;
    @(posedge clk); #1 wr = 0;
    if (a < 51) shadow[a] = d;
  endtask
  initial begin
    rst_n = 0; wr = 0; waddr = 0; wdata = 0; raddr = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    check(gthr == 0 && mask == 0, "power-up: lowest threshold, all channels self-triggering");
    check(per == 16'd1000 && !prst_en, "periodic reset default interval, disabled");
    for (int a = 0; a < 51; a++) shadow[a] = (a == 48) ? 8'hE8 : (a == 49) ? 8'h03 : 8'h00;
    for (int n = 0; n < 400; n++) write(int'($urandom % 53), 8'($urandom));
    for (int a = 0; a < 53; a++) begin
      raddr = 8'(a); #1;
      check(rdata == ((a < 51) ? shadow[a] : 8'h00), $sformatf("read back reg %0d", a));
    end
    for (int c = 0; c < 32; c++) begin
      check(trim[c] == shadow[c][4:0], "trim field");
      check(mask[c] == shadow[34 + c/8][c%8], "mask bit");
      check(exten[c] == shadow[38 + c/8][c%8], "ext trigger bit");
      check(pen[c] == shadow[42 + c/8][c%8], "pulse enable bit");
    end
    check(gthr == shadow[32] && pdac == shadow[33], "threshold and pulser");
    check(mon_en == shadow[46][7] && msel == shadow[46][4:0], "monitor");
    check(prst_en == shadow[47][0] && per == {shadow[49], shadow[48]}, "periodic reset");
    check(hg == shadow[50][0], "high-gain bit");
    wr = 1; waddr = 8'd33; wdata = 8'd42; #1 check(!fire, "no fire before the write");
    @(posedge clk); #1 wr = 0;
    check(fire && pdac == 8'd42, "fire after pulser DAC write");
    @(posedge clk); #1 check(!fire, "fire lasts one cycle");
    write(32, 8'h11); check(!fire, "other writes do not fire");
    finish();
  end
endmodule
