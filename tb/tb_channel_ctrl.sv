// tb_channel_ctrl: one channel's trigger / sample / convert / reset cycle.
// An ideal comparator (target >= trial) stands in for the ADC. Checked:
// the 11-cycle STROBE+CONVERT+RESET sequence (1 + 8 + 2), the ADC result,
// holding the record until ack, the self-trigger mask, the external
// trigger and its mask, and the periodic reset without digitization.
module tb_channel_ctrl;
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
  logic rst_n, hit, ste, ext, exten, prst, csa_reset, strobe, conv, comp, req, ack, trg;
  logic [7:0] trial, adc, target;
  channel_ctrl dut (.clk, .rst_n, .hit, .self_trig_en(ste), .ext_trig(ext), .ext_trig_en(exten),
    .periodic_reset(prst), .csa_reset, .adc_strobe(strobe), .adc_convert(conv),
    .sar_trial(trial), .comp, .req, .ack, .adc_data(adc), .triggered(trg));
  assign comp = (target >= trial);
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  // Runs one triggered cycle; returns the per-cycle trace as a string of
  // S (strobe), C (convert), R (reset) letters.
  task automatic run_cycle(output string trace);
    trace = "";
    while (!strobe) begin @(posedge clk); #1; end
    while (strobe || conv || csa_reset) begin
      trace = {trace, strobe ? "S" : conv ? "C" : "R"};
      @(posedge clk); #1;
    end
  endtask

  initial begin
    string tr;
    rst_n = 0; hit = 0; ste = 1; ext = 0; exten = 0; prst = 0; ack = 0; target = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;
    check(!req && !strobe && !csa_reset, "idle after reset");
    // self trigger
    for (int n = 0; n < 20; n++) begin
      target = 8'($urandom);
      hit = 1;
      run_cycle(tr);
      hit = 0;
      check(tr == "SCCCCCCCCRR", {"cycle trace ", tr});
      check(tr.len() == 11, "11-cycle conversion and reset");
      check(req && adc == target, $sformatf("adc %0d want %0d", adc, target));
      hit = 1;                         // no retrigger while waiting for ack
      repeat (5) begin @(posedge clk); #1 check(req && !strobe, "waits for ack"); end
      hit = 0; ack = 1; @(posedge clk); #1 ack = 0;
      check(!req, "req drops after ack");
    end
    // masked self trigger
    ste = 0; hit = 1;
    repeat (30) begin @(posedge clk); #1 check(!strobe && !req, "masked channel does not trigger"); end
    // external trigger, disabled then enabled
    ext = 1; repeat (5) begin @(posedge clk); #1 check(!strobe, "ext trigger ignored when not enabled"); end
    ext = 0; exten = 1; target = 8'd77;
    @(posedge clk); #1 ext = 1; @(posedge clk); #1 ext = 0;
    run_cycle(tr);
    check(tr == "SCCCCCCCCRR" && req && adc == 8'd77, "forced digitization by external trigger");
    ack = 1; @(posedge clk); #1 ack = 0; hit = 0;
    // periodic reset: RESET for 2 cycles, no strobe, no record
    @(posedge clk); #1 prst = 1; @(posedge clk); #1 prst = 0;
    check(csa_reset && !strobe, "periodic reset asserts RESET");
    @(posedge clk); #1 check(csa_reset, "periodic reset second cycle");
    @(posedge clk); #1 check(!csa_reset && !req, "periodic reset ends, no record");
    finish();
  end
endmodule
