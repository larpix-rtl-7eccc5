// tb_sar_adc_model: sample-and-hold and comparator of the ADC model.
module tb_sar_adc_model;
  localparam int WD_CYC = 1000;
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
  logic strobe; int vin; logic [7:0] trial; logic comp;
  sar_adc_model dut (.clk, .strobe, .vin_uv(vin), .trial, .comp);
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  initial begin
    strobe = 1; vin = 500_000; trial = 0;
    @(posedge clk); #1 strobe = 0; vin = 1_000_000;
    // held = 500 mV = offset 400 mV + 50 LSB of 2 mV
    trial = 50; #1 check(comp, "held >= DAC(50)");
    trial = 51; #1 check(!comp, "held < DAC(51)");
    @(posedge clk); #1 trial = 51; check(!comp, "value held while strobe low");
    for (int n = 0; n < 50; n++) begin
      vin = 400_000 + int'($urandom % 520_000); strobe = 1;
      @(posedge clk); #1 strobe = 0;
      trial = 8'($urandom); #1;
      check(comp == (vin >= 400_000 + int'(trial) * 2000), "random compare");
    end
    finish();
  end
endmodule
