// tb_csa_model: integration, reset, saturation and high-gain mode of the
// amplifier model.
module tb_csa_model;
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
  int   q;
  logic rst, hg;
  int   v;
  csa_model dut (.clk, .charge_e(q), .reset(rst), .high_gain(hg), .vout_uv(v));
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  initial begin
    q = 0; rst = 1; hg = 0;
    @(posedge clk); #1 rst = 0;
    check(v == 550_000, "pedestal 0.55 V after reset");
    q = 1000; @(posedge clk); #1;
    check(v == 554_000, "1000 e -> +4 mV");
    q = 2500; @(posedge clk); #1;
    check(v == 550_000 + 4 * 3500, "charge accumulates");
    q = 0; repeat (5) @(posedge clk); #1;
    check(v == 550_000 + 4 * 3500, "holds without feedback");
    rst = 1; @(posedge clk); #1 rst = 0;
    check(v == 550_000, "RESET clears");
    q = 400_000; @(posedge clk); #1 q = 0;
    check(v == 1_800_000, "saturates at 1.8 V");
    check((1_800_000 - 550_000) / 4 > 300_000, "dynamic range ~3e5 electrons");
    rst = 1; @(posedge clk); #1 rst = 0;
    hg = 1; q = 2000; @(posedge clk); #1 q = 0;
    check(v == 550_000 + 45 * 2000, "high gain: 45 uV per electron");
    q = 40_000; @(posedge clk); #1 q = 0;
    check(v == 1_800_000, "high gain saturates at 1.8 V");
    hg = 0; #1 check(v == 550_000 + 4 * 42_000, "same charge read at normal gain");
    finish();
  end
endmodule
