// tb_discriminator_model: HIT = amplifier output above threshold.
module tb_discriminator_model;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  int a, b; logic hit;
  discriminator_model dut (.vin_uv(a), .vthr_uv(b), .hit);
  initial begin
    a = 600_000; b = 599_999; #1 check(hit, "above");
    a = 600_000; b = 600_000; #1 check(!hit, "equal is not a hit");
    a = 500_000; b = 600_000; #1 check(!hit, "below");
    for (int n = 0; n < 100; n++) begin
      a = int'($urandom % 2_000_000); b = int'($urandom % 2_000_000); #1;
      check(hit == (a > b), "random");
    end
    finish();
  end
endmodule
