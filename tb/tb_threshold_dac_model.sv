// tb_threshold_dac_model: coarse and trim DAC transfer.
module tb_threshold_dac_model;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  logic [7:0] g; logic [4:0] t; int v;
  threshold_dac_model dut (.global_code(g), .trim_code(t), .vthr_uv(v));
  initial begin
    g = 0;   t = 0;  #1 check(v == 0, "zero");
    g = 255; t = 0;  #1 check(v == 1_800_000, "full scale 1.8 V");
    g = 0;   t = 31; #1 check(v == 31_000, "trim 31 mV");
    for (int n = 0; n < 100; n++) begin
      g = 8'($urandom); t = 5'($urandom); #1;
      check(v == (int'(g) * 1_800_000) / 255 + int'(t) * 1000, "random codes");
    end
    finish();
  end
endmodule
