// tb_analog_monitor_model: the selected channel reaches the line out.
module tb_analog_monitor_model;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  logic en; logic [4:0] sel; int v [32]; int o;
  analog_monitor_model dut (.enable(en), .sel, .csa_uv(v), .line_out_uv(o));
  initial begin
    for (int c = 0; c < 32; c++) v[c] = 500_000 + 1000 * c;
    for (int n = 0; n < 64; n++) begin
      en = 1'(n / 32 == 0); sel = 5'(n); #1;
      check(o == (en ? 500_000 + 1000 * (n % 32) : 0), "monitor value");
    end
    finish();
  end
endmodule
