// tb_pulser_model: charge = code * 1500 e on enabled channels while fired.
module tb_pulser_model;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  logic fire; logic [7:0] code; logic [31:0] en; int q [32];
  pulser_model dut (.fire, .dac_code(code), .enable(en), .charge_e(q));
  initial begin
    for (int n = 0; n < 50; n++) begin
      fire = 1'($urandom); code = 8'($urandom); en = $urandom; #1;
      for (int c = 0; c < 32; c++)
        check(q[c] == ((fire && en[c]) ? int'(code) * 1500 : 0), "charge");
    end
    finish();
  end
endmodule
