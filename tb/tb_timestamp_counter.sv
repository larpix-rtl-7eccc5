// tb_timestamp_counter: counts clock cycles from reset and wraps at 2^W.
module tb_timestamp_counter;
  localparam int WD_CYC = 2000;
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
  logic rst_n; logic [23:0] c24; logic [3:0] c4;
  timestamp_counter #(.W(24)) dut (.clk, .rst_n, .count(c24));
  timestamp_counter #(.W(4))  dut4 (.clk, .rst_n, .count(c4));
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  initial begin
    rst_n = 0; @(posedge clk); #1 rst_n = 1;
    check(c24 == 0, "zero after reset");
    for (int n = 1; n <= 100; n++) begin
      @(posedge clk); #1;
      check(c24 == 24'(n), "counts cycles");
      check(c4 == 4'(n % 16), "4-bit wraps");
    end
    finish();
  end
endmodule
