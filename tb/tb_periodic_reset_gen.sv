// tb_periodic_reset_gen: pulse spacing equals the programmed interval.
module tb_periodic_reset_gen;
  localparam int WD_CYC = 100000;
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
  logic rst_n, en, pulse; logic [15:0] period;
  periodic_reset_gen #(.W(16)) dut (.clk, .rst_n, .enable(en), .period, .pulse);
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  initial begin
    int last, now, n;
    rst_n = 0; en = 0; period = 1000;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (3000) begin @(posedge clk); #1 check(!pulse, "no pulse when disabled"); end
    foreach (period_list[k]) begin
      period = period_list[k]; en = 1; last = -1; n = 0;
      for (int c = 0; c < 6 * period_list[k]; c++) begin
        @(posedge clk); #1;
        if (pulse) begin
          if (last >= 0) check(c - last == period_list[k], $sformatf("interval %0d", period_list[k]));
          last = c; n++;
        end
      end
      check(n >= 5, "pulses seen");
      en = 0; @(posedge clk); #1;
    end
    finish();
  end
  int period_list [3] = '{1000, 500, 1667};
endmodule
