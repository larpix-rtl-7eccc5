// tb_sar_logic: the SAR register against an ideal comparator. For a random
// target the comparator answers (target >= trial); after exactly 8 cycles
// of busy the result must equal the target.
module tb_sar_logic;
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
  logic rst_n, start, comp, busy, done;
  logic [7:0] trial, result, target;
  sar_logic #(.W(8)) dut (.clk, .rst_n, .start, .comp, .trial, .busy, .done, .result);
  assign comp = (target >= trial);
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  initial begin
    int nbusy;
    rst_n = 0; start = 0; target = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      target = (n == 0) ? 8'd0 : (n == 1) ? 8'd255 : 8'($urandom);
      #1 start = 1;
      @(posedge clk); #1 start = 0;
      check(busy && trial == 8'h80, "first trial is MSB");
      nbusy = 0;
      while (busy) begin nbusy++; @(posedge clk); #1; end
      check(nbusy == 8, "8 bit cycles");
      check(done, "done pulse after conversion");
      check(result == target, $sformatf("result %0d target %0d", result, target));
      @(posedge clk); #1 check(!done && result == target, "result held");
    end
    finish();
  end
endmodule
