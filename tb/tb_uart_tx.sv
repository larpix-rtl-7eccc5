// tb_uart_tx: frame of a transmitted record: start 0, 54 bits LSB first,
// stop 1, one bit per clock, 56 cycles per record back to back.
module tb_uart_tx;
  localparam int WD_CYC = 50000;
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
  logic rst_n, load, ready, tx; logic [53:0] word;
  uart_tx dut (.clk, .rst_n, .load, .word, .ready, .tx);
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  initial begin
    logic [53:0] sent [$];
    logic [53:0] got;
    int t0, t1;
    rst_n = 0; load = 0; word = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (3) begin @(posedge clk); #1 check(tx && ready, "idle high"); end
    fork
      for (int n = 0; n < 50; n++) begin
        word = {$urandom, $urandom}; load = 1;
        @(posedge clk); while (!ready) @(posedge clk);
        sent.push_back(word);
        #1 load = (n % 5 == 4) ? 1'b0 : 1'b1;
        if (n % 5 == 4) repeat (7) @(posedge clk);
      end
      begin
        t1 = -1;
        for (int n = 0; n < 50; n++) begin
          @(negedge clk); while (tx) @(negedge clk);
          t0 = $time / 10;
          for (int b = 0; b < 54; b++) begin @(negedge clk); got[b] = tx; end
          @(negedge clk); check(tx, "stop bit");
          wait (sent.size() > 0);
          check(got == sent.pop_front(), "data bits LSB first");
          if (t1 >= 0 && n % 5 != 0) check(t0 - t1 == 56, "56 cycles per record");
          t1 = t0;
        end
      end
    join
    finish();
  end
endmodule
