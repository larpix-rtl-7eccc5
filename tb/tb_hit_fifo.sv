// tb_hit_fifo: random pushes and pops against a queue model; full, half and
// empty flags; the full 2048-entry depth.
module tb_hit_fifo;
  localparam int WD_CYC = 200000;
  localparam int D = 2048;
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
  logic rst_n, wr, rd, empty, full, half; logic [53:0] wdata, rdata; logic [11:0] count;
  hit_fifo dut (.clk, .rst_n, .wr, .wdata, .rd, .rdata, .empty, .full, .half, .count);
  logic [53:0] q [$];
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  task automatic step(input bit w, input bit r);
    wr = w && !full; rd = r; wdata = {$urandom, $urandom};
    if (r && !empty) begin
      check(q.size() > 0 && rdata == q[0], "head matches model");
      void'(q.pop_front());
    end
    if (wr) q.push_back(wdata);
    @(posedge clk); #1;
    check(count == 12'(q.size()), "count");
    check(empty == (q.size() == 0) && full == (q.size() == D) && half == (q.size() >= D/2), "flags");
  endtask
  initial begin
    rst_n = 0; wr = 0; rd = 0; wdata = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    check(empty && !full, "empty after reset");
    repeat (3000) step(1'($urandom), 1'($urandom));
    while (!full) step(1, 0);                 // fill to the top
    check(q.size() == D, "holds 2048 records");
    step(1, 0);                               // write to full is ignored
    check(q.size() == D, "no overflow");
    repeat (200) step(1, 1);                  // simultaneous at full
    while (!empty) step(0, 1);
    check(q.size() == 0, "drained");
    finish();
  end
endmodule
