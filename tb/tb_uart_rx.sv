// tb_uart_rx: receives frames driven bit by bit, back to back and with gaps;
// a frame with a bad stop bit is reported and dropped.
module tb_uart_rx;
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
  logic rst_n, rx, valid, ferr; logic [53:0] word;
  uart_rx dut (.clk, .rst_n, .rx, .valid, .word, .frame_err(ferr));
  logic [53:0] exp_q [$];
  int nvalid = 0, nferr = 0;
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  always @(posedge clk) if (rst_n) begin
    if (valid) begin
      nvalid++;
      begin logic [53:0] e; e = exp_q.size() > 0 ? exp_q.pop_front() : 0; check(word == e, $sformatf("received word %h want %h", word, e)); end
    end
    if (ferr) nferr++;
  end
  task automatic send(input logic [53:0] w, input bit stop);
    @(negedge clk) rx = 0;
    for (int b = 0; b < 54; b++) @(negedge clk) rx = w[b];
    @(negedge clk) rx = stop;
    @(negedge clk) rx = 1;
  endtask
  initial begin
    logic [53:0] w;
    rst_n = 0; rx = 1;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      w = {$urandom, $urandom};
      exp_q.push_back(w);
      send(w, 1);
      if (n % 3 == 0) repeat (n % 7) @(posedge clk);
    end
    send(54'h3, 0);                       // bad stop bit
    repeat (3) @(posedge clk);
    w = 54'h2AAAA; exp_q.push_back(w); send(w, 1);
    repeat (5) @(posedge clk);
    check(nvalid == 41, "all good frames received");
    check(nferr == 1, "bad frame flagged");
    check(exp_q.size() == 0, "nothing missing");
    finish();
  end
endmodule
