// tb_hit_writer: record building and arbitration. All 32 channels request at
// once (as after an external trigger); records must come out one every 3
// cycles, in round-robin order, with timestamps 3 cycles apart taken at the
// write, correct fields and parity, and the writer must hold while the FIFO
// is full.
module tb_hit_writer;
  import larpix_pkg::*;
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
  logic rst_n, fifo_full, fifo_wr; logic [23:0] ts; logic [31:0] req, ack;
  logic [31:0][7:0] adc; logic [53:0] wdata; logic [11:0] fcount;
  hit_writer #(.NCH(32), .WRITE_CYC(3), .FIFO_DEPTH(2048)) dut (.clk, .rst_n, .chip_id(8'h5C), .timestamp(ts),
    .req, .adc, .ack, .fifo_full, .fifo_count(fcount), .fifo_wr, .fifo_wdata(wdata));
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  always_ff @(posedge clk) ts <= rst_n ? ts + 1 : 0;
  initial begin
    hit_rec_t r;
    int last_ts, last_ch, nw, c0;
    logic [31:0] served;
    rst_n = 0; fifo_full = 0; fcount = 0; req = 0;
    for (int c = 0; c < 32; c++) adc[c] = 8'(c * 7 + 3);
    repeat (2) @(posedge clk); #1 rst_n = 1;
    fcount = 12'd1500;
    #0 req = '1;
    @(negedge clk);
    last_ts = -1; last_ch = -1; nw = 0; c0 = 0;
    while (nw < 32) begin
      if (fifo_wr) begin
        r = hit_rec_t'(wdata);
        check(r.rtype == REC_DATA && r.chip_id == 8'h5C, "type and chip");
        check(r.timestamp == ts, "timestamp taken at the write");
        check(r.data == 10'(8'(r.channel * 7 + 3)), "adc value of the granted channel");
        check(r.fifo_flags == 2'b01, "half-full flag");
        check(parity_ok(wdata), "odd parity");
        check(ack == (32'd1 << r.channel), "ack to the granted channel");
        if (last_ch >= 0) begin
          check(int'(r.channel) == (last_ch + 1) % 32, "round robin");
          check(int'(r.timestamp) - last_ts == 3, "writes 3 cycles apart");
        end
        last_ch = r.channel; last_ts = r.timestamp; nw++;
      end
      served = ack;
      @(posedge clk); #1 req &= ~served;
      @(negedge clk);
    end
    check(req == 0, "all channels served");
    // FIFO full holds the writer
    req[5] = 1; fifo_full = 1;
    repeat (10) begin @(negedge clk); check(!fifo_wr && ack == 0, "hold while full"); end
    fifo_full = 0; fcount = 12'd2047;
    @(negedge clk);
    while (!fifo_wr) @(negedge clk);
    r = hit_rec_t'(wdata);
    check(r.channel == 5 && r.fifo_flags == 2'b11, "full flag on the write that fills the FIFO");
    finish();
  end
endmodule
