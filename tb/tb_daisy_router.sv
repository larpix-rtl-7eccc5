// tb_daisy_router: record routing. Checked: configuration writes and reads
// addressed to this chip are executed and not forwarded; records for other
// chips and data records are forwarded unchanged; a read produces a reply
// record with the register value and good parity; a bad-parity record for
// this chip is dropped; the output serves forwarded records before read
// replies and read replies before the local FIFO.
module tb_daisy_router;
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
  logic rst_n, rx_valid, cfg_wr, fifo_empty, fifo_rd, tx_ready, tx_load, evf, evp, ovf;
  logic [53:0] rx_word, fifo_rdata, tx_word;
  logic [7:0] cfg_addr, cfg_wdata, cfg_rdata;
  daisy_router dut (.clk, .rst_n, .chip_id(8'd7), .rx_valid, .rx_word, .cfg_wr, .cfg_addr,
    .cfg_wdata, .cfg_rdata, .fifo_empty, .fifo_rdata, .fifo_rd, .tx_ready, .tx_load, .tx_word,
    .ev_forward(evf), .ev_parity_drop(evp), .fwd_overflow(ovf));
  // register file model: value = address + 100
  assign cfg_rdata = cfg_addr + 8'd100;
  initial begin : watchdog
    repeat (WD_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end
  function automatic logic [53:0] cfg(input rec_type_e t, input logic [7:0] chip,
                                      input logic [7:0] a, input logic [7:0] d);
    cfg_rec_t r;
    r = '0; r.rtype = t; r.chip_id = chip; r.reg_addr = a; r.reg_data = d;
    r.parity = odd_parity(r[52:0]);
    return r;
  endfunction
  task automatic rx(input logic [53:0] w);
    rx_word = w; rx_valid = 1; #1;
  endtask
  initial begin
    cfg_rec_t rep;
    logic [53:0] a, b;
    rst_n = 0; rx_valid = 0; rx_word = 0; fifo_empty = 1; fifo_rdata = 54'h12345; tx_ready = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // config write for me
    rx(cfg(REC_CFG_WRITE, 8'd7, 8'd32, 8'h5A));
    check(cfg_wr && cfg_addr == 8'd32 && cfg_wdata == 8'h5A && !evf, "write executed, not forwarded");
    @(posedge clk); #1 rx_valid = 0;
    // bad parity write for me: dropped
    rx(cfg(REC_CFG_WRITE, 8'd7, 8'd32, 8'h5A) ^ (54'd1 << 53));
    check(!cfg_wr && evp && !evf, "bad parity dropped");
    @(posedge clk); #1 rx_valid = 0;
    // config write for another chip: forwarded
    a = cfg(REC_CFG_WRITE, 8'd9, 8'd1, 8'h01);
    rx(a); check(!cfg_wr && evf, "other chip's config forwarded");
    @(posedge clk); #1 rx_valid = 0;
    // data record whose chip id equals mine (from an upstream chip with no
    // such id would not occur, but data is never consumed): forwarded
    b = 54'h0 | 54'(8'd7 << 2);
    rx(b); check(evf && !cfg_wr, "data records always forwarded");
    @(posedge clk); #1 rx_valid = 0;
    // config read for me
    rx(cfg(REC_CFG_READ, 8'd7, 8'd40, 8'h00));
    check(!cfg_wr && !evf, "read not forwarded");
    @(posedge clk); #1 rx_valid = 0;
    // FIFO has data too; output priority: forwarded a, b, then reply, then fifo
    fifo_empty = 0; tx_ready = 1; #1;
    check(tx_load && tx_word == a && !fifo_rd, "first out: forwarded record");
    @(posedge clk); #1 check(tx_load && tx_word == b && !fifo_rd, "second out: forwarded record");
    @(posedge clk); #1;
    rep = cfg_rec_t'(tx_word);
    check(tx_load && rep.rtype == REC_CFG_READ && rep.chip_id == 8'd7 && rep.reg_addr == 8'd40
          && rep.reg_data == 8'd140 && parity_ok(tx_word), "read reply with register value");
    @(posedge clk); #1 check(tx_load && fifo_rd && tx_word == 54'h12345, "then local FIFO");
    tx_ready = 0; #1 check(!tx_load && !fifo_rd, "nothing loaded while transmitter busy");
    // forward while transmitter busy is queued, and beats the FIFO
    rx(a); @(posedge clk); #1 rx_valid = 0;
    tx_ready = 1; #1 check(tx_word == a && !fifo_rd, "queued forward before FIFO");
    @(posedge clk); #1 tx_ready = 0;
    check(!ovf, "no forward overflow");
    finish();
  end
endmodule
