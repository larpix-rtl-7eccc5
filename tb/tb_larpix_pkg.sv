// tb_larpix_pkg: checks the record layouts and the parity helpers of
// larpix_pkg against bit positions and a parity computed bit by bit here.
module tb_larpix_pkg;
  import larpix_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin
    hit_rec_t h;
    cfg_rec_t c;
    logic [REC_W-1:0] w;
    check($bits(hit_rec_t) == 54 && $bits(cfg_rec_t) == 54, "record width 54");
    h = '0; h.rtype = REC_CFG_READ;  w = h; check(w[1:0] == 2'b11, "type at [1:0]");
    h = '0; h.chip_id = 8'hA5;       w = h; check(w[9:2] == 8'hA5 && w[53:10] == '0, "chip at [9:2]");
    h = '0; h.channel = 7'h5A;       w = h; check(w[16:10] == 7'h5A, "channel at [16:10]");
    h = '0; h.timestamp = 24'hC0FFEE; w = h; check(w[40:17] == 24'hC0FFEE, "timestamp at [40:17]");
    h = '0; h.data = 10'h0AB;        w = h; check(w[50:41] == 10'h0AB, "data at [50:41]");
    h = '0; h.fifo_flags = 2'b10;    w = h; check(w[52:51] == 2'b10, "flags at [52:51]");
    c = '0; c.reg_addr = 8'h21; c.reg_data = 8'h7E; w = c;
    check(w[17:10] == 8'h21 && w[25:18] == 8'h7E, "cfg addr/data positions");
    for (int n = 0; n < 200; n++) begin
      logic [52:0] body;
      int ones;
      body = {$urandom, $urandom};
      ones = 0;
      for (int i = 0; i < 53; i++) ones += body[i];
      check(odd_parity(body) == ((ones % 2) == 0), "odd parity bit");
      check(parity_ok({odd_parity(body), body}), "parity_ok accepts good record");
      check(!parity_ok({~odd_parity(body), body}), "parity_ok rejects bad record");
    end
    finish();
  end
endmodule
