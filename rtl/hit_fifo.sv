// hit_fifo: the record buffer between the channels and the serial output.
//
// 2048 entries of 54 bits (depth and width from the paper), written by the
// hit writer and read by the output arbiter. Show-ahead: rdata is the oldest
// entry whenever empty is low, and a rd pulse removes it. A write to a full
// FIFO or a read of an empty one is ignored (the writer never does the first,
// the assertion below checks it). count is the number of entries held; half
// is count >= DEPTH/2. Written as a register array with asynchronous head
// read; the memory macro actually used on the chip is not known.
module hit_fifo #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned W     = 54
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr,
  input  logic [W-1:0]             wdata,
  input  logic                     rd,
  output logic [W-1:0]             rdata,
  output logic                     empty,
  output logic                     full,
  output logic                     half,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  wire do_wr = wr && !full;
  wire do_rd = rd && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  assign rdata = mem[rptr];
  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign half  = (count >= (AW+1)'(DEPTH / 2));

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(wr && full));
endmodule
