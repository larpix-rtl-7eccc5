// hit_writer: turns finished channel conversions into 54-bit hit records and
// writes them to the FIFO.
//
// Channels with a record waiting raise req. Every WRITE_CYC cycles at most
// one of them is granted, round-robin, and its record is written: type DATA,
// this chip's ID, the channel number, the timestamp counter value in the
// cycle of the write, the ADC value, the FIFO status flags and odd parity.
// The paper reports that simultaneous externally triggered records carry
// timestamps 3 cycles apart because the timestamp is taken at the FIFO write
// and the writes are spaced in time; WRITE_CYC = 3 and timestamping at the
// write reproduce that behaviour of the chip. The round-robin order and the
// meaning of the flags ({FIFO full after this write, FIFO at least half
// full}) are this design's choices. No write is made while the FIFO is full:
// the channels then simply wait (no record is lost).
module hit_writer
  import larpix_pkg::*;
#(
  parameter int unsigned NCH       = 32,
  parameter int unsigned WRITE_CYC = 3,
  parameter int unsigned FIFO_DEPTH = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [CHIP_W-1:0]         chip_id,
  input  logic [TS_W-1:0]           timestamp,
  input  logic [NCH-1:0]            req,
  input  logic [NCH-1:0][ADC_W-1:0] adc,
  output logic [NCH-1:0]            ack,
  input  logic                      fifo_full,
  input  logic [$clog2(FIFO_DEPTH):0] fifo_count,
  output logic                      fifo_wr,
  output logic [REC_W-1:0]          fifo_wdata
);
  localparam int unsigned CW = $clog2(NCH);
  logic [CW-1:0] last;          // last channel granted
  logic [1:0]    slot;          // cycles until the next write is allowed
  logic          found;
  logic [CW-1:0] pick;
  hit_rec_t      rec;

  // Round-robin: first requesting channel after the last one granted.
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned i = 1; i <= NCH; i++) begin
      logic [CW-1:0] c;
      c = CW'(last + CW'(i));
      if (!found && req[c]) begin
        found = 1'b1;
        pick  = c;
      end
    end
  end

  wire grant = found && (slot == '0) && !fifo_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last <= CW'(NCH - 1);
      slot <= '0;
    end else if (grant) begin
      last <= pick;
      slot <= 2'(WRITE_CYC - 1);
    end else if (slot != '0) begin
      slot <= slot - 1'b1;
    end
  end

  always_comb begin
    rec            = '0;
    rec.rtype      = REC_DATA;
    rec.chip_id    = chip_id;
    rec.channel    = CH_W'(pick);
    rec.timestamp  = timestamp;
    rec.data       = 10'(adc[pick]);
    rec.fifo_flags[1] = (fifo_count + 1'b1) == ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH);
    rec.fifo_flags[0] = fifo_count >= ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH / 2);
    rec.parity     = odd_parity(rec[REC_W-2:0]);
  end

  always_comb begin
    ack = '0;
    if (grant) ack[pick] = 1'b1;
  end
  assign fifo_wr    = grant;
  assign fifo_wdata = rec;
endmodule
