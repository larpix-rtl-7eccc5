// daisy_router: record routing for the daisy chain.
//
// Chips are chained output-to-input, so one input wire and one output wire
// reach every chip. Each record that arrives on the input is either
// consumed here or passed on: a configuration write or read whose chip ID is
// this chip's, with good parity, is executed; every other record (data
// records of upstream chips, configuration for other chips, read replies of
// other chips) is forwarded unchanged. A configuration read produces a
// reply record (type CFG_READ, this chip's ID, the address and the register
// value) sent down the chain. Forwarding follows the paper; the rest of the
// policy is this design's choice: the output serves forwarded records first,
// then a pending read reply, then the local FIFO; records with bad parity
// addressed to this chip are dropped. Forwarded records wait in a
// FWD_DEPTH-entry queue; because input and output run at the same bit rate,
// two entries are enough for the one record that may be in flight on the
// output when a forwarded record arrives.
//
// Timing: rx_valid is a one-cycle pulse from uart_rx. A configuration write
// reaches the register file in the same cycle (cfg_wr). tx_load is raised
// only when tx_ready is high; fifo_rd pops the FIFO head in that cycle.
module daisy_router
  import larpix_pkg::*;
#(
  parameter int unsigned FWD_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHIP_W-1:0] chip_id,
  // from the receiver
  input  logic              rx_valid,
  input  logic [REC_W-1:0]  rx_word,
  // configuration register file
  output logic              cfg_wr,
  output logic [7:0]        cfg_addr,
  output logic [7:0]        cfg_wdata,
  input  logic [7:0]        cfg_rdata,
  // local FIFO
  input  logic              fifo_empty,
  input  logic [REC_W-1:0]  fifo_rdata,
  output logic              fifo_rd,
  // transmitter
  input  logic              tx_ready,
  output logic              tx_load,
  output logic [REC_W-1:0]  tx_word,
  // event counts for monitoring
  output logic              ev_forward,
  output logic              ev_parity_drop,
  output logic              fwd_overflow
);
  cfg_rec_t rin, reply;
  assign rin = cfg_rec_t'(rx_word);

  wire for_me  = (rin.rtype == REC_CFG_WRITE || rin.rtype == REC_CFG_READ)
              && rin.chip_id == chip_id;
  wire good    = parity_ok(rx_word);
  wire forward = rx_valid && !for_me;

  assign cfg_addr  = rin.reg_addr;
  assign cfg_wdata = rin.reg_data;
  assign cfg_wr    = rx_valid && for_me && good && rin.rtype == REC_CFG_WRITE;
  wire   cfg_rd    = rx_valid && for_me && good && rin.rtype == REC_CFG_READ;

  assign ev_forward     = forward;
  assign ev_parity_drop = rx_valid && for_me && !good;

  // Forward queue.
  logic [REC_W-1:0]             fwd_q [FWD_DEPTH];
  localparam int unsigned NW = $clog2(FWD_DEPTH + 1);
  localparam int unsigned FI = (FWD_DEPTH > 1) ? $clog2(FWD_DEPTH) : 1;
  logic [NW-1:0]                fwd_n;
  logic                         reply_v;
  logic [REC_W-1:0]             reply_w;

  typedef enum logic [1:0] {SRC_NONE, SRC_FWD, SRC_REPLY, SRC_FIFO} src_e;
  src_e src;
  always_comb begin
    if (!tx_ready)         src = SRC_NONE;
    else if (fwd_n != '0)  src = SRC_FWD;
    else if (reply_v)      src = SRC_REPLY;
    else if (!fifo_empty)  src = SRC_FIFO;
    else                   src = SRC_NONE;
  end

  always_comb begin
    unique case (src)
      SRC_FWD:   tx_word = fwd_q[0];
      SRC_REPLY: tx_word = reply_w;
      default:   tx_word = fifo_rdata;
    endcase
  end
  assign tx_load = (src != SRC_NONE);
  assign fifo_rd = (src == SRC_FIFO);

  always_comb begin
    reply          = '0;
    reply.rtype    = REC_CFG_READ;
    reply.chip_id  = chip_id;
    reply.reg_addr = rin.reg_addr;
    reply.reg_data = cfg_rdata;
    reply.parity   = odd_parity(reply[REC_W-2:0]);
  end

  wire pop = (src == SRC_FWD);
  assign fwd_overflow = forward && !pop && (fwd_n == ($clog2(FWD_DEPTH+1))'(FWD_DEPTH));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fwd_n   <= '0;
      reply_v <= 1'b0;
      reply_w <= '0;
    end else begin
      if (pop) begin
        for (int unsigned i = 0; i + 1 < FWD_DEPTH; i++) fwd_q[i] <= fwd_q[i + 1];
      end
      if (forward && !fwd_overflow) begin
        fwd_q[FI'(pop ? fwd_n - 1'b1 : fwd_n)] <= rx_word;
      end
      fwd_n <= fwd_n + NW'(forward && !fwd_overflow) - NW'(pop);
      if (cfg_rd) begin
        reply_v <= 1'b1;
        reply_w <= reply;
      end else if (src == SRC_REPLY) begin
        reply_v <= 1'b0;
      end
    end
  end

  a_no_fwd_overflow: assert property (@(posedge clk) disable iff (!rst_n) !fwd_overflow);
endmodule
