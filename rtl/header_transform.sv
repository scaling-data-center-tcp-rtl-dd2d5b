// header_transform: ingress block 4. Prepares the headers an event leaves
// the pipeline with.
//
// Every event of a known connection gets the connection's outgoing 4-tuple
// (local -> remote), so a TX segment, or an ACK made later from an RX
// segment, is addressed correctly. For TX payload the TCP sequence number is
// derived from the DMA offset in the host transmit buffer: seq = tx_iss +
// offset (mod 2^32). The control plane writes {tx_iss, tuple} per connection
// through cp_wr (TBL_HDR). The DMA side of the header (address, notification)
// is completed in egress, where the state it needs lives.
//
// Timing: one register stage, one event per clock. Deriving sequence numbers
// from the buffer offset follows the published design; the table layout is
// this implementation's.
module header_transform
  import laminar_pkg::*;
#(
  parameter int unsigned NUM_CONNS = 32768
)(
  input  logic   clk,
  input  logic   rst_n,
  input  cp_wr_t cp_wr,
  input  logic   in_valid,
  input  phv_t   in,
  output logic   out_valid,
  output phv_t   out
);
  localparam int unsigned IW = $clog2(NUM_CONNS);

  typedef struct packed {
    seq_t   tx_iss;
    tuple_t tuple;
  } hdr_t;

  hdr_t hdr [NUM_CONNS];
  hdr_t he;
  phv_t nxt;

  always_comb begin
    he  = hdr[IW'(in.conn)];
    nxt = in;
    if (!in.drop) begin
      nxt.tuple = he.tuple;
      if (in.ev == EV_TX) begin
        nxt.seq      = he.tx_iss + in.seq;
        nxt.ack_flag = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_HDR)
      hdr[IW'(cp_wr.idx)] <= hdr_t'(cp_wr.data[$bits(hdr_t)-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= nxt;
    end
  end
endmodule
