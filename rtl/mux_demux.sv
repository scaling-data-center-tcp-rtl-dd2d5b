// mux_demux: ingress block 2. Finds the connection and application context
// of every event.
//
// RX segments are looked up by their 4-tuple in a direct-mapped exact-match
// table: the bucket is an XOR fold of the 96 tuple bits (tuple_hash), and the
// stored tuple must match, or the segment is dropped as not belonging to an
// offloaded connection. Host events (TX payload, replenishment SYNC) name
// their connection; the block checks that the connection is open and belongs
// to the context the DMA write came from. Packet-generator SYNCs take the
// context of their flow. The control plane fills both tables through cp_wr
// (TBL_LOOKUP, TBL_CONN); the pipeline only reads them, as ingress holds no
// mutable protocol state.
//
// Timing: one register stage, one event per clock. The lookup/verify role is
// the published design's; the hash and the table layout are this
// implementation's choice (collisions are the control plane's to avoid).
module mux_demux
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
    logic   valid;
    conn_t  conn;
    tuple_t tuple;
  } lookup_t;

  typedef struct packed {
    logic valid;
    ctx_t ctx;
  } conn_ent_t;

  lookup_t   lookup [NUM_CONNS];
  conn_ent_t conns  [NUM_CONNS];

  logic [IW-1:0] bucket;
  lookup_t       le;
  conn_t         cid;
  conn_ent_t     ce;
  phv_t          nxt;

  always_comb begin
    bucket = IW'(tuple_hash(in.tuple));
    le     = lookup[bucket];
    cid    = (in.ev == EV_RX) ? le.conn : in.conn;
    ce     = conns[IW'(cid)];
    nxt    = in;
    nxt.conn = cid;
    nxt.ctx  = ce.ctx;
    unique case (in.ev)
      EV_RX:        if (!le.valid || le.tuple != in.tuple || !ce.valid) nxt.drop = 1'b1;
      EV_TX,
      EV_SYNC_HOST: if (!ce.valid || ce.ctx != in.ctx) nxt.drop = 1'b1;
      EV_SYNC_GEN:  if (!ce.valid) nxt.drop = 1'b1;
      default:      nxt.drop = 1'b1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_LOOKUP)
      lookup[IW'(cp_wr.idx)] <= lookup_t'(cp_wr.data[$bits(lookup_t)-1:0]);
    if (cp_wr.valid && cp_wr.tbl == TBL_CONN)
      conns[IW'(cp_wr.idx)] <= conn_ent_t'(cp_wr.data[$bits(conn_ent_t)-1:0]);
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
