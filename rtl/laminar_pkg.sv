// laminar_pkg: types and constants shared by every block of the match-action
// TCP data path.
//
// The data path processes one header vector (PHV) per clock in a lock-step
// pipeline: four stateless ingress blocks, a traffic manager, then six
// stateful egress blocks that keep per-connection TCP state in stage-local
// memories. Only headers travel through the pipeline; payload bytes stay in
// the packet buffer beside it and are not modelled here.
//
// The split into blocks, the four receive-window state variables and the
// event kinds (RX, TX, SYNC, mirrored pseudo-segments) follow the published
// design. Field widths, encodings and the control-plane write bus are choices
// of this implementation.
package laminar_pkg;

  // Largest connection count the identifier fields can carry (32K).
  localparam int unsigned CONN_W = 15;
  // Application contexts (per-core DMA channels), 1K.
  localparam int unsigned CTX_W  = 10;
  localparam int unsigned LEN_W  = 32;  // also carries pseudo-segment ranges

  typedef logic [CONN_W-1:0] conn_t;
  typedef logic [CTX_W-1:0]  ctx_t;
  typedef logic [31:0]       seq_t;
  typedef logic [LEN_W-1:0]  len_t;

  // Where an event entered the pipeline.
  typedef enum logic [1:0] {
    SRC_MAC    = 2'd0,
    SRC_DMA    = 2'd1,
    SRC_PKTGEN = 2'd2
  } src_t;

  // DMA write opcodes from the host library.
  typedef enum logic [1:0] {
    DMA_TX_DATA = 2'd0,   // payload pushed for transmission
    DMA_SYNC    = 2'd1    // receive-buffer replenishment
  } dma_op_t;

  // Workflow an event belongs to.
  typedef enum logic [2:0] {
    EV_NONE      = 3'd0,  // not for this data path (bypass)
    EV_RX        = 3'd1,  // TCP segment from the network
    EV_TX        = 3'd2,  // payload from the host
    EV_SYNC_HOST = 3'd3,  // host replenishes receive window
    EV_SYNC_GEN  = 3'd4,  // packet-generator credit grant
    EV_ACKGEN    = 3'd5   // mirrored ACK / merge pseudo-segment
  } ev_t;

  typedef enum logic [1:0] {
    DEST_NONE = 2'd0,
    DEST_MAC  = 2'd1,
    DEST_DMA  = 2'd2
  } dest_t;

  typedef struct packed {
    logic [31:0] saddr;
    logic [31:0] daddr;
    logic [15:0] sport;
    logic [15:0] dport;
  } tuple_t;

  // What arrives at the pipeline from MAC, DMA or packet generator.
  typedef struct packed {
    src_t        src;
    tuple_t      tuple;     // MAC: as received
    logic [7:0]  ip_proto;  // MAC
    logic        ce;        // MAC: IP ECN congestion-experienced mark
    seq_t        seq;       // MAC: TCP seq; DMA TX: offset in transmit buffer
    seq_t        ack;       // MAC: TCP ack
    logic [31:0] wnd;       // MAC: advertised window in bytes (scaled)
    logic        ack_flag;  // MAC
    logic        ece;       // MAC: ECN echo
    len_t        len;       // payload length
    dma_op_t     dma_op;    // DMA
    conn_t       conn;      // DMA: connection named by the host library
    ctx_t        ctx;       // DMA: context (queue pair) it came from
    logic [31:0] amount;    // DMA SYNC: bytes freed
    conn_t       gen_idx;   // PKTGEN: flow index of this trigger
    logic [31:0] gen_tick;  // PKTGEN: trigger round
  } ev_in_t;

  // Per-packet header vector. Ingress fills the top part; each egress stage
  // adds its snapshot fields.
  typedef struct packed {
    ev_t         ev;
    logic        drop;       // whole event dropped; later stages do nothing
    logic        pl_drop;    // payload discarded, headers (ACK) still processed
    conn_t       conn;
    ctx_t        ctx;
    tuple_t      tuple;      // outgoing direction (local -> remote)
    seq_t        seq;
    len_t        len;
    seq_t        ack;
    logic [31:0] wnd;
    logic        ack_flag;
    logic        ece;
    logic        ce;
    logic [31:0] amount;     // replenish bytes or credit grant
    // receive window (block 5)
    logic        in_order;   // accepted in order (after trimming)
    logic        ooo;        // out of order, ahead of next-seq
    logic        dup;        // entirely below next-seq
    len_t        acc_len;    // accepted (trimmed) length
    seq_t        acc_seq;    // accepted start sequence
    logic [31:0] ooo_off;    // OOO segment start, offset from next-seq
    seq_t        rx_nxt;     // next-seq after stage 1
    logic signed [31:0] avail; // avail after stage 2
    logic        oow_exc;    // in-order out-of-window: control-plane exception
    logic [31:0] tail;       // ooo-tail after stage 3
    logic        ooo_init;   // stage 3 opened a new OOO interval
    logic        gap_closed; // stage 4 found the gap closed: merge needed
    logic [31:0] merge_len;  // bytes next-seq must advance for the merge
    // transmit window (block 6)
    seq_t        snd_una;
    seq_t        snd_nxt;
    seq_t        tx_limit;   // snd_una + peer window
    logic [31:0] acked;      // bytes newly acknowledged
    logic        dupack;
    logic        fast_rtx;
    logic        rto;
    // data placement (block 7)
    logic [63:0] dma_addr;
    logic [31:0] rx_head_off; // highest contiguous receive-buffer offset
    logic [31:0] tx_free_off; // transmit-buffer offset acknowledged
    // protocol signalling (block 8)
    logic        mirror;     // emit an ACK pseudo-segment
    // rate control (block 9)
    logic [31:0] credits;    // credits after this event
  } phv_t;

  // Host notification carried inline with the DMA write.
  typedef struct packed {
    logic        rx_valid;
    logic [31:0] rx_head_off;
    logic        tx_valid;
    logic [31:0] tx_free_off;
    logic        credit_valid;
    logic [31:0] credits;
    logic        fast_rtx;
    logic        rto;
  } notif_t;

  // One egress output: a TCP segment to the MAC or a DMA write to a context.
  typedef struct packed {
    dest_t       dest;
    conn_t       conn;
    ctx_t        ctx;
    tuple_t      tuple;
    seq_t        seq;
    seq_t        ack;
    logic [31:0] wnd;
    logic        ece;
    len_t        len;        // payload bytes carried
    logic [63:0] dma_addr;
    notif_t      notif;
  } egress_out_t;

  // Control-plane table writes, broadcast to every block.
  typedef enum logic [3:0] {
    TBL_LOOKUP  = 4'd0,  // mux_demux bucket: {valid, conn, tuple}
    TBL_CONN    = 4'd1,  // mux_demux conn:   {valid, ctx}
    TBL_HDR     = 4'd2,  // header_transform: {tx_iss, out tuple}
    TBL_SCHED   = 4'd3,  // scheduler: {active, log2 interval, credits/SYNC}
    TBL_RX_NXT  = 4'd4,  // rx_window next-seq
    TBL_RX_AVL  = 4'd5,  // rx_window avail
    TBL_RX_OOO  = 4'd6,  // rx_window ooo-tail (data[31:0]), ooo-head (data[63:32])
    TBL_TX      = 4'd7,  // tx_window: {wnd, snd_nxt, snd_una}
    TBL_PLACE   = 4'd8,  // data_placement: {log2 size, tx_iss, rx_isn, base}
    TBL_METRICS = 4'd9,  // proto_signal: clear counters
    TBL_CREDIT  = 4'd10  // rate_control: credits
  } tbl_t;

  typedef struct packed {
    logic         valid;
    tbl_t         tbl;
    conn_t        idx;
    logic [159:0] data;
  } cp_wr_t;

  // Congestion metrics read by the control plane.
  typedef struct packed {
    logic [31:0] acked_bytes;
    logic [31:0] ecn_bytes;
    logic [31:0] dupacks;
  } metrics_t;

  // Exception raised when an in-order segment overran the window.
  typedef struct packed {
    logic        valid;
    conn_t       conn;
    seq_t        prev_nxt;   // next-seq before the offending segment
    logic [31:0] prev_avail; // avail before the offending segment
  } exc_t;

  // 4-tuple hash used by mux_demux: XOR fold of the 96 tuple bits.
  function automatic conn_t tuple_hash(tuple_t t);
    logic [95:0] b;
    conn_t h;
    b = t;
    h = '0;
    for (int i = 0; i < 96; i += CONN_W) begin
      h ^= conn_t'(b >> i);
    end
    return h;
  endfunction

  function automatic phv_t phv_clear();
    phv_t p;
    p = '0;
    return p;
  endfunction

endpackage
