// data_placement: egress block 7. Maps TCP sequence numbers to host buffer
// addresses.
//
// Each connection has a host receive buffer of 2^log2_size bytes at base,
// mapped twice back to back in the host's virtual address space, so a
// segment that runs past the buffer end is still one contiguous DMA write
// and is never split. For accepted payload (in order, or an out-of-order
// segment kept in the island, both placed directly):
//   dma_addr = base + ((seq - rx_isn) mod 2^log2_size)
// For the notification it also computes the receive head, the buffer offset
// up to which data is contiguous (next-seq, or the island end when this
// segment closed the gap), and the transmit-buffer offset acknowledged
// (snd_una - tx_iss, same modulus). The control plane writes
// {log2_size, tx_iss, rx_isn, base} through cp_wr (TBL_PLACE).
//
// Timing: one register stage, read-only table. The double-mapped buffer and
// the sequence-to-offset translation follow the published design; using the
// same size for the transmit buffer is this implementation's choice.
module data_placement
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
    logic [4:0]  log2_size;
    seq_t        tx_iss;
    seq_t        rx_isn;
    logic [63:0] base;
  } place_t;

  place_t tbl [NUM_CONNS];
  place_t pe;
  logic [31:0] mask;
  seq_t        head_seq;
  phv_t        nxt;

  always_comb begin
    pe       = tbl[IW'(in.conn)];
    mask     = (32'd1 << pe.log2_size) - 32'd1;
    nxt      = in;
    head_seq = in.rx_nxt + (in.gap_closed ? in.merge_len : 32'd0);
    nxt.dma_addr    = pe.base + {32'd0, (in.acc_seq - pe.rx_isn) & mask};
    nxt.rx_head_off = (head_seq - pe.rx_isn) & mask;
    nxt.tx_free_off = (in.snd_una - pe.tx_iss) & mask;
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_PLACE)
      tbl[IW'(cp_wr.idx)] <= place_t'(cp_wr.data[$bits(place_t)-1:0]);
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
