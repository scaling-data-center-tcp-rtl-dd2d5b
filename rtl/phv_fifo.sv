// phv_fifo: synchronous FIFO of header vectors used by the traffic manager.
// Register-array storage, one push and one pop per clock; a push to a full
// FIFO is refused (the caller counts it as a drop). pop must only be raised
// when empty is low. The output is the head entry, read combinationally.
module phv_fifo
  import laminar_pkg::*;
#(
  parameter int unsigned DEPTH = 64
)(
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  phv_t din,
  input  logic pop,
  output phv_t dout,
  output logic empty,
  output logic full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  phv_t          mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end
endmodule
