// linkey_bfq: the Backup Fetch Queue (BFQ). A FIFO of 45-bit node addresses
// (8-byte aligned virtual addresses with the low three bits dropped) that the
// table builder fills with child pointers found in prefetch responses and
// that the fetch pipeline drains when the output buffer still has room after
// the table-based fetches. Depth 8 follows the paper. One push and one pop
// per cycle, both may happen together. A push to a full queue is dropped
// (unless a pop frees a slot in the same cycle); the paper does not say what
// happens on overflow, and dropping keeps the older, shallower nodes, which
// the application reaches first. The dropped count is exported.
//
// Lint note: rst_n is reported as both synchronous and asynchronous only
// because the assertion at the end uses it in disable iff; the flops reset
// asynchronously.
module linkey_bfq
  import linkey_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   push,
  input  naddr_t push_addr,
  input  logic   pop,
  output logic   empty,
  output logic   full,
  output naddr_t head,
  output logic   dropped        // pulses when a push is discarded
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  naddr_t             mem_q [DEPTH];
  logic [PW-1:0]      rd_q, wr_q;
  logic [PW:0]        cnt_q;

  logic do_pop, do_push;
  assign empty   = (cnt_q == 0);
  assign full    = (cnt_q == (PW+1)'(DEPTH));
  assign head    = mem_q[rd_q];
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dropped = push && !do_push;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (clear) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= push_addr;
        wr_q        <= inc(wr_q);
      end
      if (do_pop) rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("BFQ popped while empty");

endmodule
