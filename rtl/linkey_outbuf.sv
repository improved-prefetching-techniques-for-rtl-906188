// linkey_outbuf: the prefetch request output buffer. The fetch pipeline
// pushes one request per cycle (block address plus the object-offset
// metadata); the cache controller takes up to ISSUE_W requests per cycle from
// the head, in order: port i hands out the i-th oldest entry and may be taken
// only together with every lower port (out_ready must be a prefix). Depth 8
// and two requests per cycle follow the paper's evaluation setup. A match
// port reports whether a block is already waiting in the buffer, so the
// fetch pipeline does not queue the same block twice.
//
// Lint note: rst_n is reported as both synchronous and asynchronous only
// because the assertion at the end uses it in disable iff; the flops reset
// asynchronously.
module linkey_outbuf
  import linkey_pkg::*;
#(
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned ISSUE_W = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    push,
  input  pf_req_t push_req,
  output logic    full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  input  blk_t    match_blk,
  output logic    match,
  output logic    [ISSUE_W-1:0] out_valid,
  output pf_req_t [ISSUE_W-1:0] out_req,
  input  logic    [ISSUE_W-1:0] out_ready
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  pf_req_t          mem_q [DEPTH];
  logic [DEPTH-1:0] live;
  logic [PW-1:0]    rd_q, wr_q;
  logic [CW-1:0]    cnt_q;
  logic [CW-1:0]    n_pop;

  assign count = cnt_q;
  assign full  = (cnt_q == CW'(DEPTH));

  function automatic logic [PW-1:0] wrap(int unsigned p);
    return PW'(p % DEPTH);
  endfunction

  always_comb begin
    for (int i = 0; i < ISSUE_W; i++) begin
      out_valid[i] = (CW'(i) < cnt_q);
      out_req[i]   = mem_q[wrap(int'(rd_q) + i)];
    end
    n_pop = '0;
    for (int i = 0; i < ISSUE_W; i++)
      if (out_valid[i] && out_ready[i] && n_pop == CW'(i)) n_pop = n_pop + 1'b1;
    // entries currently held, for the duplicate check
    for (int j = 0; j < DEPTH; j++)
      live[j] = (CW'(j) < cnt_q);
    match = 1'b0;
    for (int j = 0; j < DEPTH; j++)
      if (live[j] && mem_q[wrap(int'(rd_q) + j)].blk == match_blk) match = 1'b1;
  end

  logic do_push;
  assign do_push = push && !full;

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
        mem_q[wr_q] <= push_req;
        wr_q        <= wrap(int'(wr_q) + 1);
      end
      rd_q  <= wrap(int'(rd_q) + int'(n_pop));
      cnt_q <= cnt_q + CW'(do_push) - n_pop;
    end
  end

  // handshake rules
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("output buffer pushed while full");
  for (genvar i = 1; i < ISSUE_W; i++) begin : g_prefix
    assert property (@(posedge clk) disable iff (!rst_n)
                     (out_valid[i] && out_ready[i]) |-> out_ready[i-1])
      else $error("output buffer ports must be taken in order");
  end

endmodule
