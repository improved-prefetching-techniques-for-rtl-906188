// linkey_issuer: the fetch pipeline ("prefetch building"), which turns a table
// search result into prefetch requests, following the paper's request-issuing
// algorithm.
//
// On start (a core request was accepted) it clears its per-request state and,
// if the search hit, puts the hit AT index into an internal index queue. It
// then repeats, while the queue is not empty and the request budget is not
// used up:
//   pop an index I; if I was not seen before in this request, prefetch the
//   object at AT[I].Address, then append the child AT index of every valid
//   CAT pointer of AT[I] to the queue (breadth first).
// When the queue is empty it pops node addresses from the Backup Fetch Queue
// and prefetches those objects, until the budget is used up or the BFQ is
// empty. Prefetching an object at base B issues one request for B + KeyO and
// one for B + o for each o in ChildOs. A request goes to the block
// line(address) with metadata B - blockstart, and is dropped if that block is
// the core request's block, was already issued during this request, or is
// already waiting in the output buffer.
//
// The budget is the output buffer: no request is pushed to a full buffer, and
// one core request issues at most OUT_DEPTH (8) requests, matching the paper's
// 8-entry output buffer that one invocation fills. The algorithm is the
// paper's; running it as a multi-cycle state machine (one request, one index
// pop or one child pointer per cycle, busy high meanwhile) and the index-queue
// depth (pushes to a full queue are dropped) are this design's choices.
//
// Lint note: rst_n is reported as both synchronous and asynchronous only
// because the assertion at the end uses it in disable iff; the flops reset
// asynchronously.
module linkey_issuer
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES  = 256,
  parameter int unsigned CAT_ENTRIES = 1024,
  parameter int unsigned NUM_CHILD   = 8,
  parameter int unsigned OUT_DEPTH   = 8,
  parameter int unsigned Q_DEPTH     = 16,
  localparam int unsigned AI_W = $clog2(AT_ENTRIES),
  localparam int unsigned CI_W = $clog2(CAT_ENTRIES),
  localparam int unsigned NC_W = $clog2(NUM_CHILD + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,

  input  logic            start,
  input  logic            start_hit,
  input  logic [AI_W-1:0] start_idx,
  input  va_t             start_addr,
  output logic            busy,

  input  ofs_t                 key_o,
  input  ofs_t [NUM_CHILD-1:0] child_os,
  input  logic [NC_W-1:0]      num_child,

  output logic [AI_W-1:0]      at_rd_idx,
  input  logic                 at_rd_valid,
  input  naddr_t               at_rd_addr,
  input  logic [NUM_CHILD-1:0] at_rd_cv,
  input  logic [NUM_CHILD-1:0][CI_W-1:0] at_rd_cidx,

  output logic [CI_W-1:0]      cat_rd_idx,
  input  logic                 cat_rd_valid,
  input  logic [AI_W-1:0]      cat_rd_child,

  input  logic                 bfq_empty,
  input  naddr_t               bfq_head,
  output logic                 bfq_pop,

  output logic                 ob_push,
  output pf_req_t              ob_req,
  input  logic                 ob_full,
  output blk_t                 ob_match_blk,
  input  logic                 ob_match,

  output logic                 ev_table_node,   // pulse: object prefetched from the tables
  output logic                 ev_bfq_node      // pulse: object prefetched from the BFQ
);
  localparam int unsigned QP_W = $clog2(Q_DEPTH);
  localparam int unsigned HC_W = $clog2(OUT_DEPTH + 1);

  typedef enum logic [2:0] {S_IDLE, S_QPOP, S_OBJ, S_CHILD, S_BFQ} state_e;
  state_e state_q;

  logic [AI_W-1:0]        q_mem [Q_DEPTH];
  logic [QP_W-1:0]        q_rd, q_wr;
  logic [QP_W:0]          q_cnt;
  logic [AT_ENTRIES-1:0]  seen_q;
  blk_t                   hist_q [OUT_DEPTH];
  logic [HC_W-1:0]        hist_cnt;
  blk_t                   core_blk_q;
  va_t                    base_q;
  logic [NC_W-1:0]        k_q, c_q;
  logic                   from_table_q;
  logic [NUM_CHILD-1:0]   node_cv_q;
  logic [NUM_CHILD-1:0][CI_W-1:0] node_cidx_q;

  logic budget_out;
  assign budget_out = ob_full || hist_cnt == HC_W'(OUT_DEPTH);
  assign busy       = state_q != S_IDLE;

  // request address for step k of the current object
  va_t  req_va;
  blk_t req_blk;
  logic in_hist, dup;
  always_comb begin
    if (k_q == '0) req_va = base_q + va_t'(key_o);
    else           req_va = base_q + va_t'(child_os[k_q - 1'b1]);
    req_blk = line_of(req_va);
    in_hist = 1'b0;
    for (int h = 0; h < OUT_DEPTH; h++)
      if (HC_W'(h) < hist_cnt && hist_q[h] == req_blk) in_hist = 1'b1;
    dup = in_hist || ob_match || req_blk == core_blk_q;
  end

  assign ob_match_blk = req_blk;
  assign ob_req.blk     = req_blk;
  assign ob_req.obj_ofs = meta_t'(base_q - {req_blk, {LINE_BITS{1'b0}}});
  assign ob_push        = state_q == S_OBJ && !budget_out && !dup;

  assign at_rd_idx  = q_mem[q_rd];
  assign cat_rd_idx = node_cidx_q[c_q[$clog2(NUM_CHILD > 1 ? NUM_CHILD : 2)-1:0]];
  assign bfq_pop    = state_q == S_BFQ && !budget_out && !bfq_empty;

  assign ev_table_node = state_q == S_QPOP && !budget_out && q_cnt != '0 &&
                         !seen_q[q_mem[q_rd]] && at_rd_valid;
  assign ev_bfq_node   = bfq_pop;

  function automatic logic [QP_W-1:0] qinc(logic [QP_W-1:0] p);
    return (p == QP_W'(Q_DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      q_rd         <= '0;
      q_wr         <= '0;
      q_cnt        <= '0;
      seen_q       <= '0;
      hist_cnt     <= '0;
      core_blk_q   <= '0;
      base_q       <= '0;
      k_q          <= '0;
      c_q          <= '0;
      from_table_q <= 1'b0;
      node_cv_q    <= '0;
      node_cidx_q  <= '0;
      for (int i = 0; i < Q_DEPTH; i++)   q_mem[i]  <= '0;
      for (int i = 0; i < OUT_DEPTH; i++) hist_q[i] <= '0;
    end else if (clear) begin
      state_q  <= S_IDLE;
      q_cnt    <= '0;
      hist_cnt <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          seen_q     <= '0;
          hist_cnt   <= '0;
          core_blk_q <= line_of(start_addr);
          q_rd       <= '0;
          q_mem[0]   <= start_idx;
          q_wr       <= start_hit ? QP_W'(1) : '0;
          q_cnt      <= start_hit ? (QP_W+1)'(1) : '0;
          state_q    <= S_QPOP;
        end
        S_QPOP: begin
          if (budget_out)       state_q <= S_IDLE;
          else if (q_cnt == '0) state_q <= S_BFQ;
          else begin
            q_rd  <= qinc(q_rd);
            q_cnt <= q_cnt - 1'b1;
            if (!seen_q[at_rd_idx] && at_rd_valid) begin
              seen_q[at_rd_idx] <= 1'b1;
              base_q       <= va_of(at_rd_addr);
              node_cv_q    <= at_rd_cv;
              node_cidx_q  <= at_rd_cidx;
              k_q          <= '0;
              from_table_q <= 1'b1;
              state_q      <= S_OBJ;
            end
          end
        end
        S_OBJ: begin
          if (ob_push) begin
            hist_q[hist_cnt[$clog2(OUT_DEPTH)-1:0]] <= req_blk;
            hist_cnt <= hist_cnt + 1'b1;
          end
          if (k_q == num_child) begin
            c_q     <= '0;
            state_q <= from_table_q ? S_CHILD : S_BFQ;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        S_CHILD: begin
          if (c_q == num_child) state_q <= S_QPOP;
          else begin
            if (node_cv_q[c_q[$clog2(NUM_CHILD > 1 ? NUM_CHILD : 2)-1:0]] && cat_rd_valid &&
                q_cnt != (QP_W+1)'(Q_DEPTH)) begin
              q_mem[q_wr] <= cat_rd_child;
              q_wr        <= qinc(q_wr);
              q_cnt       <= q_cnt + 1'b1;
            end
            c_q <= c_q + 1'b1;
          end
        end
        S_BFQ: begin
          if (budget_out || bfq_empty) state_q <= S_IDLE;
          else begin
            base_q       <= va_of(bfq_head);
            k_q          <= '0;
            from_table_q <= 1'b0;
            state_q      <= S_OBJ;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("issuer started while busy");

endmodule
