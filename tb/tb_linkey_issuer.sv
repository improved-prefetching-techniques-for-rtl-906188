// Testbench for linkey_issuer. The testbench plays the Address Table, the
// Child Association Table, the BFQ and the output buffer (a list that is not
// drained during one request, optionally pre-filled). For 300 random
// table contents it starts the fetch pipeline and compares the exact sequence
// of pushed requests (block and object offset) with a reference written from
// the paper's request-issuing algorithm: breadth-first walk from the hit
// entry, KeyO request then one per child offset, no duplicate blocks, never
// the core's block, at most 8 requests, then objects from the BFQ.
`include "tb/tb_util.svh"
module tb_linkey_issuer;
  import linkey_pkg::*;
  localparam int AT = 16, CAT = 32, NC = 3;
  logic clk = 0, rst_n = 1, clear = 0;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  logic start = 0, start_hit = 0, busy;
  logic [3:0] start_idx = '0;
  va_t start_addr = '0;
  ofs_t key_o = '0;
  ofs_t [NC-1:0] child_os = '0;
  logic [1:0] num_child = '0;
  logic [3:0] at_rd_idx;
  logic at_rd_valid;
  naddr_t at_rd_addr;
  logic [NC-1:0] at_rd_cv;
  logic [NC-1:0][4:0] at_rd_cidx;
  logic [4:0] cat_rd_idx;
  logic cat_rd_valid;
  logic [3:0] cat_rd_child;
  logic bfq_empty, bfq_pop;
  naddr_t bfq_head;
  logic ob_push, ob_full, ob_match, ev_table_node, ev_bfq_node;
  pf_req_t ob_req;
  blk_t ob_match_blk;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(200000)

  linkey_issuer #(.AT_ENTRIES(AT), .CAT_ENTRIES(CAT), .NUM_CHILD(NC), .OUT_DEPTH(8)) dut (.*);

  // ---- table models ----
  bit     m_av[AT];
  va_t    m_aa[AT];
  bit     m_cv[AT][NC];
  int     m_ci[AT][NC];
  bit     m_catv[CAT];
  int     m_catc[CAT];
  naddr_t bfq[$];
  pf_req_t ob[$];     // buffer contents (pre-filled + pushed)
  pf_req_t got[$];    // pushed during this request

  assign at_rd_valid  = m_av[at_rd_idx];
  assign at_rd_addr   = m_aa[at_rd_idx][47:3];
  always_comb for (int c = 0; c < NC; c++) begin
    at_rd_cv[c]   = m_cv[at_rd_idx][c];
    at_rd_cidx[c] = 5'(m_ci[at_rd_idx][c]);
  end
  assign cat_rd_valid = m_catv[cat_rd_idx];
  assign cat_rd_child = 4'(m_catc[cat_rd_idx]);
  assign bfq_empty    = bfq.size() == 0;
  assign bfq_head     = bfq_empty ? '0 : bfq[0];
  assign ob_full      = ob.size() >= 8;
  always_comb begin
    ob_match = 0;
    foreach (ob[i]) if (ob[i].blk == ob_match_blk) ob_match = 1;
  end
  // sample the handshakes at the clock edge, update the models half a cycle
  // later so that the design never sees a model change at its own edge
  logic push_d = 0, pop_d = 0;
  pf_req_t req_d;
  always @(posedge clk) begin push_d <= ob_push; pop_d <= bfq_pop; req_d <= ob_req; end
  always @(negedge clk) begin
    if (push_d) begin ob.push_back(req_d); got.push_back(req_d); end
    if (pop_d) void'(bfq.pop_front());
    push_d = 0; pop_d = 0;
  end

  // ---- reference ----
  pf_req_t exp[$];
  int pre_n;
  function automatic bit ref_full();
    return (pre_n + exp.size() >= 8) || exp.size() >= 8;
  endfunction
  function automatic bit ref_dup(blk_t b, blk_t core, pf_req_t pre[$]);
    if (b == core) return 1;
    foreach (exp[i]) if (exp[i].blk == b) return 1;
    foreach (pre[i]) if (pre[i].blk == b) return 1;
    return 0;
  endfunction
  function automatic void ref_obj(va_t base, blk_t core, pf_req_t pre[$]);
    for (int k = 0; k <= int'(num_child); k++) begin
      va_t a; blk_t b;
      a = base + va_t'(k == 0 ? key_o : child_os[k-1]);
      b = a[47:6];
      if (!ref_full() && !ref_dup(b, core, pre))
        exp.push_back('{blk: b, obj_ofs: meta_t'(base - {b, 6'b0})});
    end
  endfunction
  function automatic void ref_run(bit h, int ei, va_t core_a, naddr_t bq[$], pf_req_t pre[$]);
    int q[$]; bit seen[AT];
    blk_t core;
    core = core_a[47:6];
    exp.delete();
    if (h) q.push_back(ei);
    while (!ref_full() && q.size() != 0) begin
      int i;
      i = q.pop_front();
      if (!seen[i] && m_av[i]) begin
        seen[i] = 1;
        ref_obj(m_aa[i], core, pre);
        for (int c = 0; c < int'(num_child); c++)
          if (m_cv[i][c] && m_catv[m_ci[i][c]] && q.size() < 16) q.push_back(m_catc[m_ci[i][c]]);
      end
    end
    while (!ref_full() && bq.size() != 0) ref_obj({bq.pop_front(), 3'b0}, core, pre);
  endfunction

  int bfq_runs = 0, full_runs = 0, deep_runs = 0;
  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      naddr_t bq[$]; pf_req_t pre[$];
      int ei, cyc;
      // random tables: nodes 64..128 bytes apart so blocks sometimes repeat
      for (int e = 0; e < AT; e++) begin
        m_av[e] = ($urandom_range(0, 7) != 0);
        m_aa[e] = va_t'(48'h4000 + 8 * $urandom_range(0, 200));
        for (int c = 0; c < NC; c++) begin
          m_cv[e][c] = $urandom_range(0, 1);
          m_ci[e][c] = $urandom_range(0, CAT - 1);
        end
      end
      for (int j = 0; j < CAT; j++) begin m_catv[j] = ($urandom_range(0, 5) != 0); m_catc[j] = $urandom_range(0, AT - 1); end
      num_child = 2'($urandom_range(0, NC));
      for (int c = 0; c < NC; c++) child_os[c] = ofs_t'(8 * $urandom_range(0, 20));
      key_o = ofs_t'(8 * $urandom_range(0, 10));
      bq.delete(); pre.delete();
      repeat ($urandom_range(0, 4)) bq.push_back(naddr_t'(48'h9000 / 8 + $urandom_range(0, 300)));
      repeat ($urandom_range(0, 3)) pre.push_back('{blk: blk_t'(48'h4000 / 64 + $urandom_range(0, 30)), obj_ofs: '0});
      bfq = bq; ob = pre; got.delete(); pre_n = pre.size();
      ei = $urandom_range(0, AT - 1);
      start_hit = ($urandom_range(0, 5) != 0);
      start_idx = 4'(ei);
      start_addr = m_aa[ei] + va_t'($urandom_range(0, 64));
      ref_run(start_hit, ei, start_addr, bq, pre);
      start = 1; @(negedge clk); start = 0;
      cyc = 0;
      #1;
      while (busy) begin @(negedge clk); cyc++; end
      if (got.size() != exp.size() && t < 3) begin
        $display("t=%0d hit=%0d ei=%0d nc=%0d keyo=%0d pre=%0d bq=%0d", t, start_hit, ei, num_child, key_o, pre_n, bq.size());
        foreach (exp[i]) $display(" exp %h %0d", exp[i].blk, exp[i].obj_ofs);
        foreach (got[i]) $display(" got %h %0d", got[i].blk, got[i].obj_ofs);
      end
      #1;
      `CHECK(got.size() == exp.size(), "number of requests")
      for (int i = 0; i < exp.size() && i < got.size(); i++)
        `CHECK(got[i] == exp[i], "request sequence")
      if (bq.size() != 0 && bfq.size() < bq.size()) bfq_runs++;
      if (pre_n + got.size() >= 8) full_runs++;
      if (got.size() > int'(num_child) + 1) deep_runs++;
    end
    $display("runs using BFQ %0d, reaching a full buffer %0d, fetching past one node %0d", bfq_runs, full_runs, deep_runs);
    `CHECK(bfq_runs > 0 && full_runs > 0 && deep_runs > 0, "mechanisms exercised")
    `TB_DONE
  end
endmodule
