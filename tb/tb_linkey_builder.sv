// Testbench for linkey_builder, connected to real linkey_at, linkey_cat and
// linkey_bfq instances (8 AT entries, 4 CAT entries, two child pointers at
// offsets 8 and 16, 32-byte nodes). A directed sequence of responses checks
// the table contents after each step against values worked out by hand from
// the paper's rules: building links, rebuilding (old link invalidated),
// skipping an insertion when no victim exists, CAT eviction (parent pointer
// cleared), AT eviction of a parent and of a child (its links invalidated),
// the BFQ rules for nodes outside the AT and for unlinked children, and
// lds.set_root through the same allocation path.
`include "tb/tb_util.svh"
module tb_linkey_builder;
  import linkey_pkg::*;
  localparam int AT = 8, CAT = 4, NC = 2;
  logic clk = 0, rst_n = 1;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(5000)

  // ---- harness ----
  logic resp_valid = 0, resp_ready, resp_meta_valid = 0;
  blk_t resp_blk = '0;
  line_t resp_data = '0;
  meta_t resp_meta = '0;
  logic root_req = 0, root_done, root_ok;
  va_t root_req_addr = '0;
  logic [2:0] root_at_idx;
  ofs_t [NC-1:0] child_os = '{12'd16, 12'd8};
  logic [1:0] num_child = 2'd2;
  logic busy;
  logic [AT-1:0] root_mask = '0;
  logic touch_en = 0, clear_jb = 0;
  logic [2:0] touch_idx = '0;

  blk_t at_bb_blk; logic [AT-1:0] at_bb_match, at_cam_match, unused_match_a;
  naddr_t at_cam_key; logic [2:0] at_rd_idx; logic at_rd_valid; naddr_t at_rd_addr;
  logic [NC-1:0] at_rd_cv; logic [NC-1:0][1:0] at_rd_cidx;
  logic at_excl_en; logic [2:0] at_excl_idx; logic at_vict_found, at_vict_valid; logic [2:0] at_vict_idx;
  at_op_e at_op; logic [2:0] at_op_idx; naddr_t at_op_addr; logic at_op_jb; logic at_op_num; logic [1:0] at_op_cidx;
  logic [1:0] cat_rd_idx; logic [2:0] cat_rd_parent; logic cat_rd_num;
  logic [2:0] cat_csearch_idx; logic cat_csearch_found; logic [1:0] cat_csearch_cat;
  logic cat_vict_found, cat_vict_valid; logic [1:0] cat_vict_idx;
  cat_op_e cat_op; logic [1:0] cat_op_idx; logic [2:0] cat_op_parent, cat_op_child; logic cat_op_num;
  logic bfq_push, bfq_pop = 0, bfq_empty, bfq_full, bfq_dropped; naddr_t bfq_push_addr, bfq_head;
  logic ev_link, ev_relink, ev_at_evict, ev_cat_evict, ev_no_room;

  linkey_builder #(.AT_ENTRIES(AT), .CAT_ENTRIES(CAT), .NUM_CHILD(NC)) dut (
    .clk, .rst_n, .clear(1'b0), .*);

  linkey_at #(.AT_ENTRIES(AT), .CAT_ENTRIES(CAT), .NUM_CHILD(NC)) u_at (
    .clk, .rst_n, .clear(1'b0),
    .cam_key_a('0), .cam_match_a(unused_match_a), .cam_key_b(at_cam_key), .cam_match_b(at_cam_match),
    .bb_blk(at_bb_blk), .node_size(12'd32), .bb_match(at_bb_match),
    .rd_idx_a('0), .rd_valid_a(), .rd_addr_a(), .rd_cv_a(), .rd_cidx_a(),
    .rd_idx_b(at_rd_idx), .rd_valid_b(at_rd_valid), .rd_addr_b(at_rd_addr), .rd_cv_b(at_rd_cv), .rd_cidx_b(at_rd_cidx),
    .all_addr(), .all_valid(), .root_mask, .excl_en(at_excl_en), .excl_idx(at_excl_idx),
    .vict_found(at_vict_found), .vict_idx(at_vict_idx), .vict_valid(at_vict_valid),
    .op(at_op), .op_idx(at_op_idx), .op_addr(at_op_addr), .op_jb(at_op_jb), .op_num(at_op_num), .op_cidx(at_op_cidx),
    .touch_en, .touch_idx, .clear_jb);

  linkey_cat #(.AT_ENTRIES(AT), .CAT_ENTRIES(CAT), .NUM_CHILD(NC)) u_cat (
    .clk, .rst_n, .clear(1'b0),
    .rd_idx_a('0), .rd_child_a(), .rd_valid_a(),
    .rd_idx_b(cat_rd_idx), .rd_valid_b(), .rd_parent_b(cat_rd_parent), .rd_num_b(cat_rd_num),
    .csearch_idx(cat_csearch_idx), .csearch_found(cat_csearch_found), .csearch_cat(cat_csearch_cat),
    .vict_found(cat_vict_found), .vict_idx(cat_vict_idx), .vict_valid(cat_vict_valid),
    .op(cat_op), .op_idx(cat_op_idx), .op_parent(cat_op_parent), .op_child(cat_op_child), .op_num(cat_op_num),
    .touch_en(1'b0), .touch_parent('0), .clear_jb);

  linkey_bfq #(.DEPTH(8)) u_bfq (.clk, .rst_n, .clear(1'b0), .push(bfq_push), .push_addr(bfq_push_addr),
    .pop(bfq_pop), .empty(bfq_empty), .full(bfq_full), .head(bfq_head), .dropped(bfq_dropped));

  int n_relink = 0, n_at_ev = 0, n_cat_ev = 0, n_noroom = 0, n_link = 0;
  always @(posedge clk) begin
    n_relink += int'(ev_relink); n_at_ev += int'(ev_at_evict); n_cat_ev += int'(ev_cat_evict);
    n_noroom += int'(ev_no_room); n_link += int'(ev_link);
  end

  // ---- node addresses ----
  localparam va_t A = 48'h1000, B = 48'h2000, C = 48'h3000, D = 48'h4000, E = 48'h5000,
                  F = 48'h6000, G = 48'h7000, H = 48'h8000, I = 48'h9000, J = 48'hA000,
                  K = 48'hB000, R2 = 48'hC000;

  // ---- table inspection ----
  function automatic int find(va_t a);
    for (int e = 0; e < AT; e++) if (u_at.valid_q[e] && u_at.addr_q[e] == a[47:3]) return e;
    return -1;
  endfunction
  // AT index linked as child <num> of the node at address p, or -1
  function automatic int link(va_t p, int num);
    int pi, ci;
    pi = find(p);
    if (pi < 0 || !u_at.cv_q[pi][num]) return -1;
    ci = int'(u_at.cidx_q[pi][num]);
    if (!u_cat.valid_q[ci] || u_cat.parent_q[ci] != 3'(pi) || u_cat.num_q[ci] != 1'(num)) return -2;
    return int'(u_cat.child_q[ci]);
  endfunction
  function automatic int cat_of(va_t p, int num);
    return int'(u_at.cidx_q[find(p)][num]);
  endfunction

  // ---- stimulus ----
  task automatic respond(va_t node_a, va_t c0, va_t c1, bit meta_v);
    line_t d;
    d = '0;
    d[(node_a[5:3] + 1) * 64 +: 64] = 64'(c0);
    d[(node_a[5:3] + 2) * 64 +: 64] = 64'(c1);
    resp_blk = node_a[47:6]; resp_data = d; resp_meta_valid = meta_v;
    resp_meta = meta_t'(node_a[5:0]);
    resp_valid = 1;
    do @(posedge clk); while (!resp_ready);
    #1 resp_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask
  task automatic set_root(va_t a, output int idx, output bit ok);
    root_req = 1; root_req_addr = a;
    forever begin
      @(posedge clk);
      if (root_done) begin idx = int'(root_at_idx); ok = root_ok; break; end
    end
    #1 root_req = 0;
    @(negedge clk);
  endtask
  task automatic bfq_expect(va_t exp[$]);
    foreach (exp[i]) begin
      `CHECK(!bfq_empty && bfq_head == exp[i][47:3], "BFQ content")
      bfq_pop = 1; @(negedge clk); bfq_pop = 0;
    end
    `CHECK(bfq_empty, "BFQ holds nothing else")
  endtask

  initial begin
    int idx; bit ok;
    @(negedge clk); rst_n = 1;
    // S1: root A
    set_root(A, idx, ok);
    `CHECK(ok && idx == 0 && find(A) == 0, "S1 root allocated")
    root_mask = 8'b0000_0001;
    // S2: A's block: children B, C
    respond(A, B, C, 0);
    `CHECK(find(B) == 1 && find(C) == 2, "S2 children allocated")
    `CHECK(link(A, 0) == 1 && link(A, 1) == 2, "S2 links A->B, A->C")
    `CHECK(u_at.jb_q[1] && u_at.jb_q[2], "S2 JustBuilt set")
    // S3: A rebuilt with child 0 = D, child 1 = NULL
    respond(A, D, 48'h0, 0);
    `CHECK(n_relink == 2, "S3 both old links invalidated")
    `CHECK(find(D) == 3 && link(A, 0) == 3 && link(A, 1) == -1, "S3 A->D only")
    `CHECK(!u_cat.valid_q[1] && cat_of(A, 0) == 0, "S3 CAT entry reused")
    // S4: prefetched B arrives: children E, F; B is in the AT so no BFQ push
    respond(B, E, F, 1);
    `CHECK(find(E) == 4 && find(F) == 5 && link(B, 0) == 4 && link(B, 1) == 5, "S4 B->E, B->F")
    `CHECK(bfq_empty, "S4 nothing pushed for a linked node")
    // S5: prefetched G, not in the AT: children go to the BFQ only
    respond(G, H, I, 1);
    `CHECK(find(G) == -1 && find(H) == -1, "S5 no table change")
    bfq_expect('{H, I});
    // S6: D arrives: H gets the last CAT entry, I finds no CAT victim
    respond(D, H, I, 1);
    `CHECK(find(H) == 6 && link(D, 0) == 6, "S6 D->H")
    `CHECK(n_noroom == 1 && find(I) == -1 && link(D, 1) == -1, "S6 no room for I")
    bfq_expect('{I});
    // S7: new traversal clears JustBuilt; D again: I gets CAT 0 by evicting A->D
    clear_jb = 1; @(negedge clk); clear_jb = 0;
    respond(D, H, I, 0);
    `CHECK(find(I) == 7 && link(D, 1) == 7 && link(D, 0) == 6, "S7 D->H, D->I")
    `CHECK(n_cat_ev == 1 && link(A, 0) == -1 && cat_of(D, 1) == 0, "S7 CAT eviction cleared A's pointer")
    // S8: AT full; H's child J evicts B (lowest unused), B's links go
    respond(H, J, 48'h0, 0);
    `CHECK(n_at_ev == 1 && find(B) == -1 && find(J) == 1, "S8 B evicted for J")
    `CHECK(link(H, 0) == 1 && cat_of(H, 0) == 1, "S8 H->J")
    `CHECK(!u_cat.valid_q[2], "S8 B's other link invalidated")
    // S9: C, D, F used; E's child K evicts H, which is D's child 0
    foreach (touch_idx_list[i]) begin touch_en = 1; touch_idx = touch_idx_list[i]; @(negedge clk); end
    touch_en = 0;
    respond(E, K, 48'h0, 0);
    `CHECK(n_at_ev == 2 && find(H) == -1 && find(K) == 6, "S9 H evicted for K")
    `CHECK(link(D, 0) == -1 && link(D, 1) == 7, "S9 D's pointer to H cleared")
    `CHECK(link(E, 0) == 6, "S9 E->K")
    // S10: second root while the table is full: E is the victim
    set_root(R2, idx, ok);
    `CHECK(ok && idx == 4 && find(R2) == 4 && find(E) == -1, "S10 root 2 replaces E")
    `CHECK(n_at_ev == 3, "S10 eviction counted")
    $display("links %0d relinks %0d AT evictions %0d CAT evictions %0d no-room %0d",
             n_link, n_relink, n_at_ev, n_cat_ev, n_noroom);
    `TB_DONE
  end
  logic [2:0] touch_idx_list [3] = '{3'd2, 3'd3, 3'd5};
endmodule
