// linkey: top level of the Linkey prefetcher for linked data structures.
//
// Software describes the data structure once (node size, offsets of the child
// pointers, one or more root nodes) through the lds.* configuration port. The
// prefetcher then learns the structure's shape from memory responses and
// keeps it in two tables: the Address Table (AT, known node addresses) and the
// Child Association Table (CAT, parent->child links). When the core touches a
// known node, the fetch pipeline walks the cached shape breadth first and
// issues prefetches for several levels of the structure at once; when the
// tables run out, it continues from the Backup Fetch Queue (BFQ), which holds
// child pointers found in the data of earlier prefetches.
//
// Blocks (all instantiated here):
//   linkey_config   NodeSize / ChildOs / KeyO / Roots registers, lds.* decode
//   linkey_search   root base-and-bound check + AT CAM lookup, new traversal
//   linkey_at       Address Table (AT_ENTRIES entries)
//   linkey_cat      Child Association Table (CAT_ENTRIES entries)
//   linkey_issuer   fetch pipeline (request issuing)
//   linkey_outbuf   8-entry prefetch output buffer, ISSUE_W requests per cycle
//   linkey_builder  table building, evictions, invalidations, BFQ filling
//   linkey_bfq      Backup Fetch Queue
//
// Interfaces (all valid/ready, a transfer happens when both are high at a
// rising clock edge; reset is active-low and asynchronous):
//   cfg_*   one lds.* instruction (op, root number, 48-bit data).
//   core_*  one demand access address from the core. core_ready is low
//           while the fetch pipeline is still working on the previous
//           request (a core that cannot wait may drop the request).
//           The search result is used in the accepting cycle; the
//           prefetches follow over the next cycles.
//   resp_*  one 64-byte block arriving from memory (or written by a completed
//           store), with the object-offset metadata if it answers one of our
//           prefetches.
//   events  one-cycle pulses of internal events, for statistics.
//   idle    no table building or fetch work in progress and no prefetch
//           waiting in the output buffer.
//   pf_*    prefetch requests to the cache controller, up to ISSUE_W per
//           cycle, oldest on port 0; port i may be taken only with ports < i.
// The defaults are the paper's main configuration (256-entry AT, 1024-entry
// CAT, eight child pointers, four roots, 8-entry BFQ and output buffer, two
// requests per cycle). Timing inside the blocks is this design's own.
//
// Lint notes: the CAT's second valid read-out and the BFQ's full flag are
// left unconnected on purpose (the builder only reads CAT entries that an AT
// child pointer marks valid, and the BFQ drops on overflow by itself), which
// gives two PINCONNECTEMPTY warnings. rst_n is reported as both synchronous
// and asynchronous only because the blocks' assertions use it in disable iff;
// all flops use it asynchronously.
module linkey
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES  = 256,
  parameter int unsigned CAT_ENTRIES = 1024,
  parameter int unsigned NUM_CHILD   = 8,
  parameter int unsigned NUM_ROOTS   = 4,
  parameter int unsigned BFQ_DEPTH   = 8,
  parameter int unsigned OUT_DEPTH   = 8,
  parameter int unsigned ISSUE_W     = 2,
  localparam int unsigned RN_W = (NUM_ROOTS > 1) ? $clog2(NUM_ROOTS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,

  input  logic            cfg_valid,
  output logic            cfg_ready,
  input  cfg_op_e         cfg_op,
  input  logic [RN_W-1:0] cfg_idx,
  input  va_t             cfg_data,

  input  logic            core_valid,
  output logic            core_ready,
  input  va_t             core_addr,

  input  logic            resp_valid,
  output logic            resp_ready,
  input  blk_t            resp_blk,
  input  line_t           resp_data,
  input  logic            resp_meta_valid,
  input  meta_t           resp_meta,

  output logic    [ISSUE_W-1:0] pf_valid,
  output pf_req_t [ISSUE_W-1:0] pf_req,
  input  logic    [ISSUE_W-1:0] pf_ready,

  output linkey_events_t        events,
  output logic                  idle
);
  localparam int unsigned AI_W = $clog2(AT_ENTRIES);
  localparam int unsigned CI_W = $clog2(CAT_ENTRIES);
  localparam int unsigned CN_W = (NUM_CHILD > 1) ? $clog2(NUM_CHILD) : 1;
  localparam int unsigned NC_W = $clog2(NUM_CHILD + 1);

  // ---------------- configuration ----------------
  ofs_t                         node_size, key_o;
  ofs_t [NUM_CHILD-1:0]         child_os;
  logic [NC_W-1:0]              num_child;
  logic [NUM_ROOTS-1:0]         root_v;
  logic [NUM_ROOTS-1:0][AI_W-1:0] root_idx;
  logic [AT_ENTRIES-1:0]        root_mask;
  logic                         table_clear, new_trav_mark;
  logic                         root_req, root_done, root_ok;
  va_t                          root_req_addr;
  logic [AI_W-1:0]              root_at_idx;
  logic                         keyo_we;
  ofs_t                         keyo_new;

  linkey_config #(.AT_ENTRIES(AT_ENTRIES), .NUM_CHILD(NUM_CHILD), .NUM_ROOTS(NUM_ROOTS)) u_config (
    .clk, .rst_n,
    .cfg_valid, .cfg_ready, .cfg_op, .cfg_idx, .cfg_data,
    .root_req, .root_req_addr, .root_done, .root_ok, .root_at_idx,
    .keyo_we, .keyo_wdata(keyo_new),
    .node_size, .child_os, .num_child, .key_o, .root_v, .root_idx, .root_mask,
    .table_clear, .new_trav_mark
  );

  // ---------------- tables ----------------
  naddr_t                 at_cam_key_a, at_cam_key_b;
  logic [AT_ENTRIES-1:0]  at_cam_match_a, at_cam_match_b, at_bb_match;
  blk_t                   at_bb_blk;
  logic [AI_W-1:0]        at_rd_idx_a, at_rd_idx_b;
  logic                   at_rd_valid_a, at_rd_valid_b;
  naddr_t                 at_rd_addr_a, at_rd_addr_b;
  logic [NUM_CHILD-1:0]   at_rd_cv_a, at_rd_cv_b;
  logic [NUM_CHILD-1:0][CI_W-1:0] at_rd_cidx_a, at_rd_cidx_b;
  naddr_t [AT_ENTRIES-1:0] at_all_addr;
  logic   [AT_ENTRIES-1:0] at_all_valid;
  logic                   at_excl_en, at_vict_found, at_vict_valid;
  logic [AI_W-1:0]        at_excl_idx, at_vict_idx;
  at_op_e                 at_op;
  logic [AI_W-1:0]        at_op_idx;
  naddr_t                 at_op_addr;
  logic                   at_op_jb;
  logic [CN_W-1:0]        at_op_num;
  logic [CI_W-1:0]        at_op_cidx;

  logic                   search_hit, search_root_hit, new_trav;
  logic [AI_W-1:0]        search_idx;
  logic                   core_fire;

  linkey_at #(.AT_ENTRIES(AT_ENTRIES), .CAT_ENTRIES(CAT_ENTRIES), .NUM_CHILD(NUM_CHILD)) u_at (
    .clk, .rst_n, .clear(table_clear),
    .cam_key_a(at_cam_key_a), .cam_match_a(at_cam_match_a),
    .cam_key_b(at_cam_key_b), .cam_match_b(at_cam_match_b),
    .bb_blk(at_bb_blk), .node_size, .bb_match(at_bb_match),
    .rd_idx_a(at_rd_idx_a), .rd_valid_a(at_rd_valid_a), .rd_addr_a(at_rd_addr_a),
    .rd_cv_a(at_rd_cv_a), .rd_cidx_a(at_rd_cidx_a),
    .rd_idx_b(at_rd_idx_b), .rd_valid_b(at_rd_valid_b), .rd_addr_b(at_rd_addr_b),
    .rd_cv_b(at_rd_cv_b), .rd_cidx_b(at_rd_cidx_b),
    .all_addr(at_all_addr), .all_valid(at_all_valid),
    .root_mask, .excl_en(at_excl_en), .excl_idx(at_excl_idx),
    .vict_found(at_vict_found), .vict_idx(at_vict_idx), .vict_valid(at_vict_valid),
    .op(at_op), .op_idx(at_op_idx), .op_addr(at_op_addr), .op_jb(at_op_jb),
    .op_num(at_op_num), .op_cidx(at_op_cidx),
    .touch_en(core_fire && search_hit), .touch_idx(search_idx),
    .clear_jb(core_fire && new_trav)
  );

  logic [CI_W-1:0] cat_rd_idx_a, cat_rd_idx_b, cat_csearch_cat, cat_vict_idx, cat_op_idx;
  logic [AI_W-1:0] cat_rd_child_a, cat_rd_parent_b, cat_csearch_idx, cat_op_parent, cat_op_child;
  logic            cat_rd_valid_a, cat_csearch_found, cat_vict_found, cat_vict_valid;
  logic [CN_W-1:0] cat_rd_num_b, cat_op_num;
  cat_op_e         cat_op;

  linkey_cat #(.AT_ENTRIES(AT_ENTRIES), .CAT_ENTRIES(CAT_ENTRIES), .NUM_CHILD(NUM_CHILD)) u_cat (
    .clk, .rst_n, .clear(table_clear),
    .rd_idx_a(cat_rd_idx_a), .rd_child_a(cat_rd_child_a), .rd_valid_a(cat_rd_valid_a),
    .rd_idx_b(cat_rd_idx_b), .rd_valid_b(), .rd_parent_b(cat_rd_parent_b),
    .rd_num_b(cat_rd_num_b),
    .csearch_idx(cat_csearch_idx), .csearch_found(cat_csearch_found), .csearch_cat(cat_csearch_cat),
    .vict_found(cat_vict_found), .vict_idx(cat_vict_idx), .vict_valid(cat_vict_valid),
    .op(cat_op), .op_idx(cat_op_idx), .op_parent(cat_op_parent), .op_child(cat_op_child),
    .op_num(cat_op_num),
    .touch_en(core_fire && search_hit), .touch_parent(search_idx),
    .clear_jb(core_fire && new_trav)
  );

  // ---------------- table search ----------------
  logic issuer_busy;
  assign core_ready = !issuer_busy;
  assign core_fire  = core_valid && core_ready;
  assign keyo_we    = core_fire && new_trav;

  linkey_search #(.AT_ENTRIES(AT_ENTRIES), .NUM_ROOTS(NUM_ROOTS)) u_search (
    .clk, .rst_n, .clear(table_clear),
    .req_fire(core_fire), .req_addr(core_addr),
    .node_size, .key_o, .root_v, .root_idx, .root_mask,
    .at_addr(at_all_addr), .at_valid(at_all_valid),
    .cam_key(at_cam_key_a), .cam_match(at_cam_match_a),
    .mark(new_trav_mark),
    .hit(search_hit), .hit_idx(search_idx), .root_hit(search_root_hit),
    .new_trav, .keyo_new
  );

  // ---------------- BFQ and output buffer ----------------
  logic   bfq_push, bfq_pop, bfq_empty, bfq_dropped;
  naddr_t bfq_push_addr, bfq_head;

  linkey_bfq #(.DEPTH(BFQ_DEPTH)) u_bfq (
    .clk, .rst_n, .clear(table_clear),
    .push(bfq_push), .push_addr(bfq_push_addr), .pop(bfq_pop),
    .empty(bfq_empty), .full(), .head(bfq_head), .dropped(bfq_dropped)
  );

  logic    ob_push, ob_full, ob_match;
  pf_req_t ob_req;
  blk_t    ob_match_blk;
  logic [$clog2(OUT_DEPTH+1)-1:0] ob_count;

  linkey_outbuf #(.DEPTH(OUT_DEPTH), .ISSUE_W(ISSUE_W)) u_outbuf (
    .clk, .rst_n, .clear(table_clear),
    .push(ob_push), .push_req(ob_req), .full(ob_full), .count(ob_count),
    .match_blk(ob_match_blk), .match(ob_match),
    .out_valid(pf_valid), .out_req(pf_req), .out_ready(pf_ready)
  );

  // ---------------- fetch pipeline ----------------
  logic ev_table_node, ev_bfq_node;

  linkey_issuer #(.AT_ENTRIES(AT_ENTRIES), .CAT_ENTRIES(CAT_ENTRIES), .NUM_CHILD(NUM_CHILD),
                  .OUT_DEPTH(OUT_DEPTH)) u_issuer (
    .clk, .rst_n, .clear(table_clear),
    .start(core_fire), .start_hit(search_hit), .start_idx(search_idx), .start_addr(core_addr),
    .busy(issuer_busy),
    .key_o, .child_os, .num_child,
    .at_rd_idx(at_rd_idx_a), .at_rd_valid(at_rd_valid_a), .at_rd_addr(at_rd_addr_a),
    .at_rd_cv(at_rd_cv_a), .at_rd_cidx(at_rd_cidx_a),
    .cat_rd_idx(cat_rd_idx_a), .cat_rd_valid(cat_rd_valid_a), .cat_rd_child(cat_rd_child_a),
    .bfq_empty, .bfq_head, .bfq_pop,
    .ob_push, .ob_req, .ob_full, .ob_match_blk, .ob_match,
    .ev_table_node, .ev_bfq_node
  );

  // ---------------- table builder ----------------
  logic builder_busy;
  logic ev_link, ev_relink, ev_at_evict, ev_cat_evict, ev_no_room;

  linkey_builder #(.AT_ENTRIES(AT_ENTRIES), .CAT_ENTRIES(CAT_ENTRIES), .NUM_CHILD(NUM_CHILD)) u_builder (
    .clk, .rst_n, .clear(table_clear),
    .resp_valid, .resp_ready, .resp_blk, .resp_data, .resp_meta_valid, .resp_meta,
    .root_req, .root_req_addr, .root_done, .root_ok, .root_at_idx,
    .child_os, .num_child, .busy(builder_busy),
    .at_bb_blk, .at_bb_match, .at_cam_key(at_cam_key_b), .at_cam_match(at_cam_match_b),
    .at_rd_idx(at_rd_idx_b), .at_rd_valid(at_rd_valid_b), .at_rd_addr(at_rd_addr_b),
    .at_rd_cv(at_rd_cv_b), .at_rd_cidx(at_rd_cidx_b),
    .at_excl_en, .at_excl_idx, .at_vict_found, .at_vict_idx, .at_vict_valid,
    .at_op, .at_op_idx, .at_op_addr, .at_op_jb, .at_op_num, .at_op_cidx,
    .cat_rd_idx(cat_rd_idx_b), .cat_rd_parent(cat_rd_parent_b), .cat_rd_num(cat_rd_num_b),
    .cat_csearch_idx, .cat_csearch_found, .cat_csearch_cat,
    .cat_vict_found, .cat_vict_idx, .cat_vict_valid,
    .cat_op, .cat_op_idx, .cat_op_parent, .cat_op_child, .cat_op_num,
    .bfq_push, .bfq_push_addr,
    .ev_link, .ev_relink, .ev_at_evict, .ev_cat_evict, .ev_no_room
  );

  assign events = '{
    search_hit: core_fire && search_hit,
    root_hit:   core_fire && search_root_hit,
    new_trav:   core_fire && new_trav,
    table_node: ev_table_node,
    bfq_node:   ev_bfq_node,
    bfq_push:   bfq_push,
    bfq_drop:   bfq_dropped,
    link:       ev_link,
    relink:     ev_relink,
    at_evict:   ev_at_evict,
    cat_evict:  ev_cat_evict,
    no_room:    ev_no_room
  };

  assign idle = !builder_busy && !issuer_busy && (ob_count == '0);

endmodule
