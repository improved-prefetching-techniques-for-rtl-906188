// Shared body of the end-to-end testbenches. The including module declares
// the DUT signals and the localparams NNODES (tree size), NLOOKUPS, CACHE_BLKS
// (capacity of the modelled L1 in blocks), REQUIRE_ALL (1: every mechanism must
// occur; 0: AT eviction, linking, relinking, table walks and searches must)
// and instantiates the DUT as "dut".
//
// Workload: a binary search tree of NNODES 32-byte nodes (key at +0, left
// child at +8, right child at +16, value at +24) placed at random 64-byte
// slots, probed with keys of which half come from a small hot set. The core
// model reads the key field and then the child pointer of every node on the
// path. Every few probes one node has its two child pointers swapped by a
// store, which the memory model reports to the prefetcher.
// Memory model: a fully associative FIFO-replacement cache of CACHE_BLKS
// blocks; a demand miss is filled after DEMAND_LAT cycles and reported to the
// prefetcher without metadata; an accepted prefetch of a block that is not
// cached is filled after PF_LAT cycles and reported with its metadata.
// Checks: every prefetch names a real node (object start = block*64 +
// metadata) and a block that holds that node's KeyO field or one of its child
// pointers; prefetched blocks are later used by the core; the second phase
// restores the initial tree, empties the cache and runs the same probes
// with the prefetcher reset and unconfigured, and must see more demand misses; the mechanisms of the design are counted.

  `include "tb/linkey_mem_model.svh"

  longint unsigned node_at [];               // node address by key-1
  longint unsigned root_addr;

  // store that swaps the children of node n, reported like a response
  task automatic swap_children(longint unsigned n);
    longint unsigned t;
    t = mem[n + 8]; mem[n + 8] = mem[n + 16]; mem[n + 16] = t;
    rq.push_back('{due: cycle, blk: n / 64, meta_v: 0, meta: '0});
  endtask

  // build a balanced BST over keys 1..NNODES in random slots
  function automatic longint unsigned build(int lo, int hi);
    int mid;
    longint unsigned n, l, r;
    if (lo > hi) return 0;
    mid = (lo + hi) / 2;
    n = node_at[mid - 1];
    l = build(lo, mid - 1);
    r = build(mid + 1, hi);
    mem[n] = longint'(mid); mem[n + 8] = l; mem[n + 16] = r; mem[n + 24] = longint'(mid) * 3;
    return n;
  endfunction

  int keys [];
  task automatic run_probes(output int misses);
    int m0;
    m0 = demand_miss;
    for (int q = 0; q < NLOOKUPS; q++) begin
      longint unsigned n;
      n = root_addr;
      while (n != 0) begin
        longint unsigned k;
        core_access(n);                // key field
        k = mem[n];
        if (longint'(keys[q]) == k) break;
        if (longint'(keys[q]) < k) begin core_access(n + 8);  n = mem[n + 8]; end
        else                       begin core_access(n + 16); n = mem[n + 16]; end
      end
      if (q % 7 == 6) swap_children(node_at[(q * 37) % NNODES]);
    end
    misses = demand_miss - m0;
  endtask

  initial begin
    int slots [];
    int miss_on, miss_off;
    cfg_valid = 0; cfg_op = CFG_RESET; cfg_idx = '0; cfg_data = '0;
    core_valid = 0; core_addr = '0;
    // random node placement: one node per 64-byte slot, at offset 0 or 32
    slots = new[NNODES * 2];
    foreach (slots[i]) slots[i] = i;
    slots.shuffle();
    node_at = new[NNODES];
    foreach (node_at[i]) begin
      node_at[i] = POOL + 64 * slots[i] + 32 * $urandom_range(0, 1);
      is_node[node_at[i]] = 1;
    end
    root_addr = build(1, NNODES);
    mem_init = mem;
    keys = new[NLOOKUPS];
    foreach (keys[i]) keys[i] = ($urandom_range(0, 1) == 0) ? $urandom_range(1, 8) * (NNODES / 9)
                                                            : $urandom_range(1, NNODES);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // configuration, as a program would issue it before its hot loop
    cfg(CFG_RESET, 0, 0);
    cfg(CFG_SET_SIZE, 0, 32);
    child_off = '{8, 16};
    cfg(CFG_ADD_OFFSET, 0, 8);
    cfg(CFG_ADD_OFFSET, 0, 16);
    cfg(CFG_SET_ROOT, 0, root_addr);
    cfg(CFG_NEW_TRAV, 0, 0);
    run_probes(miss_on);
    // the same probes on a cold cache, prefetcher reset and left unconfigured
    begin
      int used_pf_hits;
      used_pf_hits = pf_hits;
      while (rq.size() != 0 || !idle) @(negedge clk);
      cfg(CFG_RESET, 0, 0);
      `CHECK(idle, "idle after reset")
      cache_q.delete(); in_cache.delete(); pf_unused.delete();
      mem = mem_init;
      run_probes(miss_off);
      `CHECK(pf_hits == used_pf_hits, "no prefetches while unconfigured")
    end
    $display("demand misses: prefetcher on %0d, off %0d; prefetches %0d (%0d already cached), used %0d, core stall cycles %0d",
             miss_on, miss_off, pf_issued, pf_dropped_cached, pf_hits, core_stall);
    for (int i = 0; i < 12; i++) $display("  event %-10s %0d", ev_name[i], ev_cnt[i]);
    `CHECK(pf_bad == 0, "every prefetch names a real node field")
    `CHECK(pf_issued > 0 && pf_hits > 0, "prefetched blocks were used")
    $display("  cycles issuing two prefetches %0d", dual_issue);
    $display("  hit to first prefetch: %0d..%0d cycles; walks %0d, mean %0d, max %0d cycles",
             lat_min, lat_max, walks, walk_sum / (walks == 0 ? 1 : walks), walk_max);
    `CHECK(dual_issue > 0, "two prefetches issued in one cycle")
    `CHECK(core_stall > 0, "core request held while the issuer was busy")
    `CHECK(miss_on < miss_off, "fewer demand misses with the prefetcher")
    for (int i = 0; i < 12; i++)
      if (REQUIRE_ALL || i inside {[2:4], [8:11]}) `CHECK(ev_cnt[i] > 0, {"mechanism occurred: ", ev_name[i]})
    `TB_DONE
  end
