// Cache, memory and core model shared by the end-to-end testbenches; it is
// included inside a testbench module that declares the DUT signals, the
// localparam CACHE_BLKS and instantiates the DUT.
//
// Memory is a sparse array of 8-byte words. The cache is fully associative
// with FIFO replacement and CACHE_BLKS blocks. A demand miss stalls the core
// model for DEMAND_LAT cycles and its block is reported to the prefetcher
// without metadata; an accepted prefetch of a block not in the cache is
// filled after PF_LAT cycles and reported with the prefetch's metadata. The
// prefetch port accepts a random prefix of the two ports, with occasional
// bursts of back-pressure. Every accepted prefetch is checked: the object it
// names (block*64 + metadata) must be a node of the structure (is_node) and
// the block must hold that node's KeyO field or one of the child-pointer
// fields given to the prefetcher (child_off). A prefetched block that the
// core later reads counts as a prefetch hit. The event outputs are counted,
// and the length of each fetch-pipeline walk is measured.

  localparam int DEMAND_LAT = 20, PF_LAT = 30;
  localparam longint unsigned POOL = 64'h0010_0000;

  longint unsigned mem [longint unsigned];   // 8-byte words by byte address
  longint unsigned mem_init [longint unsigned];
  bit              is_node [longint unsigned];
  int unsigned     cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- cache model ----------------
  longint unsigned cache_q[$];
  bit              in_cache [longint unsigned];
  bit              pf_unused [longint unsigned];
  int demand_miss = 0, pf_hits = 0, pf_issued = 0, pf_bad = 0, pf_dropped_cached = 0;

  function automatic void cache_insert(longint unsigned b);
    if (in_cache.exists(b)) return;
    if (cache_q.size() >= CACHE_BLKS) begin
      longint unsigned v;
      v = cache_q.pop_front();
      in_cache.delete(v);
      if (pf_unused.exists(v)) pf_unused.delete(v);
    end
    cache_q.push_back(b);
    in_cache[b] = 1;
  endfunction

  typedef struct { int unsigned due; longint unsigned blk; bit meta_v; meta_t meta; } resp_t;
  resp_t rq[$];

  function automatic line_t line_data(longint unsigned b);
    line_t d;
    for (int w = 0; w < 8; w++) begin
      longint unsigned a;
      a = b * 64 + 8 * w;
      d[w*64 +: 64] = mem.exists(a) ? mem[a] : 64'h0;
    end
    return d;
  endfunction

  // response port driver: oldest due response first
  initial begin
    resp_valid = 0; resp_blk = '0; resp_data = '0; resp_meta_valid = 0; resp_meta = '0;
    forever begin
      @(negedge clk);
      if (resp_valid && resp_fire_d) begin resp_valid = 0; end
      if (!resp_valid && rq.size() != 0 && rq[0].due <= cycle) begin
        resp_t r;
        r = rq.pop_front();
        resp_valid = 1; resp_blk = blk_t'(r.blk); resp_data = line_data(r.blk);
        resp_meta_valid = r.meta_v; resp_meta = r.meta;
      end
    end
  end
  logic resp_fire_d = 0;
  always @(posedge clk) resp_fire_d <= resp_valid && resp_ready;

  // prefetch port: accept a random prefix each cycle and check each request
  // (the cache controller is sometimes busy for a burst of cycles)
  int pf_hold = 0;
  always @(negedge clk) begin
    if (pf_hold > 0) pf_hold--;
    else if ($urandom_range(0, 15) == 0) pf_hold = $urandom_range(2, 8);
    pf_ready = (pf_hold > 0) ? 2'b00 : ($urandom_range(0, 2) == 0) ? 2'b01 : 2'b11;
  end
  ofs_t keyo_model = '0;       // KeyO the traversals use
  int   child_off [$];         // child offsets given to the prefetcher
  int dual_issue = 0;
  always @(posedge clk) if (pf_valid == 2'b11 && pf_ready == 2'b11) dual_issue++;
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (pf_valid[p] && pf_ready[p] && (p == 0 || pf_ready[0])) begin
        longint unsigned b, obj;
        bit ok;
        b   = longint'(pf_req[p].blk);
        obj = b * 64 + longint'(signed'(pf_req[p].obj_ofs));
        ok  = is_node.exists(obj) && b == (obj + keyo_model) / 64;
        foreach (child_off[j]) if (is_node.exists(obj) && b == (obj + child_off[j]) / 64) ok = 1;
        pf_issued++;
        if (!ok) begin
          pf_bad++;
          if (pf_bad < 5) $display("bad prefetch blk %h ofs %0d", b, pf_req[p].obj_ofs);
        end
        if (!in_cache.exists(b)) begin
          rq.push_back('{due: cycle + PF_LAT, blk: b, meta_v: 1, meta: pf_req[p].obj_ofs});
          cache_insert(b);
          pf_unused[b] = 1;
        end else pf_dropped_cached++;
      end
    end
  end

  // ---------------- event counters ----------------
  int ev_cnt [12];
  always @(posedge clk) begin
    logic [11:0] e;
    e = events;
    for (int i = 0; i < 12; i++) ev_cnt[i] += int'(e[i]);
  end
  string ev_name [12] = '{"no_room", "cat_evict", "at_evict", "relink", "link", "bfq_drop",
                          "bfq_push", "bfq_node", "table_node", "new_trav", "root_hit", "search_hit"};

  // latency from an accepted hit (with an empty output buffer) to the first
  // prefetch, and length of each walk (cycles core_ready stays low)
  int lat_min = 1 << 30, lat_max = 0, t_hit = 0, walk_max = 0, walk_sum = 0, walks = 0, walk_len = 0;
  bit lat_wait = 0;
  always @(posedge clk) begin
    if (lat_wait && pf_valid[0]) begin
      lat_wait = 0;
      if (int'(cycle) - t_hit < lat_min) lat_min = int'(cycle) - t_hit;
      if (int'(cycle) - t_hit > lat_max) lat_max = int'(cycle) - t_hit;
    end
    if (events.search_hit && !pf_valid[0]) begin lat_wait = 1; t_hit = int'(cycle); end
    if (!core_ready) walk_len++;
    else if (walk_len != 0) begin
      walks++; walk_sum += walk_len;
      if (walk_len > walk_max) walk_max = walk_len;
      walk_len = 0;
    end
  end

  // ---------------- core model ----------------
  int core_stall = 0;
  task automatic core_access(longint unsigned a);
    longint unsigned b;
    core_valid = 1; core_addr = va_t'(a);
    @(posedge clk);
    while (!core_ready) begin core_stall++; @(posedge clk); end
    #1 core_valid = 0;
    b = a / 64;
    if (!in_cache.exists(b)) begin
      demand_miss++;
      cache_insert(b);
      rq.push_back('{due: cycle + DEMAND_LAT, blk: b, meta_v: 0, meta: '0});
      repeat (DEMAND_LAT) @(posedge clk);
    end else begin
      if (pf_unused.exists(b)) begin pf_hits++; pf_unused.delete(b); end
      repeat (2) @(posedge clk);
    end
    @(negedge clk);
  endtask

  task automatic cfg(cfg_op_e op, int idx, longint unsigned d);
    cfg_valid = 1; cfg_op = op; cfg_idx = 2'(idx); cfg_data = va_t'(d);
    @(posedge clk);
    while (!cfg_ready) @(posedge clk);
    #1 cfg_valid = 0;
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
  endtask

