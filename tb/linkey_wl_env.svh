// Workload environment for the benchmark testbenches: builds the linked data
// structures of the paper's benchmark suite in the memory model, runs their
// access patterns through a core model, and compares the demand misses with
// the prefetcher configured against a second run of the same workload with
// the prefetcher reset and left unconfigured. Included inside a testbench
// module that declares the DUT signals and CACHE_BLKS and instantiates the
// DUT with its default parameters.
//
// Every node has NSLOT pointer slots: word 0 holds the key (or end-of-word
// marker), slot j is at byte 8 + 8*j and the value follows the last slot.
// Nodes are placed at random in a pool, each in its own region of
// ceil(size/64)+1 blocks at a random 8-byte offset, so a node may straddle
// blocks. The core model reads the key of each node it visits and then each
// child pointer it follows, one access at a time. Sizes are the paper's
// "small" size of about 1000 nodes; octree is 585 nodes (four full levels),
// since its W-cycle visits grow 16-fold per level. The red-black and splay
// trees hold 1023 keys, 51 (5%) of them inserted while the probes run.
// Per workload the testbench checks that the prefetcher found known nodes
// and issued prefetches; the memory model checks every prefetch. Miss counts
// are printed, not checked, since the paper itself reports workloads where
// the prefetcher does not help.

  `include "tb/linkey_mem_model.svh"

  int              nslot;
  longint unsigned na [];           // node addresses
  int              kid [][];        // child node index per slot, -1 = NULL
  longint unsigned key [];

  function automatic void alloc_nodes(int n, int slots);
    int region, perm [];
    nslot  = slots;
    region = ((16 + 8 * slots + 63) / 64 + 1) * 64;
    na  = new[n]; kid = new[n]; key = new[n];
    perm = new[n];
    foreach (perm[i]) perm[i] = i;
    perm.shuffle();
    mem.delete(); is_node.delete();
    foreach (na[i]) begin
      na[i]  = 64'h0100_0000 + longint'(region) * perm[i] + 8 * $urandom_range(0, 7);
      kid[i] = new[slots];
      foreach (kid[i][j]) kid[i][j] = -1;
      key[i] = i + 1;
      is_node[na[i]] = 1;
    end
  endfunction

  function automatic longint unsigned slot_addr(int i, int j); return na[i] + 8 + 8 * j; endfunction

  function automatic void write_node(int i);
    mem[na[i]] = key[i];
    for (int j = 0; j < nslot; j++) mem[slot_addr(i, j)] = (kid[i][j] < 0) ? 0 : na[kid[i][j]];
    mem[na[i] + 8 + 8 * nslot] = key[i] * 7;
  endfunction

  function automatic void write_all(); foreach (na[i]) write_node(i); endfunction

  // a store to a child slot, reported to the prefetcher when it completes
  task automatic store_kid(int i, int j, int c);
    kid[i][j] = c;
    mem[slot_addr(i, j)] = (c < 0) ? 0 : na[c];
    rq.push_back('{due: cycle + 2, blk: slot_addr(i, j) / 64, meta_v: 0, meta: '0});
  endtask

  task automatic visit(int i);          core_access(na[i]);          endtask
  task automatic read_kid(int i, int j); core_access(slot_addr(i, j)); endtask

  // ---------------- configuration ----------------
  bit prefetch_on;
  task automatic configure(int offs [$], int roots [$]);
    cfg(CFG_RESET, 0, 0);
    child_off = '{};
    if (!prefetch_on) return;
    cfg(CFG_SET_SIZE, 0, 8 + 8 * nslot);     // start to end of the last pointer
    foreach (offs[k]) begin
      cfg(CFG_ADD_OFFSET, 0, 8 + 8 * offs[k]);
      child_off.push_back(8 + 8 * offs[k]);
    end
    foreach (roots[r]) cfg(CFG_SET_ROOT, r, na[roots[r]]);
  endtask

  task automatic set_root(int r, int i);
    if (prefetch_on) cfg(CFG_SET_ROOT, r, na[i]);
  endtask

  // ---------------- traversals ----------------
  task automatic list_pass(int head, int j);
    int i;
    i = head;
    while (i >= 0) begin visit(i); read_kid(i, j); i = kid[i][j]; end
  endtask

  task automatic dfs(int i);
    visit(i);
    for (int j = 0; j < nslot; j++) begin
      read_kid(i, j);
      if (kid[i][j] >= 0) dfs(kid[i][j]);
    end
  endtask

  task automatic w_cycle(int i);
    visit(i);
    for (int pass = 0; pass < 2; pass++)
      for (int j = 0; j < nslot; j++) begin
        read_kid(i, j);
        if (kid[i][j] >= 0) w_cycle(kid[i][j]);
      end
  endtask

  task automatic bfs(int root);
    int q [$];
    bit seen [];
    seen = new[na.size()];
    q.push_back(root); seen[root] = 1;
    while (q.size() != 0) begin
      int i;
      i = q.pop_front();
      visit(i);
      for (int j = 0; j < nslot; j++) begin
        read_kid(i, j);
        if (kid[i][j] < 0) break;             // non-NULL children come first
        if (!seen[kid[i][j]]) begin seen[kid[i][j]] = 1; q.push_back(kid[i][j]); end
      end
    end
  endtask

  // search by key in a binary search tree (slot 0 left, slot 1 right)
  task automatic bst_probe(int root, longint unsigned k);
    int i;
    i = root;
    while (i >= 0) begin
      visit(i);
      if (k == key[i]) break;
      if (k < key[i]) begin read_kid(i, 0); i = kid[i][0]; end
      else            begin read_kid(i, 1); i = kid[i][1]; end
    end
  endtask

  // Zipf-like rank in 1..n: log-uniform, so P(rank r) is roughly 1/r
  function automatic int zipf_rank(int n);
    real u;
    u = real'($urandom_range(0, 1 << 20)) / real'(1 << 20);
    return int'($floor($pow(real'(n), u))) < 1 ? 1 :
           (int'($floor($pow(real'(n), u))) > n ? n : int'($floor($pow(real'(n), u))));
  endfunction

  // ---------------- structures ----------------
  function automatic int build_bst(int lo, int hi);   // node index = key - 1
    int mid;
    if (lo > hi) return -1;
    mid = (lo + hi) / 2;
    kid[mid - 1][0] = build_bst(lo, mid - 1);
    kid[mid - 1][1] = build_bst(mid + 1, hi);
    return mid - 1;
  endfunction

  function automatic void build_full_tree(int fanout, int n);  // heap order
    for (int i = 0; i < n; i++)
      for (int j = 0; j < fanout; j++) if (fanout * i + j + 1 < n) kid[i][j] = fanout * i + j + 1;
  endfunction

  // ---------------- dynamic binary search trees ----------------
  // parent links and colours live only in the testbench; every pointer
  // change is a store the prefetcher is told about
  int par [];
  bit red [];
  int bst_root;
  bit quiet;                          // building before the kernel: no reports

  task automatic set_kid(int i, int j, int c);
    if (quiet) begin kid[i][j] = c; mem[slot_addr(i, j)] = (c < 0) ? 0 : na[c]; end
    else store_kid(i, j, c);
  endtask

  // rotate x above its parent
  task automatic rotate_up(int x);
    int p, g, b;
    bit left;
    p = par[x]; g = par[p];
    left = (kid[p][0] == x);
    b = left ? kid[x][1] : kid[x][0];
    set_kid(p, left ? 0 : 1, b);
    if (b >= 0) par[b] = p;
    set_kid(x, left ? 1 : 0, p);
    par[p] = x; par[x] = g;
    if (g < 0) bst_root = x;
    else set_kid(g, (kid[g][0] == p) ? 0 : 1, x);
  endtask

  task automatic splay(int x);
    while (par[x] >= 0) begin
      int p, g;
      p = par[x]; g = par[p];
      if (g < 0) rotate_up(x);
      else if ((kid[g][0] == p) == (kid[p][0] == x)) begin rotate_up(p); rotate_up(x); end
      else begin rotate_up(x); rotate_up(x); end
    end
  endtask

  // search, reading the path; returns the node found or the last one visited
  task automatic bst_find(longint unsigned k, output int last);
    int i;
    i = bst_root; last = -1;
    while (i >= 0) begin
      last = i;
      if (!quiet) visit(i);
      if (k == key[i]) break;
      if (!quiet) read_kid(i, (k < key[i]) ? 0 : 1);
      i = kid[i][(k < key[i]) ? 0 : 1];
    end
  endtask

  // plain BST insertion of node z (key[z]) below the search path
  task automatic bst_insert(int z);
    int p;
    write_node(z);
    par[z] = -1;
    if (bst_root < 0) begin bst_root = z; return; end
    bst_find(key[z], p);
    set_kid(p, (key[z] < key[p]) ? 0 : 1, z);
    par[z] = p;
  endtask

  task automatic rb_insert(int z);
    bst_insert(z);
    red[z] = 1;
    while (par[z] >= 0 && red[par[z]]) begin
      int p, g, u;
      p = par[z]; g = par[p];
      u = (kid[g][0] == p) ? kid[g][1] : kid[g][0];
      if (u >= 0 && red[u]) begin
        red[p] = 0; red[u] = 0; red[g] = 1; z = g;
      end else begin
        if ((kid[g][0] == p) != (kid[p][0] == z)) begin rotate_up(z); z = p; p = par[z]; end
        red[p] = 0; red[g] = 1;
        rotate_up(p);
      end
    end
    red[bst_root] = 0;
  endtask

  // the kernel of rbtree_* and splay_*: 1023 keys, 5% of them inserted
  // during the 1000 probes; the prefetcher is told when the root moves
  task automatic dyn_tree(bit splay_tree, bit zipf);
    int order [], late [$], perm [];
    alloc_nodes(1023, 2);
    par = new[1023]; red = new[1023];
    order = new[1023];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    quiet = 1; bst_root = -1;
    foreach (order[i]) begin
      if (i < 51) late.push_back(order[i]);
      else if (splay_tree) begin bst_insert(order[i]); splay(order[i]); end
      else rb_insert(order[i]);
    end
    quiet = 0;
    configure('{0, 1}, '{bst_root});
    perm = new[1023];
    foreach (perm[i]) perm[i] = i + 1;
    perm.shuffle();
    for (int q = 0; q < 1000; q++) begin
      int old_root, last;
      old_root = bst_root;
      if (late.size() != 0 && $urandom_range(0, 19) == 0) begin
        int z;
        z = late.pop_front();
        if (splay_tree) begin bst_insert(z); splay(z); end
        else rb_insert(z);
      end else begin
        bst_find(zipf ? longint'(perm[zipf_rank(1023) - 1]) : longint'($urandom_range(1, 1023)), last);
        if (splay_tree) splay(last);
      end
      if (bst_root != old_root) set_root(0, bst_root);
    end
  endtask

  // ---------------- workloads ----------------
  int wl_checks_failed = 0;
  task automatic run_workload(string name, output int misses);
    int m0, hits0, pf0;
    m0 = demand_miss; hits0 = ev_cnt[11]; pf0 = pf_issued;
    case (name)
      "ll", "ll_reverse": begin
        alloc_nodes(1000, 1);
        for (int i = 0; i < 999; i++) kid[i][0] = i + 1;
        write_all(); configure('{0}, '{0});
        list_pass(0, 0);
        if (name == "ll") list_pass(0, 0);
        else begin
          int head;
          head = 0;
          for (int r = 0; r < 2; r++) begin
            // reverse the list with stores, then tell the prefetcher the new head
            int prev, cur;
            prev = -1; cur = head;
            while (cur >= 0) begin
              int nxt;
              nxt = kid[cur][0];
              store_kid(cur, 0, prev);
              prev = cur; cur = nxt;
            end
            head = prev;
            set_root(0, head);
            list_pass(head, 0);
          end
        end
      end
      "dll": begin
        alloc_nodes(1000, 2);
        for (int i = 0; i < 1000; i++) begin
          kid[i][0] = (i < 999) ? i + 1 : -1;
          kid[i][1] = (i > 0) ? i - 1 : -1;
        end
        write_all(); configure('{0, 1}, '{0, 999});
        for (int r = 0; r < 2; r++) begin list_pass(0, 0); list_pass(999, 1); end
      end
      "bintree_dfs", "bintree_bfs": begin
        alloc_nodes(1023, 2);
        build_full_tree(2, 1023);
        write_all(); configure('{0, 1}, '{0});
        for (int r = 0; r < 2; r++) if (name == "bintree_dfs") dfs(0); else bfs(0);
      end
      "bintree_probe_uni", "bintree_probe_zipf": begin
        int root, perm [];
        alloc_nodes(1023, 2);
        root = build_bst(1, 1023);
        write_all(); configure('{0, 1}, '{root});
        perm = new[1023];
        foreach (perm[i]) perm[i] = i + 1;
        perm.shuffle();
        for (int q = 0; q < 1000; q++)
          bst_probe(root, (name == "bintree_probe_uni") ? longint'($urandom_range(1, 1023))
                                                        : longint'(perm[zipf_rank(1023) - 1]));
      end
      "octree": begin
        alloc_nodes(585, 8);
        build_full_tree(8, 585);
        write_all(); configure('{0, 1, 2, 3, 4, 5, 6, 7}, '{0});
        w_cycle(0);
      end
      "graph_bfs": begin
        int deg [];
        alloc_nodes(1000, 5);
        deg = new[1000];
        // a random spanning tree keeps the graph connected, then random
        // extra undirected edges up to degree five
        for (int i = 1; i < 1000; i++) begin
          int p;
          do p = $urandom_range(0, i - 1); while (deg[p] >= 4);
          kid[p][deg[p]] = i; deg[p]++;
          kid[i][deg[i]] = p; deg[i]++;
        end
        for (int e = 0; e < 600; e++) begin
          int a, b;
          a = $urandom_range(0, 999); b = $urandom_range(0, 999);
          if (a != b && deg[a] < 5 && deg[b] < 5) begin
            kid[a][deg[a]] = b; deg[a]++;
            kid[b][deg[b]] = a; deg[b]++;
          end
        end
        write_all(); configure('{0, 1, 2, 3, 4}, '{0});
        for (int r = 0; r < 2; r++) bfs(0);
      end
      "trie_uni", "trie_zipf": begin
        // 26 slots, one per letter; the prefetcher gets e t a o i n s r
        int words [$][$], n, cnt;
        int common [8] = '{4, 19, 0, 14, 8, 13, 18, 17};
        alloc_nodes(1200, 26);
        n = 1;
        for (int w = 0; w < 300 && n < 1190; w++) begin
          int word [$], cur, len;
          len = $urandom_range(3, 7);
          for (int c = 0; c < len; c++)
            word.push_back(($urandom_range(0, 9) < 6) ? common[$urandom_range(0, 7)] : $urandom_range(0, 25));
          words.push_back(word);
          cur = 0;
          foreach (word[c]) begin
            if (kid[cur][word[c]] < 0 && n < 1200) begin kid[cur][word[c]] = n; n++; end
            if (kid[cur][word[c]] >= 0) cur = kid[cur][word[c]];
          end
        end
        // keep only the nodes in use as structure nodes
        for (int i = n; i < 1200; i++) is_node.delete(na[i]);
        write_all(); configure('{4, 19, 0, 14, 8, 13, 18, 17}, '{0});
        cnt = words.size();
        for (int q = 0; q < 1000; q++) begin
          int wi, cur;
          wi = (name == "trie_uni") ? $urandom_range(0, cnt - 1) : zipf_rank(cnt) - 1;
          cur = 0;
          foreach (words[wi][c]) begin
            visit(cur);
            read_kid(cur, words[wi][c]);
            if (kid[cur][words[wi][c]] < 0) break;
            cur = kid[cur][words[wi][c]];
          end
        end
      end
      "rbtree_uni":  dyn_tree(0, 0);
      "rbtree_zipf": dyn_tree(0, 1);
      "splay_uni":   dyn_tree(1, 0);
      "splay_zipf":  dyn_tree(1, 1);
      default: $fatal(1, "unknown workload %s", name);
    endcase
    while (rq.size() != 0) @(negedge clk);
    misses = demand_miss - m0;
    if (prefetch_on) begin
      `CHECK(ev_cnt[11] > hits0, {name, ": the prefetcher recognised nodes"})
      `CHECK(pf_issued > pf0, {name, ": prefetches were issued"})
    end
  endtask

  // run one workload with the prefetcher on and then off, from an empty cache
  task automatic compare(string name);
    int on, off, pfs, hits, seed_on;
    seed_on = $urandom;
    prefetch_on = 1;
    cache_q.delete(); in_cache.delete(); pf_unused.delete();
    pfs = pf_issued; hits = pf_hits;
    process::self().srandom(seed_on);
    run_workload(name, on);
    pfs = pf_issued - pfs; hits = pf_hits - hits;
    prefetch_on = 0;
    cache_q.delete(); in_cache.delete(); pf_unused.delete();
    process::self().srandom(seed_on);
    run_workload(name, off);
    $display("%-20s demand misses with prefetcher %6d, without %6d (%0d%%); prefetches %0d, used %0d",
             name, on, off, (off == 0) ? 0 : (100 * on) / off, pfs, hits);
  endtask

  task automatic start_env();
    cfg_valid = 0; cfg_op = CFG_RESET; cfg_idx = '0; cfg_data = '0;
    core_valid = 0; core_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
  endtask

  task automatic finish_env();
    `CHECK(pf_bad == 0, "every prefetch names a node field given to the prefetcher")
  endtask
