// linkey_pkg: types and constants shared by the Linkey linked-data-structure
// prefetcher. Addresses are 48-bit virtual byte addresses. Node addresses kept
// in the tables drop their three low bits (nodes are pointer aligned), giving
// 45-bit words; cache blocks are 64 bytes, so a block address is VA[47:6].
// The 48/45-bit widths, the 12-bit offsets, eight child pointers and four roots
// follow the paper's evaluated configuration; the 64-byte block is this
// design's choice (x86-64 line size).
//
// Lint note: line_of() ignores the six offset bits of its argument by
// design, which verilator reports as unused bits.
package linkey_pkg;

  localparam int unsigned VA_W        = 48;               // virtual address bits
  localparam int unsigned ALIGN_BITS  = 3;                // 8-byte pointer alignment
  localparam int unsigned NADDR_W     = VA_W - ALIGN_BITS; // 45-bit node address
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = 6;                // log2(LINE_BYTES)
  localparam int unsigned BLK_W       = VA_W - LINE_BITS; // 42-bit block address
  localparam int unsigned LINE_W      = LINE_BYTES * 8;   // 512 data bits
  localparam int unsigned OFS_W       = 12;               // NodeSize/KeyO/ChildOs width
  localparam int unsigned META_W      = OFS_W + 1;        // signed object offset in block

  typedef logic [VA_W-1:0]    va_t;
  typedef logic [NADDR_W-1:0] naddr_t;
  typedef logic [BLK_W-1:0]   blk_t;
  typedef logic [OFS_W-1:0]   ofs_t;
  typedef logic signed [META_W-1:0] meta_t;
  typedef logic [LINE_W-1:0]  line_t;

  // Prefetch request: block to fetch plus the offset of the object's start
  // from the start of that block (negative when the object began earlier).
  typedef struct packed {
    blk_t  blk;
    meta_t obj_ofs;
  } pf_req_t;

  // One-cycle event pulses for performance monitoring.
  typedef struct packed {
    logic search_hit;   // a core request hit a known node
    logic root_hit;     // ... and that node was a root
    logic new_trav;     // a new traversal began (KeyO updated)
    logic table_node;   // fetch pipeline prefetched a node from the tables
    logic bfq_node;     // fetch pipeline prefetched a node from the BFQ
    logic bfq_push;     // a child pointer entered the BFQ
    logic bfq_drop;     // a child pointer was lost to a full BFQ
    logic link;         // a CAT link was written
    logic relink;       // an old link was invalidated on rebuild
    logic at_evict;     // a live AT entry was evicted
    logic cat_evict;    // a live CAT entry was evicted
    logic no_room;      // an insertion was skipped: no eviction candidate
  } linkey_events_t;

  // Configuration instructions (lds.*).
  typedef enum logic [2:0] {
    CFG_RESET       = 3'd0,  // lds.reset
    CFG_SET_ROOT    = 3'd1,  // lds.set_root   idx=root number, data=address
    CFG_CLEAR_ROOTS = 3'd2,  // lds.clear_roots
    CFG_ADD_OFFSET  = 3'd3,  // lds.add_offset data=child pointer offset
    CFG_SET_SIZE    = 3'd4,  // lds.set_size   data=NodeSize
    CFG_NEW_TRAV    = 3'd5   // lds.new_traversal
  } cfg_op_e;

  // Table write operations issued by the table builder, one per cycle.
  typedef enum logic [2:0] {
    AT_NOP       = 3'd0,
    AT_ALLOC     = 3'd1,  // write address, valid=1, children invalid
    AT_SET_CHILD = 3'd2,  // child pointer num := CAT index, valid
    AT_CLR_CHILD = 3'd3,  // child pointer num := invalid
    AT_INVAL     = 3'd4   // entry invalid, all child pointers invalid
  } at_op_e;

  typedef enum logic [1:0] {
    CAT_NOP        = 2'd0,
    CAT_WRITE      = 2'd1,  // write parent/child/offset number, valid=1
    CAT_INVAL      = 2'd2,  // entry invalid
    CAT_INVAL_PAR  = 2'd3   // every entry whose parent is the given AT index invalid
  } cat_op_e;

  function automatic blk_t line_of(va_t a);
    return a[VA_W-1:LINE_BITS];
  endfunction

  function automatic va_t va_of(naddr_t n);
    return {n, {ALIGN_BITS{1'b0}}};
  endfunction

endpackage
