// linkey_builder: table building, evictions, invalidations and the filling
// of the Backup Fetch Queue. It runs on every memory response (or completed
// store) independently of the table search, as the paper describes.
//
// For a response carrying block blk and its 64 data bytes:
//   1. Base-and-bound search of the whole AT (done inside the AT): every
//      valid entry with line(Addr) <= blk <= line(Addr + NodeSize) becomes a
//      candidate parent. Candidates are handled one after another.
//   2. For each parent P and each child number i: the pointer slot
//      P.Addr + ChildOs[i]; if it lies in blk, its 64-bit value C is read.
//      An existing link of P for number i is invalidated first (the CAT entry
//      and P's pointer). If C != 0 and both tables have room, C is found in
//      the AT or allocated there (JustBuilt set), a CAT entry (parent P,
//      child, i) is allocated and P's pointer i is set to it.
//   3. If the response carries prefetch metadata (object offset o in the
//      block), the object start S = blk*64 + o is looked up in the AT, and each
//      non-null child pointer of S found in the block is pushed into the BFQ
//      when S is not in the AT or S's pointer i is not valid there.
// Evicting an AT victim V: every CAT entry with parent V is invalidated at
// once; CAT entries with child V are invalidated one per cycle, each clearing
// its parent's pointer; then V is invalidated and overwritten. Evicting a CAT
// victim clears its parent's pointer. Victims never are roots or P (the AT
// enforces this); when no victim exists the insertion is skipped.
// lds.set_root uses the same find-or-allocate path (JustBuilt clear) and
// answers on root_done with the AT index.
//
// The steps are the paper's table-building, eviction, invalidation and BFQ
// rules. Doing them as a state machine that issues one AT and one CAT write
// per cycle, doing the BFQ step after table building, and treating a
// completed store as a response without metadata are this design's choices.
// resp_ready is high only in the idle state.
//
// Lint note: the low three bits of root_req_addr are unused because table
// addresses are 8-byte aligned.
module linkey_builder
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES  = 256,
  parameter int unsigned CAT_ENTRIES = 1024,
  parameter int unsigned NUM_CHILD   = 8,
  localparam int unsigned AI_W = $clog2(AT_ENTRIES),
  localparam int unsigned CI_W = $clog2(CAT_ENTRIES),
  localparam int unsigned CN_W = (NUM_CHILD > 1) ? $clog2(NUM_CHILD) : 1,
  localparam int unsigned NC_W = $clog2(NUM_CHILD + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,

  input  logic            resp_valid,
  output logic            resp_ready,
  input  blk_t            resp_blk,
  input  line_t           resp_data,
  input  logic            resp_meta_valid,
  input  meta_t           resp_meta,

  input  logic            root_req,
  input  va_t             root_req_addr,
  output logic            root_done,
  output logic            root_ok,
  output logic [AI_W-1:0] root_at_idx,

  input  ofs_t [NUM_CHILD-1:0] child_os,
  input  logic [NC_W-1:0]      num_child,
  output logic                 busy,

  // Address Table
  output blk_t                 at_bb_blk,
  input  logic [AT_ENTRIES-1:0] at_bb_match,
  output naddr_t               at_cam_key,
  input  logic [AT_ENTRIES-1:0] at_cam_match,
  output logic [AI_W-1:0]      at_rd_idx,
  input  logic                 at_rd_valid,
  input  naddr_t               at_rd_addr,
  input  logic [NUM_CHILD-1:0] at_rd_cv,
  input  logic [NUM_CHILD-1:0][CI_W-1:0] at_rd_cidx,
  output logic                 at_excl_en,
  output logic [AI_W-1:0]      at_excl_idx,
  input  logic                 at_vict_found,
  input  logic [AI_W-1:0]      at_vict_idx,
  input  logic                 at_vict_valid,
  output at_op_e               at_op,
  output logic [AI_W-1:0]      at_op_idx,
  output naddr_t               at_op_addr,
  output logic                 at_op_jb,
  output logic [CN_W-1:0]      at_op_num,
  output logic [CI_W-1:0]      at_op_cidx,

  // Child Association Table
  output logic [CI_W-1:0]      cat_rd_idx,
  input  logic [AI_W-1:0]      cat_rd_parent,
  input  logic [CN_W-1:0]      cat_rd_num,
  output logic [AI_W-1:0]      cat_csearch_idx,
  input  logic                 cat_csearch_found,
  input  logic [CI_W-1:0]      cat_csearch_cat,
  input  logic                 cat_vict_found,
  input  logic [CI_W-1:0]      cat_vict_idx,
  input  logic                 cat_vict_valid,
  output cat_op_e              cat_op,
  output logic [CI_W-1:0]      cat_op_idx,
  output logic [AI_W-1:0]      cat_op_parent,
  output logic [AI_W-1:0]      cat_op_child,
  output logic [CN_W-1:0]      cat_op_num,

  // Backup Fetch Queue
  output logic                 bfq_push,
  output naddr_t               bfq_push_addr,

  // event pulses (for statistics)
  output logic                 ev_link,       // a CAT link was written
  output logic                 ev_relink,     // an existing link was invalidated on rebuild
  output logic                 ev_at_evict,   // a live AT entry was evicted
  output logic                 ev_cat_evict,  // a live CAT entry was evicted
  output logic                 ev_no_room     // an insertion was skipped for lack of victims
);

  typedef enum logic [3:0] {
    S_IDLE, S_SCAN, S_CHILD, S_ADD, S_EVP, S_EVC, S_ALLOC, S_CATV, S_CATW,
    S_BLOOK, S_BCHILD
  } state_e;

  state_e                state_q;
  logic                  root_mode_q;
  blk_t                  blk_q;
  line_t                 data_q;
  logic                  meta_v_q;
  meta_t                 meta_q;
  logic [AT_ENTRIES-1:0] pend_q;
  logic [AI_W-1:0]       par_q;        // parent P
  va_t                   par_va_q;
  logic [NC_W-1:0]       i_q;          // child number
  naddr_t                c_q;          // child address being added
  logic [AI_W-1:0]       vict_q;       // AT entry being evicted / allocated
  logic [AI_W-1:0]       child_idx_q;  // AT index of the child
  logic [CI_W-1:0]       catw_q;       // CAT entry being written
  logic                  s_hit_q;
  logic [AI_W-1:0]       s_idx_q;

  localparam int unsigned CNI_W = (NUM_CHILD > 1) ? $clog2(NUM_CHILD) : 1;
  logic [CNI_W-1:0] i_lo;
  assign i_lo = i_q[CNI_W-1:0];

  assign busy       = state_q != S_IDLE;
  assign resp_ready = state_q == S_IDLE && !root_req;

  // ---- next pending parent ----
  logic            pend_any;
  logic [AI_W-1:0] pend_idx;
  always_comb begin
    pend_any = 1'b0;
    pend_idx = '0;
    for (int e = 0; e < AT_ENTRIES; e++)
      if (!pend_any && pend_q[e]) begin
        pend_any = 1'b1;
        pend_idx = AI_W'(e);
      end
  end

  // ---- CAM hit of port b ----
  logic            cam_hit;
  logic [AI_W-1:0] cam_idx;
  always_comb begin
    cam_hit = 1'b0;
    cam_idx = '0;
    for (int e = 0; e < AT_ENTRIES; e++)
      if (!cam_hit && at_cam_match[e]) begin
        cam_hit = 1'b1;
        cam_idx = AI_W'(e);
      end
  end

  // ---- pointer slot of child number i, relative to a base ----
  va_t   obj_va, slot_va;
  logic  slot_in_blk;
  logic [63:0] slot_word;
  always_comb begin
    obj_va      = (state_q == S_BLOOK || state_q == S_BCHILD)
                ? {blk_q, {LINE_BITS{1'b0}}} + va_t'(signed'(meta_q))
                : par_va_q;
    slot_va     = obj_va + va_t'(child_os[i_lo]);
    slot_in_blk = line_of(slot_va) == blk_q;
    slot_word   = data_q[slot_va[LINE_BITS-1:ALIGN_BITS]*64 +: 64];
  end
  naddr_t slot_ptr;
  assign slot_ptr = slot_word[VA_W-1:ALIGN_BITS];

  // ---- table ports ----
  always_comb begin
    at_bb_blk       = (state_q == S_IDLE) ? resp_blk : blk_q;
    at_cam_key      = c_q;
    if (state_q == S_BLOOK) at_cam_key = obj_va[VA_W-1:ALIGN_BITS];
    at_rd_idx       = (state_q == S_SCAN) ? pend_idx : (state_q == S_BCHILD) ? s_idx_q : par_q;
    at_excl_en      = !root_mode_q;
    at_excl_idx     = par_q;
    cat_csearch_idx = vict_q;
    cat_rd_idx      = (state_q == S_EVC) ? cat_csearch_cat : cat_vict_idx;

    at_op      = AT_NOP;
    at_op_idx  = par_q;
    at_op_addr = c_q;
    at_op_jb   = !root_mode_q;
    at_op_num  = CN_W'(i_lo);
    at_op_cidx = catw_q;
    cat_op        = CAT_NOP;
    cat_op_idx    = catw_q;
    cat_op_parent = par_q;
    cat_op_child  = child_idx_q;
    cat_op_num    = CN_W'(i_lo);
    bfq_push      = 1'b0;
    bfq_push_addr = slot_ptr;
    ev_link = 1'b0; ev_relink = 1'b0; ev_at_evict = 1'b0; ev_cat_evict = 1'b0; ev_no_room = 1'b0;

    unique case (state_q)
      S_CHILD: if (i_q != num_child && slot_in_blk && at_rd_cv[i_lo]) begin
        // drop the old link of pointer i before rebuilding it
        at_op      = AT_CLR_CHILD;
        cat_op     = CAT_INVAL;
        cat_op_idx = at_rd_cidx[i_lo];
        ev_relink  = 1'b1;
      end
      S_ADD: begin
        if (!root_mode_q && !((cam_hit || at_vict_found) && cat_vict_found)) ev_no_room = 1'b1;
        if (root_mode_q && !cam_hit && !at_vict_found) ev_no_room = 1'b1;
      end
      S_EVP: begin
        cat_op        = CAT_INVAL_PAR;
        cat_op_parent = vict_q;
        ev_at_evict   = 1'b1;
      end
      S_EVC: begin
        if (cat_csearch_found) begin
          cat_op     = CAT_INVAL;
          cat_op_idx = cat_csearch_cat;
          at_op      = AT_CLR_CHILD;
          at_op_idx  = cat_rd_parent;
          at_op_num  = cat_rd_num;
        end else begin
          at_op     = AT_INVAL;
          at_op_idx = vict_q;
        end
      end
      S_ALLOC: begin
        at_op     = AT_ALLOC;
        at_op_idx = vict_q;
      end
      S_CATV: if (cat_vict_found && cat_vict_valid) begin
        cat_op       = CAT_INVAL;
        cat_op_idx   = cat_vict_idx;
        at_op        = AT_CLR_CHILD;
        at_op_idx    = cat_rd_parent;
        at_op_num    = cat_rd_num;
        ev_cat_evict = 1'b1;
      end else if (cat_vict_found) begin
        cat_op     = CAT_WRITE;
        cat_op_idx = cat_vict_idx;
        at_op      = AT_SET_CHILD;
        at_op_cidx = cat_vict_idx;
        ev_link    = 1'b1;
      end
      S_CATW: begin
        cat_op  = CAT_WRITE;
        at_op   = AT_SET_CHILD;
        ev_link = 1'b1;
      end
      S_BCHILD: if (i_q != num_child && slot_in_blk && slot_word != '0 &&
                    (!s_hit_q || !at_rd_cv[i_lo])) begin
        bfq_push = 1'b1;
      end
      default: ;
    endcase
  end

  assign root_done   = root_mode_q && ((state_q == S_ADD && (cam_hit || !at_vict_found)) ||
                                       state_q == S_ALLOC);
  assign root_ok     = (state_q == S_ALLOC) || cam_hit;
  assign root_at_idx = (state_q == S_ALLOC) ? vict_q : cam_idx;

  // ---- state machine ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      root_mode_q <= 1'b0;
      blk_q       <= '0;
      data_q      <= '0;
      meta_v_q    <= 1'b0;
      meta_q      <= '0;
      pend_q      <= '0;
      par_q       <= '0;
      par_va_q    <= '0;
      i_q         <= '0;
      c_q         <= '0;
      vict_q      <= '0;
      child_idx_q <= '0;
      catw_q      <= '0;
      s_hit_q     <= 1'b0;
      s_idx_q     <= '0;
    end else if (clear) begin
      state_q     <= S_IDLE;
      root_mode_q <= 1'b0;
      pend_q      <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (root_req) begin
            root_mode_q <= 1'b1;
            c_q         <= root_req_addr[VA_W-1:ALIGN_BITS];
            state_q     <= S_ADD;
          end else if (resp_valid) begin
            root_mode_q <= 1'b0;
            blk_q       <= resp_blk;
            data_q      <= resp_data;
            meta_v_q    <= resp_meta_valid;
            meta_q      <= resp_meta;
            pend_q      <= at_bb_match;
            state_q     <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (!pend_any) state_q <= meta_v_q ? S_BLOOK : S_IDLE;
          else begin
            pend_q[pend_idx] <= 1'b0;
            if (at_rd_valid) begin
              par_q    <= pend_idx;
              par_va_q <= va_of(at_rd_addr);
              i_q      <= '0;
              state_q  <= S_CHILD;
            end
          end
        end
        S_CHILD: begin
          if (i_q == num_child) state_q <= S_SCAN;
          else if (slot_in_blk && slot_word != '0) begin
            c_q     <= slot_ptr;
            state_q <= S_ADD;
          end else i_q <= i_q + 1'b1;
        end
        S_ADD: begin
          if (root_mode_q) begin
            if (cam_hit || !at_vict_found) begin
              root_mode_q <= 1'b0;
              state_q     <= S_IDLE;
            end else begin
              vict_q  <= at_vict_idx;
              state_q <= at_vict_valid ? S_EVP : S_ALLOC;
            end
          end else if (!((cam_hit || at_vict_found) && cat_vict_found)) begin
            i_q     <= i_q + 1'b1;          // no room: skip this pointer
            state_q <= S_CHILD;
          end else if (cam_hit) begin
            child_idx_q <= cam_idx;
            state_q     <= S_CATV;
          end else begin
            vict_q  <= at_vict_idx;
            state_q <= at_vict_valid ? S_EVP : S_ALLOC;
          end
        end
        S_EVP: state_q <= S_EVC;
        S_EVC: if (!cat_csearch_found) state_q <= S_ALLOC;
        S_ALLOC: begin
          child_idx_q <= vict_q;
          if (root_mode_q) begin
            root_mode_q <= 1'b0;
            state_q     <= S_IDLE;
          end else state_q <= S_CATV;
        end
        S_CATV: begin
          if (!cat_vict_found) begin
            i_q     <= i_q + 1'b1;
            state_q <= S_CHILD;
          end else if (cat_vict_valid) begin
            catw_q  <= cat_vict_idx;
            state_q <= S_CATW;
          end else begin
            i_q     <= i_q + 1'b1;
            state_q <= S_CHILD;
          end
        end
        S_CATW: begin
          i_q     <= i_q + 1'b1;
          state_q <= S_CHILD;
        end
        S_BLOOK: begin
          s_hit_q <= cam_hit;
          s_idx_q <= cam_idx;
          i_q     <= '0;
          state_q <= S_BCHILD;
        end
        S_BCHILD: begin
          if (i_q == num_child) state_q <= S_IDLE;
          else i_q <= i_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
