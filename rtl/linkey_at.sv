// linkey_at: the Address Table (AT). Each entry holds a known linked-data-
// structure node: a valid bit, the two replacement bits (UsedLRU and
// JustBuilt), the node's 45-bit address and, for each child pointer number,
// a valid bit and the index of the Child Association Table entry that links
// the node to that child. The entry layout follows the paper (Table "Address
// Table entry", and the populated example figure: Valid(1), LRU(2),
// Address(45), per child a valid bit and a log2|CAT|-bit index).
//
// Searches are combinational and run every cycle:
//   * two CAM ports compare a 45-bit key against every valid address;
//   * a base-and-bound port flags every valid entry whose node may touch a
//     given cache block: line(Address) <= blk <= line(Address + NodeSize);
//   * a victim port picks an entry to allocate: the lowest invalid entry,
//     else the lowest valid entry with both replacement bits clear that is not
//     a root and not the excluded (parent) entry. vict_found is 0 when none is
//     allowed, and the caller then skips the insertion.
// Writes take effect at the clock edge: one table-builder operation (at_op_e)
// per cycle, a "touch" that sets UsedLRU on the entry a search hit, and a
// clear of every JustBuilt bit when a new traversal begins. When every valid
// entry has UsedLRU set, all UsedLRU bits are cleared (pseudo-LRU epoch); the
// restriction to valid entries is this design's choice so that a partly
// filled table still ages. The entries are flip-flops so that the CAM and the
// base-and-bound check can see all of them at once.
module linkey_at
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES  = 256,
  parameter int unsigned CAT_ENTRIES = 1024,
  parameter int unsigned NUM_CHILD   = 8,
  localparam int unsigned AI_W = $clog2(AT_ENTRIES),
  localparam int unsigned CI_W = $clog2(CAT_ENTRIES),
  localparam int unsigned CN_W = (NUM_CHILD > 1) ? $clog2(NUM_CHILD) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,          // lds.reset: invalidate everything

  // CAM ports
  input  naddr_t               cam_key_a,
  output logic [AT_ENTRIES-1:0] cam_match_a,
  input  naddr_t               cam_key_b,
  output logic [AT_ENTRIES-1:0] cam_match_b,

  // base-and-bound port
  input  blk_t                 bb_blk,
  input  ofs_t                 node_size,
  output logic [AT_ENTRIES-1:0] bb_match,

  // read ports
  input  logic [AI_W-1:0]      rd_idx_a,
  output logic                 rd_valid_a,
  output naddr_t               rd_addr_a,
  output logic [NUM_CHILD-1:0] rd_cv_a,
  output logic [NUM_CHILD-1:0][CI_W-1:0] rd_cidx_a,
  input  logic [AI_W-1:0]      rd_idx_b,
  output logic                 rd_valid_b,
  output naddr_t               rd_addr_b,
  output logic [NUM_CHILD-1:0] rd_cv_b,
  output logic [NUM_CHILD-1:0][CI_W-1:0] rd_cidx_b,

  // every entry's address and valid bit, for the root check
  output naddr_t [AT_ENTRIES-1:0] all_addr,
  output logic   [AT_ENTRIES-1:0] all_valid,

  // victim selection
  input  logic [AT_ENTRIES-1:0] root_mask,
  input  logic                 excl_en,
  input  logic [AI_W-1:0]      excl_idx,
  output logic                 vict_found,
  output logic [AI_W-1:0]      vict_idx,
  output logic                 vict_valid,    // victim holds a live node

  // write port (table builder)
  input  at_op_e               op,
  input  logic [AI_W-1:0]      op_idx,
  input  naddr_t               op_addr,
  input  logic                 op_jb,         // JustBuilt value for AT_ALLOC
  input  logic [CN_W-1:0]      op_num,
  input  logic [CI_W-1:0]      op_cidx,

  // replacement-bit maintenance
  input  logic                 touch_en,
  input  logic [AI_W-1:0]      touch_idx,
  input  logic                 clear_jb
);

  logic [AT_ENTRIES-1:0]                valid_q, used_q, jb_q;
  naddr_t [AT_ENTRIES-1:0]              addr_q;
  logic [AT_ENTRIES-1:0][NUM_CHILD-1:0] cv_q;
  logic [AT_ENTRIES-1:0][NUM_CHILD-1:0][CI_W-1:0] cidx_q;

  // ---------------- searches ----------------
  always_comb begin
    for (int e = 0; e < AT_ENTRIES; e++) begin
      va_t  start_va, end_va;
      start_va = va_of(addr_q[e]);
      end_va   = start_va + va_t'(node_size);
      cam_match_a[e] = valid_q[e] && (addr_q[e] == cam_key_a);
      cam_match_b[e] = valid_q[e] && (addr_q[e] == cam_key_b);
      bb_match[e]    = valid_q[e] && (line_of(start_va) <= bb_blk) && (bb_blk <= line_of(end_va));
    end
  end

  assign all_addr  = addr_q;
  assign all_valid = valid_q;

  assign rd_valid_a = valid_q[rd_idx_a];
  assign rd_addr_a  = addr_q[rd_idx_a];
  assign rd_cv_a    = cv_q[rd_idx_a];
  assign rd_cidx_a  = cidx_q[rd_idx_a];
  assign rd_valid_b = valid_q[rd_idx_b];
  assign rd_addr_b  = addr_q[rd_idx_b];
  assign rd_cv_b    = cv_q[rd_idx_b];
  assign rd_cidx_b  = cidx_q[rd_idx_b];

  // ---------------- victim choice ----------------
  always_comb begin
    logic found_inv, found_old;
    logic [AI_W-1:0] inv_idx, old_idx;
    found_inv = 1'b0; found_old = 1'b0;
    inv_idx = '0; old_idx = '0;
    for (int e = 0; e < AT_ENTRIES; e++) begin
      if (!found_inv && !valid_q[e]) begin
        found_inv = 1'b1;
        inv_idx   = AI_W'(e);
      end
      if (!found_old && valid_q[e] && !used_q[e] && !jb_q[e] && !root_mask[e] &&
          !(excl_en && excl_idx == AI_W'(e))) begin
        found_old = 1'b1;
        old_idx   = AI_W'(e);
      end
    end
    vict_found = found_inv || found_old;
    vict_idx   = found_inv ? inv_idx : old_idx;
    vict_valid = !found_inv && found_old;
  end

  // ---------------- updates ----------------
  logic all_used;
  assign all_used = &(used_q | ~valid_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      used_q  <= '0;
      jb_q    <= '0;
      cv_q    <= '0;
      for (int e = 0; e < AT_ENTRIES; e++) begin
        addr_q[e] <= '0;
        cidx_q[e] <= '0;
      end
    end else if (clear) begin
      valid_q <= '0;
      used_q  <= '0;
      jb_q    <= '0;
      cv_q    <= '0;
    end else begin
      if (all_used && |valid_q) used_q <= '0;
      if (clear_jb)             jb_q   <= '0;
      if (touch_en && valid_q[touch_idx]) used_q[touch_idx] <= 1'b1;
      unique case (op)
        AT_ALLOC: begin
          valid_q[op_idx] <= 1'b1;
          addr_q[op_idx]  <= op_addr;
          used_q[op_idx]  <= 1'b0;
          jb_q[op_idx]    <= op_jb;
          cv_q[op_idx]    <= '0;
        end
        AT_SET_CHILD: begin
          cv_q[op_idx][op_num]   <= 1'b1;
          cidx_q[op_idx][op_num] <= op_cidx;
        end
        AT_CLR_CHILD: cv_q[op_idx][op_num] <= 1'b0;
        AT_INVAL: begin
          valid_q[op_idx] <= 1'b0;
          used_q[op_idx]  <= 1'b0;
          jb_q[op_idx]    <= 1'b0;
          cv_q[op_idx]    <= '0;
        end
        default: ;
      endcase
    end
  end

endmodule
