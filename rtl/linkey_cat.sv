// linkey_cat: the Child Association Table (CAT). Each entry links a parent
// Address Table entry to a child Address Table entry and records which child
// pointer (offset number, an index into ChildOs) the link stands for. Besides
// the valid bit it carries the same two replacement bits as the AT, UsedLRU
// and JustBuilt. Fields and widths follow the paper's CAT entry table and the
// populated example figure (Valid(1), LRU(2), Parent Idx, Child Idx, Offset
// Num with log2|AT| and log2|ChildOs| bits).
//
// Combinational ports, evaluated every cycle:
//   * read port a returns the child index of an entry (fetch pipeline);
//   * read port b returns parent, offset number and valid (table builder,
//     to clear the parent's pointer when an entry is invalidated);
//   * child search returns the lowest valid entry whose child is a given AT
//     index (used, one entry per cycle, when an AT entry is evicted);
//   * victim choice: the lowest invalid entry, else the lowest valid entry
//     with UsedLRU and JustBuilt both clear.
// One table-builder operation (cat_op_e) per cycle is applied at the clock
// edge. A touch sets UsedLRU on every valid entry whose parent is the AT entry
// a search hit, as the paper prescribes. All UsedLRU bits are cleared once
// every valid entry has it set, and every JustBuilt bit on a new traversal.
module linkey_cat
  import linkey_pkg::*;
#(
  parameter int unsigned AT_ENTRIES  = 256,
  parameter int unsigned CAT_ENTRIES = 1024,
  parameter int unsigned NUM_CHILD   = 8,
  localparam int unsigned AI_W = $clog2(AT_ENTRIES),
  localparam int unsigned CI_W = $clog2(CAT_ENTRIES),
  localparam int unsigned CN_W = (NUM_CHILD > 1) ? $clog2(NUM_CHILD) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,          // lds.reset

  input  logic [CI_W-1:0] rd_idx_a,
  output logic [AI_W-1:0] rd_child_a,
  output logic            rd_valid_a,

  input  logic [CI_W-1:0] rd_idx_b,
  output logic            rd_valid_b,
  output logic [AI_W-1:0] rd_parent_b,
  output logic [CN_W-1:0] rd_num_b,

  input  logic [AI_W-1:0] csearch_idx,
  output logic            csearch_found,
  output logic [CI_W-1:0] csearch_cat,

  output logic            vict_found,
  output logic [CI_W-1:0] vict_idx,
  output logic            vict_valid,

  input  cat_op_e         op,
  input  logic [CI_W-1:0] op_idx,
  input  logic [AI_W-1:0] op_parent,     // also the AT index for CAT_INVAL_PAR
  input  logic [AI_W-1:0] op_child,
  input  logic [CN_W-1:0] op_num,

  input  logic            touch_en,
  input  logic [AI_W-1:0] touch_parent,
  input  logic            clear_jb
);

  logic [CAT_ENTRIES-1:0]            valid_q, used_q, jb_q;
  logic [CAT_ENTRIES-1:0][AI_W-1:0]  parent_q, child_q;
  logic [CAT_ENTRIES-1:0][CN_W-1:0]  num_q;

  assign rd_child_a  = child_q[rd_idx_a];
  assign rd_valid_a  = valid_q[rd_idx_a];
  assign rd_valid_b  = valid_q[rd_idx_b];
  assign rd_parent_b = parent_q[rd_idx_b];
  assign rd_num_b    = num_q[rd_idx_b];

  always_comb begin
    csearch_found = 1'b0;
    csearch_cat   = '0;
    for (int e = 0; e < CAT_ENTRIES; e++) begin
      if (!csearch_found && valid_q[e] && child_q[e] == csearch_idx) begin
        csearch_found = 1'b1;
        csearch_cat   = CI_W'(e);
      end
    end
  end

  always_comb begin
    logic found_inv, found_old;
    logic [CI_W-1:0] inv_idx, old_idx;
    found_inv = 1'b0; found_old = 1'b0;
    inv_idx = '0; old_idx = '0;
    for (int e = 0; e < CAT_ENTRIES; e++) begin
      if (!found_inv && !valid_q[e]) begin
        found_inv = 1'b1;
        inv_idx   = CI_W'(e);
      end
      if (!found_old && valid_q[e] && !used_q[e] && !jb_q[e]) begin
        found_old = 1'b1;
        old_idx   = CI_W'(e);
      end
    end
    vict_found = found_inv || found_old;
    vict_idx   = found_inv ? inv_idx : old_idx;
    vict_valid = !found_inv && found_old;
  end

  logic all_used;
  assign all_used = &(used_q | ~valid_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      used_q  <= '0;
      jb_q    <= '0;
      for (int e = 0; e < CAT_ENTRIES; e++) begin
        parent_q[e] <= '0;
        child_q[e]  <= '0;
        num_q[e]    <= '0;
      end
    end else if (clear) begin
      valid_q <= '0;
      used_q  <= '0;
      jb_q    <= '0;
    end else begin
      if (all_used && |valid_q) used_q <= '0;
      if (clear_jb)             jb_q   <= '0;
      if (touch_en) begin
        for (int e = 0; e < CAT_ENTRIES; e++)
          if (valid_q[e] && parent_q[e] == touch_parent) used_q[e] <= 1'b1;
      end
      unique case (op)
        CAT_WRITE: begin
          valid_q[op_idx]  <= 1'b1;
          used_q[op_idx]   <= 1'b0;
          jb_q[op_idx]     <= 1'b1;
          parent_q[op_idx] <= op_parent;
          child_q[op_idx]  <= op_child;
          num_q[op_idx]    <= op_num;
        end
        CAT_INVAL: begin
          valid_q[op_idx] <= 1'b0;
          used_q[op_idx]  <= 1'b0;
          jb_q[op_idx]    <= 1'b0;
        end
        CAT_INVAL_PAR: begin
          for (int e = 0; e < CAT_ENTRIES; e++)
            if (parent_q[e] == op_parent) begin
              valid_q[e] <= 1'b0;
              used_q[e]  <= 1'b0;
              jb_q[e]    <= 1'b0;
            end
        end
        default: ;
      endcase
    end
  end

endmodule
