// Testbench for linkey_at. Random table-builder operations, touches and
// JustBuilt clears drive a 16-entry table; a behavioural model of the entry
// fields predicts, every cycle, both CAM ports, the base-and-bound vector,
// both read ports and the victim choice (lowest invalid entry, else lowest
// entry with both replacement bits clear that is neither a root nor excluded).
`include "tb/tb_util.svh"
module tb_linkey_at;
  import linkey_pkg::*;
  localparam int AT = 16, CAT = 64, NC = 2;
  logic clk = 0, rst_n = 1, clear = 0;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  naddr_t cam_key_a = '0, cam_key_b = '0;
  logic [AT-1:0] cam_match_a, cam_match_b, bb_match;
  blk_t bb_blk = '0;
  ofs_t node_size = 12'd40;
  logic [3:0] rd_idx_a = '0, rd_idx_b = '0;
  logic rd_valid_a, rd_valid_b;
  naddr_t rd_addr_a, rd_addr_b;
  logic [NC-1:0] rd_cv_a, rd_cv_b;
  logic [NC-1:0][5:0] rd_cidx_a, rd_cidx_b;
  naddr_t [AT-1:0] all_addr;
  logic [AT-1:0] all_valid;
  logic [AT-1:0] root_mask = '0;
  logic excl_en = 0;
  logic [3:0] excl_idx = '0;
  logic vict_found, vict_valid;
  logic [3:0] vict_idx;
  at_op_e op = AT_NOP;
  logic [3:0] op_idx = '0;
  naddr_t op_addr = '0;
  logic op_jb = 0;
  logic op_num = 0;
  logic [5:0] op_cidx = '0;
  logic touch_en = 0, clear_jb = 0;
  logic [3:0] touch_idx = '0;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(20000)

  linkey_at #(.AT_ENTRIES(AT), .CAT_ENTRIES(CAT), .NUM_CHILD(NC)) dut (.*);

  bit m_v[AT], m_u[AT], m_j[AT];
  naddr_t m_a[AT];
  bit m_cv[AT][NC];
  logic [5:0] m_ci[AT][NC];
  int evict_choices = 0, epoch_resets = 0;

  function automatic naddr_t rnd_addr();
    // small address space so that CAM hits and block overlaps happen
    return naddr_t'(45'h100 + $urandom_range(0, 40));
  endfunction

  task automatic compare();
    bit ef, eo; int ei, eold;
    for (int e = 0; e < AT; e++) begin
      va_t s, en;
      s = {m_a[e], 3'b000}; en = s + va_t'(node_size);
      `CHECK(cam_match_a[e] == (m_v[e] && m_a[e] == cam_key_a), "CAM a")
      `CHECK(cam_match_b[e] == (m_v[e] && m_a[e] == cam_key_b), "CAM b")
      `CHECK(bb_match[e] == (m_v[e] && s[47:6] <= bb_blk && bb_blk <= en[47:6]), "base and bound")
    end
    `CHECK(rd_valid_a == m_v[rd_idx_a] && rd_addr_a == m_a[rd_idx_a], "read a")
    `CHECK(rd_valid_b == m_v[rd_idx_b] && rd_addr_b == m_a[rd_idx_b], "read b")
    for (int c = 0; c < NC; c++) begin
      `CHECK(rd_cv_b[c] == m_cv[rd_idx_b][c], "child valid")
      if (m_cv[rd_idx_b][c]) `CHECK(rd_cidx_b[c] == m_ci[rd_idx_b][c], "child index")
    end
    ef = 0; eo = 0; ei = 0; eold = 0;
    for (int e = AT - 1; e >= 0; e--) begin
      if (!m_v[e]) begin ef = 1; ei = e; end
      if (m_v[e] && !m_u[e] && !m_j[e] && !root_mask[e] && !(excl_en && excl_idx == e)) begin eo = 1; eold = e; end
    end
    `CHECK(vict_found == (ef || eo), "victim found")
    if (ef)      `CHECK(vict_idx == ei && !vict_valid, "victim is lowest invalid")
    else if (eo) begin `CHECK(vict_idx == eold && vict_valid, "victim is lowest unused"); evict_choices++; end
  endtask

  task automatic model_edge();
    bit all_used, anyv;
    all_used = 1; anyv = 0;
    for (int e = 0; e < AT; e++) begin
      if (m_v[e] && !m_u[e]) all_used = 0;
      if (m_v[e]) anyv = 1;
    end
    if (clear) begin
      for (int e = 0; e < AT; e++) begin m_v[e] = 0; m_u[e] = 0; m_j[e] = 0; m_cv[e] = '{default:0}; end
      return;
    end
    if (all_used && anyv) begin for (int e = 0; e < AT; e++) m_u[e] = 0; epoch_resets++; end
    if (clear_jb) for (int e = 0; e < AT; e++) m_j[e] = 0;
    if (touch_en && m_v[touch_idx]) m_u[touch_idx] = 1;
    case (op)
      AT_ALLOC: begin m_v[op_idx] = 1; m_a[op_idx] = op_addr; m_u[op_idx] = 0; m_j[op_idx] = op_jb; m_cv[op_idx] = '{default:0}; end
      AT_SET_CHILD: begin m_cv[op_idx][op_num] = 1; m_ci[op_idx][op_num] = op_cidx; end
      AT_CLR_CHILD: m_cv[op_idx][op_num] = 0;
      AT_INVAL: begin m_v[op_idx] = 0; m_u[op_idx] = 0; m_j[op_idx] = 0; m_cv[op_idx] = '{default:0}; end
      default: ;
    endcase
  endtask

  initial begin
    foreach (m_v[e]) begin m_v[e] = 0; m_u[e] = 0; m_j[e] = 0; m_a[e] = '0; end
    foreach (m_cv[e, c]) begin m_cv[e][c] = 0; m_ci[e][c] = 0; end
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int r;
      r = $urandom_range(0, 99);
      if (cyc < 2000) op = r < 40 ? AT_ALLOC : r < 55 ? AT_SET_CHILD : r < 62 ? AT_CLR_CHILD : r < 68 ? AT_INVAL : AT_NOP;
      else            op = (r < 15 && cyc < 2600) || r < 2 ? AT_ALLOC : AT_NOP;   // second phase: table fills up
      op_idx = 4'($urandom); op_addr = rnd_addr(); op_jb = $urandom_range(0, 1);
      op_num = 1'($urandom); op_cidx = 6'($urandom);
      touch_en = $urandom_range(0, 1); touch_idx = 4'($urandom);
      clear_jb = ($urandom_range(0, 30) == 0) || (cyc > 2000 && $urandom_range(0, 3) == 0);
      clear = (cyc == 2000);
      root_mask = AT'($urandom) & AT'($urandom) & AT'($urandom);
      excl_en = $urandom_range(0, 1); excl_idx = 4'($urandom);
      cam_key_a = rnd_addr(); cam_key_b = rnd_addr();
      if ($urandom_range(0, 1)) cam_key_a = m_a[$urandom_range(0, AT - 1)];
      bb_blk = blk_t'((45'h100 + $urandom_range(0, 48)) >> 3);
      rd_idx_a = 4'($urandom); rd_idx_b = 4'($urandom);
      #1 compare();
      @(posedge clk); model_edge();
      @(negedge clk);
    end
    $display("victim choices %0d, epoch resets %0d", evict_choices, epoch_resets);
    `CHECK(evict_choices > 0, "an unused live entry was chosen as victim")
    `CHECK(epoch_resets > 0, "UsedLRU epoch reset happened")
    `TB_DONE
  end
endmodule
