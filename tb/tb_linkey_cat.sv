// Testbench for linkey_cat. Random writes, single and by-parent
// invalidations, touches and JustBuilt clears drive a 32-entry table; a
// behavioural model predicts both read ports, the child search (lowest valid
// entry with a given child) and the victim choice every cycle.
`include "tb/tb_util.svh"
module tb_linkey_cat;
  import linkey_pkg::*;
  localparam int AT = 8, CAT = 32, NC = 4;
  logic clk = 0, rst_n = 1, clear = 0;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  logic [4:0] rd_idx_a = '0, rd_idx_b = '0, csearch_cat, vict_idx, op_idx = '0;
  logic [2:0] rd_child_a, rd_parent_b, csearch_idx = '0, op_parent = '0, op_child = '0, touch_parent = '0;
  logic rd_valid_a, rd_valid_b, csearch_found, vict_found, vict_valid;
  logic [1:0] rd_num_b, op_num = '0;
  cat_op_e op = CAT_NOP;
  logic touch_en = 0, clear_jb = 0;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(20000)

  linkey_cat #(.AT_ENTRIES(AT), .CAT_ENTRIES(CAT), .NUM_CHILD(NC)) dut (.*);

  bit m_v[CAT], m_u[CAT], m_j[CAT];
  logic [2:0] m_p[CAT], m_c[CAT];
  logic [1:0] m_n[CAT];
  int old_victims = 0, par_invals = 0, epoch = 0;

  task automatic compare();
    bit ef, eo, sf; int ei, eold, si;
    `CHECK(rd_valid_a == m_v[rd_idx_a], "read a valid")
    if (m_v[rd_idx_a]) `CHECK(rd_child_a == m_c[rd_idx_a], "read a child")
    `CHECK(rd_valid_b == m_v[rd_idx_b], "read b valid")
    if (m_v[rd_idx_b]) `CHECK(rd_parent_b == m_p[rd_idx_b] && rd_num_b == m_n[rd_idx_b], "read b parent/num")
    ef = 0; eo = 0; sf = 0; ei = 0; eold = 0; si = 0;
    for (int e = CAT - 1; e >= 0; e--) begin
      if (!m_v[e]) begin ef = 1; ei = e; end
      if (m_v[e] && !m_u[e] && !m_j[e]) begin eo = 1; eold = e; end
      if (m_v[e] && m_c[e] == csearch_idx) begin sf = 1; si = e; end
    end
    `CHECK(csearch_found == sf, "child search found")
    if (sf) `CHECK(csearch_cat == 5'(si), "child search index")
    `CHECK(vict_found == (ef || eo), "victim found")
    if (ef) `CHECK(vict_idx == 5'(ei) && !vict_valid, "victim lowest invalid")
    else if (eo) begin `CHECK(vict_idx == 5'(eold) && vict_valid, "victim lowest unused"); old_victims++; end
  endtask

  task automatic model_edge();
    bit all_used, anyv;
    all_used = 1; anyv = 0;
    for (int e = 0; e < CAT; e++) begin
      if (m_v[e] && !m_u[e]) all_used = 0;
      if (m_v[e]) anyv = 1;
    end
    if (clear) begin
      for (int e = 0; e < CAT; e++) begin m_v[e] = 0; m_u[e] = 0; m_j[e] = 0; end
      return;
    end
    if (all_used && anyv) begin for (int e = 0; e < CAT; e++) m_u[e] = 0; epoch++; end
    if (clear_jb) for (int e = 0; e < CAT; e++) m_j[e] = 0;
    if (touch_en) for (int e = 0; e < CAT; e++) if (m_v[e] && m_p[e] == touch_parent) m_u[e] = 1;
    case (op)
      CAT_WRITE: begin m_v[op_idx] = 1; m_u[op_idx] = 0; m_j[op_idx] = 1;
                       m_p[op_idx] = op_parent; m_c[op_idx] = op_child; m_n[op_idx] = op_num; end
      CAT_INVAL: begin m_v[op_idx] = 0; m_u[op_idx] = 0; m_j[op_idx] = 0; end
      CAT_INVAL_PAR: begin
        par_invals++;
        for (int e = 0; e < CAT; e++) if (m_p[e] == op_parent) begin m_v[e] = 0; m_u[e] = 0; m_j[e] = 0; end
      end
      default: ;
    endcase
  endtask

  initial begin
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int r;
      r = $urandom_range(0, 99);
      op = r < 35 ? CAT_WRITE : r < 40 ? CAT_INVAL : r < 42 ? CAT_INVAL_PAR : CAT_NOP;
      if (cyc >= 2000) op = (r < 3 || (cyc < 2800 && r < 20)) ? CAT_WRITE : CAT_NOP;
      op_idx = 5'($urandom); op_parent = 3'($urandom); op_child = 3'($urandom); op_num = 2'($urandom);
      touch_en = $urandom_range(0, 1); touch_parent = 3'($urandom);
      clear_jb = ($urandom_range(0, 10) == 0);
      clear = (cyc == 3500);
      rd_idx_a = 5'($urandom); rd_idx_b = 5'($urandom); csearch_idx = 3'($urandom);
      #1 compare();
      @(posedge clk); model_edge();
      @(negedge clk);
    end
    $display("victim choices %0d, parent invalidations %0d, epochs %0d", old_victims, par_invals, epoch);
    `CHECK(old_victims > 0 && par_invals > 0 && epoch > 0, "all mechanisms exercised")
    `TB_DONE
  end
endmodule
