// Testbench for linkey_config: every lds.* instruction, the set-root
// handshake with a stand-in table builder, the ChildOs limit, KeyO writes,
// the root mask and lds.reset.
`include "tb/tb_util.svh"
module tb_linkey_config;
  import linkey_pkg::*;
  localparam int AT = 16;
  logic clk = 0, rst_n = 1;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  logic cfg_valid = 0, cfg_ready;
  cfg_op_e cfg_op = CFG_RESET;
  logic [1:0] cfg_idx = '0;
  va_t cfg_data = '0;
  logic root_req, root_done = 0, root_ok = 0;
  va_t root_req_addr;
  logic [3:0] root_at_idx = '0;
  logic keyo_we = 0;
  ofs_t keyo_wdata = '0;
  ofs_t node_size, key_o;
  ofs_t [7:0] child_os;
  logic [3:0] num_child;
  logic [3:0] root_v;
  logic [3:0][3:0] root_idx;
  logic [AT-1:0] root_mask;
  logic table_clear, new_trav_mark;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(3000)

  linkey_config #(.AT_ENTRIES(AT), .NUM_CHILD(8), .NUM_ROOTS(4)) dut (.*);

  task automatic issue(cfg_op_e op, logic [1:0] idx, va_t d);
    cfg_valid = 1; cfg_op = op; cfg_idx = idx; cfg_data = d;
    do @(posedge clk); while (!cfg_ready);
    #1 cfg_valid = 0;
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);   // set_root completes later
  endtask

  // stand-in builder: answers a root request 3 cycles later with an index
  // derived from the address
  initial begin
    forever begin
      @(posedge clk);
      if (root_req) begin
        repeat (3) @(posedge clk);
        #1 root_done = 1; root_ok = 1; root_at_idx = 4'(root_req_addr[6:3]);
        @(posedge clk); #1 root_done = 0;
      end
    end
  end

  logic saw_clear = 0, saw_mark = 0;
  always @(posedge clk) begin
    if (table_clear) saw_clear <= 1;
    if (new_trav_mark) saw_mark <= 1;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    issue(CFG_SET_SIZE, 0, va_t'(48));
    `CHECK(node_size == 48, "set_size")
    for (int i = 0; i < 10; i++) issue(CFG_ADD_OFFSET, 0, va_t'(8 * i + 8));
    `CHECK(num_child == 8, "child count saturates at 8")
    for (int i = 0; i < 8; i++) `CHECK(child_os[i] == ofs_t'(8 * i + 8), "child offset value")
    issue(CFG_SET_ROOT, 2, va_t'(48'h1000_0028));
    `CHECK(root_v == 4'b0100 && root_idx[2] == 4'd5, "set_root 2")
    `CHECK(root_mask == 16'h0020, "root mask")
    issue(CFG_SET_ROOT, 0, va_t'(48'h1000_0018));
    `CHECK(root_v == 4'b0101 && root_idx[0] == 4'd3, "set_root 0")
    `CHECK(root_mask == 16'h0028, "root mask 2")
    keyo_we = 1; keyo_wdata = 12'd24; @(negedge clk); keyo_we = 0;
    `CHECK(key_o == 24, "KeyO write")
    issue(CFG_NEW_TRAV, 0, '0);
    `CHECK(saw_mark, "new traversal marker pulse")
    issue(CFG_CLEAR_ROOTS, 0, '0);
    `CHECK(root_v == 0 && root_mask == 0, "clear_roots")
    issue(CFG_RESET, 0, '0);
    `CHECK(saw_clear, "reset pulses table_clear")
    `CHECK(node_size == 0 && num_child == 0 && key_o == 0, "reset clears registers")
    `TB_DONE
  end
endmodule
