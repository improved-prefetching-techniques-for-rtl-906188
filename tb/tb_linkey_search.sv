// Testbench for linkey_search. The testbench plays the Address Table (16
// entries, its CAM answered from the testbench's own copy) and checks the
// root base-and-bound check, the masking of roots out of the CAM result, the
// CAM key Addr - KeyO, root precedence, KeyO on a new traversal, and the
// new-traversal rule (root hit after a different node, or after the marker).
`include "tb/tb_util.svh"
module tb_linkey_search;
  import linkey_pkg::*;
  localparam int AT = 16;
  logic clk = 0, rst_n = 1, clear = 0, req_fire = 0, mark = 0;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  va_t req_addr = '0;
  ofs_t node_size = 12'd40, key_o = 12'd0;
  logic [3:0] root_v = '0;
  logic [3:0][3:0] root_idx = '0;
  logic [AT-1:0] root_mask;
  naddr_t [AT-1:0] at_addr;
  logic [AT-1:0] at_valid;
  naddr_t cam_key;
  logic [AT-1:0] cam_match;
  logic hit, root_hit, new_trav;
  logic [3:0] hit_idx;
  ofs_t keyo_new;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(5000)

  linkey_search #(.AT_ENTRIES(AT), .NUM_ROOTS(4)) dut (.*);

  always_comb begin
    root_mask = '0;
    for (int r = 0; r < 4; r++) if (root_v[r]) root_mask[root_idx[r]] = 1;
    for (int e = 0; e < AT; e++) cam_match[e] = at_valid[e] && at_addr[e] == cam_key;
  end

  // node e lives at byte address 0x10000 + 0x100*e
  function automatic va_t node(int e); return va_t'(48'h10000 + 48'h100 * e); endfunction

  int newtravs = 0;
  task automatic access(va_t a, bit exp_hit, int exp_idx, bit exp_root, bit exp_new, int exp_keyo = 0);
    req_addr = a; req_fire = 1;
    #1;
    `CHECK(cam_key == naddr_t'((a - va_t'(key_o)) >> 3), "CAM key is Addr-KeyO")
    `CHECK(hit == exp_hit, "hit")
    if (exp_hit) `CHECK(hit_idx == 4'(exp_idx), "hit index")
    `CHECK(root_hit == exp_root, "root hit")
    `CHECK(new_trav == exp_new, "new traversal")
    if (exp_new) begin `CHECK(keyo_new == ofs_t'(exp_keyo), "KeyO of new traversal"); newtravs++; end
    @(posedge clk);
    if (new_trav) key_o <= keyo_new;   // as the config register does
    @(negedge clk); req_fire = 0;
  endtask

  initial begin
    for (int e = 0; e < AT; e++) begin at_addr[e] = naddr_t'(node(e) >> 3); at_valid[e] = 1; end
    at_valid[15] = 0;
    @(negedge clk); rst_n = 1;
    root_v = 4'b0011; root_idx[0] = 4'd3; root_idx[1] = 4'd7;
    // root 0 (entry 3) hit at offset 16: first access, new traversal
    access(node(3) + 16, 1, 3, 1, 1, 16);
    // same root again: no new traversal
    access(node(3) + 24, 1, 3, 1, 0);
    // non-root node 5 looked up through KeyO = 16
    access(node(5) + 16, 1, 5, 0, 0);
    // node 5 without the key offset: misses the CAM
    access(node(5), 0, 0, 0, 0);
    // back to the root after another node: new traversal, KeyO := 8
    access(node(3) + 8, 1, 3, 1, 1, 8);
    // the last byte of the node is inside the bound, the next byte is not
    access(node(3) + 39, 1, 3, 1, 0);
    access(node(3) + 40, 0, 0, 0, 0);
    access(node(3) + 40 + 8, 0, 0, 0, 0);
    // root entry 7 is masked out of the CAM; base-and-bound finds it instead
    access(node(7) + 8, 1, 7, 1, 1, 8);
    // a non-root lookup whose address equals a root entry minus KeyO: still a root hit
    access(node(7) + 8, 1, 7, 1, 0);
    // invalid entry 15 is never hit
    access(node(15) + 8, 0, 0, 0, 0);
    // marker forces a new traversal on the same root
    mark = 1; @(negedge clk); mark = 0;
    access(node(7) + 0, 1, 7, 1, 1, 0);
    access(node(7) + 0, 1, 7, 1, 0);
    // invalid root valid bit: entry 3 becomes an ordinary CAM entry
    root_v = 4'b0010;
    access(node(3) + 0, 1, 3, 0, 0);
    `CHECK(newtravs == 4, "four new traversals")
    `TB_DONE
  end
endmodule
