// Binary-tree benchmarks at the default parameters on a 1023-node tree (ten
// full levels): bintree_dfs and bintree_bfs (two summing traversals each) and
// bintree_probe_uni / bintree_probe_zipf (1000 searches of a balanced binary
// search tree with uniform or Zipf-like keys). See linkey_wl_env.svh.
`include "tb/tb_util.svh"
module tb_wl_bintree;
  import linkey_pkg::*;
  localparam int CACHE_BLKS = 768;     // 48 KiB of 64-byte blocks
  logic clk = 0, rst_n = 1;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  `TB_COUNTERS
  `TB_WATCHDOG(6000000)

  logic cfg_valid, cfg_ready; cfg_op_e cfg_op; logic [1:0] cfg_idx; va_t cfg_data;
  logic core_valid, core_ready; va_t core_addr;
  logic resp_valid, resp_ready, resp_meta_valid; blk_t resp_blk; line_t resp_data; meta_t resp_meta;
  logic [1:0] pf_valid, pf_ready; pf_req_t [1:0] pf_req;
  linkey_events_t events; logic idle;

  linkey dut (.*);

  `include "tb/linkey_wl_env.svh"

  initial begin
    start_env();
    compare("bintree_dfs");
    compare("bintree_bfs");
    compare("bintree_probe_uni");
    compare("bintree_probe_zipf");
    finish_env();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
