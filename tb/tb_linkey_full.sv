// End-to-end testbench of the linkey top with every parameter at its default
// (256-entry AT, 1024-entry CAT, 8-entry BFQ and output buffer, two issue
// ports): a 1023-node binary search tree, larger than the AT, probed as in
// tb_linkey. At these sizes CAT eviction, skipped insertion and the BFQ are
// not forced, so only AT eviction, linking, relinking, table walks and the
// search events must occur; the prefetch checks are the same. See linkey_env.svh.
`include "tb/tb_util.svh"
module tb_linkey_full;
  import linkey_pkg::*;
  localparam int NNODES = 1023, NLOOKUPS = 120, CACHE_BLKS = 256;
  localparam bit REQUIRE_ALL = 0;
  logic clk = 0, rst_n = 1;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  `TB_COUNTERS
  `TB_WATCHDOG(600000)

  logic cfg_valid, cfg_ready; cfg_op_e cfg_op; logic [1:0] cfg_idx; va_t cfg_data;
  logic core_valid, core_ready; va_t core_addr;
  logic resp_valid, resp_ready, resp_meta_valid; blk_t resp_blk; line_t resp_data; meta_t resp_meta;
  logic [1:0] pf_valid, pf_ready; pf_req_t [1:0] pf_req;
  linkey_events_t events; logic idle;

  linkey dut (.*);

  `include "tb/linkey_env.svh"
endmodule
