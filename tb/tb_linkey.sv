// End-to-end testbench of the linkey top at reduced table sizes (32-entry
// AT, 16-entry CAT, 2-entry BFQ) so that every mechanism (evictions, skipped insertions, BFQ
// overflow) happens within a short run. See linkey_env.svh for the workload,
// the memory model and the checks.
`include "tb/tb_util.svh"
module tb_linkey;
  import linkey_pkg::*;
  localparam int NNODES = 255, NLOOKUPS = 150, CACHE_BLKS = 128;
  localparam bit REQUIRE_ALL = 1;
  logic clk = 0, rst_n = 1;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  `TB_COUNTERS
  `TB_WATCHDOG(400000)

  logic cfg_valid, cfg_ready; cfg_op_e cfg_op; logic [1:0] cfg_idx; va_t cfg_data;
  logic core_valid, core_ready; va_t core_addr;
  logic resp_valid, resp_ready, resp_meta_valid; blk_t resp_blk; line_t resp_data; meta_t resp_meta;
  logic [1:0] pf_valid, pf_ready; pf_req_t [1:0] pf_req;
  linkey_events_t events; logic idle;

  linkey #(.AT_ENTRIES(32), .CAT_ENTRIES(16), .BFQ_DEPTH(2)) dut (.*);

  `include "tb/linkey_env.svh"
endmodule
