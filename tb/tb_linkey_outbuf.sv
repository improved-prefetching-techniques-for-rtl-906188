// Testbench for linkey_outbuf: in-order delivery on two ports, prefix pops of
// 0, 1 or 2 requests per cycle, full flag, count and the duplicate-match port,
// all against a queue model.
`include "tb/tb_util.svh"
module tb_linkey_outbuf;
  import linkey_pkg::*;
  logic clk = 0, rst_n = 1, clear = 0, push = 0;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  pf_req_t push_req = '0;
  logic full, match;
  logic [3:0] count;
  blk_t match_blk = '0;
  logic [1:0] out_valid, out_ready = '0;
  pf_req_t [1:0] out_req;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(5000)

  linkey_outbuf #(.DEPTH(8), .ISSUE_W(2)) dut (.*);

  pf_req_t model[$];
  int popped2 = 0;

  initial begin
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 1500; cyc++) begin
      int npop;
      bit exp_match;
      push     = !full && ($urandom_range(0, 3) != 0);
      push_req = '{blk: blk_t'($urandom_range(0, 15)), obj_ofs: meta_t'($urandom)};
      npop     = $urandom_range(0, 2);
      out_ready = (npop == 0) ? 2'b00 : (npop == 1) ? 2'b01 : 2'b11;
      match_blk = blk_t'($urandom_range(0, 15));
      #1;
      exp_match = 0;
      foreach (model[j]) if (model[j].blk == match_blk) exp_match = 1;
      `CHECK(match == exp_match, "duplicate match")
      `CHECK(count == model.size(), "count")
      `CHECK(full == (model.size() == 8), "full")
      for (int p = 0; p < 2; p++) begin
        `CHECK(out_valid[p] == (model.size() > p), "out_valid")
        if (model.size() > p) `CHECK(out_req[p] == model[p], "out_req order")
      end
      @(posedge clk);
      for (int p = 0; p < npop; p++) if (model.size() != 0) void'(model.pop_front());
      if (npop == 2 && out_valid == 2'b11) popped2++;
      if (push) model.push_back(push_req);
      @(negedge clk);
    end
    `CHECK(popped2 > 0, "two requests left in one cycle")
    clear = 1; @(negedge clk); clear = 0; model.delete();
    `CHECK(count == 0 && !out_valid[0], "clear")
    `TB_DONE
  end
endmodule
