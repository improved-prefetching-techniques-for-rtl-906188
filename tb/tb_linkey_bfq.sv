// Testbench for linkey_bfq: FIFO order, full/empty flags, overflow drop,
// push and pop in the same cycle, and clear.
`include "tb/tb_util.svh"
module tb_linkey_bfq;
  import linkey_pkg::*;
  logic clk = 0, rst_n = 1, clear = 0, push = 0, pop = 0;
  // a real falling edge resets the design before the first clock edge
  initial #1 rst_n = 0;
  naddr_t push_addr = '0, head;
  logic empty, full, dropped;
  `TB_COUNTERS
  always #5 clk = ~clk;
  `TB_WATCHDOG(2000)

  linkey_bfq #(.DEPTH(8)) dut (.*);

  naddr_t model[$];
  int drops = 0;
  // reference model updated at each edge
  always @(posedge clk) if (rst_n) begin
    if (clear) model.delete();
    else begin
      if (pop && model.size() != 0) void'(model.pop_front());
      if (push) begin
        if (model.size() < 8) model.push_back(push_addr);
        else drops++;
      end
    end
  end

  task automatic step(bit pu, naddr_t a, bit po);
    push = pu; push_addr = a; pop = po;
    @(negedge clk);
    `CHECK(empty == (model.size() == 0), "empty flag")
    `CHECK(full == (model.size() == 8), "full flag")
    if (model.size() != 0) `CHECK(head == model[0], "head value")
  endtask

  initial begin
    @(negedge clk); rst_n = 1;
    `CHECK(empty && !full, "empty after reset")
    for (int i = 0; i < 10; i++) begin
      push = 1; push_addr = naddr_t'(100 + i); pop = 0;
      #1 if (i >= 8) `CHECK(dropped, "drop when full")
      else `CHECK(!dropped, "no drop when room");
      @(negedge clk);
    end
    push = 0;
    `CHECK(full && head == naddr_t'(100), "full, oldest at head")
    // push and pop together on a full queue
    step(1, naddr_t'(555), 1);
    `CHECK(head == naddr_t'(101), "pop advanced while pushing")
    for (int i = 0; i < 300; i++) step($urandom_range(0,1), naddr_t'($urandom), $urandom_range(0,1) && !empty);
    while (!empty) step(0, '0, 1);
    `CHECK(empty, "drained")
    step(1, naddr_t'(7), 0);
    clear = 1; @(negedge clk); clear = 0;
    `CHECK(empty, "clear empties")
    `TB_DONE
  end
endmodule
