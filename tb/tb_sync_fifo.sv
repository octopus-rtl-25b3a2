// Testbench of sync_fifo: random push/pop against a queue model, with
// full/empty flags and first-word-fall-through head checked every cycle.
`include "tb_util.svh"
module tb_sync_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(20000)

  logic push, pop, empty, full;
  logic [15:0] wd, rd;
  logic [3:0] cnt;
  sync_fifo #(.W(16), .DEPTH(8)) dut (.clk, .rst_n, .push, .wr_data(wd), .pop, .rd_data(rd),
    .empty, .full, .count(cnt));

  logic [15:0] q [$];
  int n_full = 0;
  initial begin
    push = 0; pop = 0; wd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      `CHECK(empty == (q.size() == 0), "empty")
      `CHECK(full == (q.size() == 8), "full")
      `CHECK(int'(cnt) == q.size(), "count")
      if (q.size() > 0) `CHECK(rd == q[0], "head")
      if (full) n_full++;
      push = ($urandom % 100) < ((i / 500) % 2 ? 30 : 70) && !full;
      pop  = ($urandom % 2) && !empty;
      wd   = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wd);
    end
    `CHECK(n_full > 0, "reached full")
    `TB_FINISH
  end
endmodule
