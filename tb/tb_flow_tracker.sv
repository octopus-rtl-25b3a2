// Testbench of flow_tracker (16-entry table): new/hit detection, packet
// counting, last-timestamp return, threshold push and freezing, packets of
// a frozen flow, FIFO-full retry, release after FIN, and the reset sweep.
`include "tb_util.svh"
module tb_flow_tracker;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic init_busy, lk_vld, st_vld, st_new, st_frozen, st_reach, commit, fifo_ok, push, rel_vld;
  logic [3:0] lk_addr, rel_addr;
  logic [31:0] lk_ts, st_last_ts;
  logic [7:0] st_pkt_idx, thresh;
  flow_tracker #(.AW(4)) dut (.clk, .rst_n, .init_busy, .thresh, .lk_vld, .lk_addr, .lk_ts,
    .lk_mac(48'h1234), .st_vld, .st_new, .st_frozen, .st_last_ts, .st_pkt_idx, .st_reach,
    .commit, .fifo_ok, .push, .rel_vld, .rel_addr);

  // model
  int cnt [16]; int lts [16]; bit frz [16];

  task automatic pkt(input int a, input int ts, input bit ok);
    bit e_new = (cnt[a] == 0), e_frz = frz[a] && cnt[a] != 0;
    bit e_reach = !e_frz && (cnt[a] + 1 >= thresh);
    @(negedge clk); lk_vld = 1; lk_addr = 4'(a); lk_ts = 32'(ts);
    @(negedge clk); lk_vld = 0;
    `CHECK(st_vld, "st_vld")
    `CHECK(st_new == e_new, $sformatf("new a=%0d", a))
    `CHECK(st_frozen == e_frz, "frozen")
    `CHECK(int'(st_pkt_idx) == cnt[a], "pkt idx")
    if (!e_new) `CHECK(int'(st_last_ts) == lts[a], "last ts")
    `CHECK(st_reach == e_reach, "reach")
    commit = 1; fifo_ok = ok; #1;
    `CHECK(push == (e_reach && ok), "push")
    @(negedge clk); commit = 0;
    if (!e_frz) begin
      cnt[a] = cnt[a] + 1; lts[a] = ts; frz[a] = e_reach && ok;
    end
  endtask

  int n_push = 0;
  initial begin
    lk_vld = 0; commit = 0; rel_vld = 0; fifo_ok = 1; thresh = 3; lk_addr = 0; lk_ts = 0; rel_addr = 0;
    for (int i = 0; i < 16; i++) begin cnt[i] = 0; lts[i] = 0; frz[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    `CHECK(init_busy, "sweep running")
    repeat (20) @(posedge clk);
    `CHECK(!init_busy, "sweep done")
    for (int n = 0; n < 400; n++) begin
      automatic int a = $urandom % 4;
      pkt(a, n * 10, ($urandom % 4) != 0);
      if ($urandom % 5 == 0) begin
        automatic int r = $urandom % 4;
        if (frz[r]) begin
          @(negedge clk); rel_vld = 1; rel_addr = 4'(r);
          @(negedge clk); rel_vld = 0;
          cnt[r] = 0; frz[r] = 0;
        end
      end
    end
    `TB_FINISH
  end
endmodule
