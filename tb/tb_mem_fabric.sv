// Testbench of mem_fabric (64-word feature memory and banks). Five masters
// issue random reads and writes every cycle; a reference model predicts the
// fixed-priority grants and the read data of every granted read. VPE masters
// use bank words 0..15 and AryPE/control masters words 16..31 during random
// traffic (so that no two ports of one RAM touch the same word in a cycle);
// a final sweep lets every master read every word, checking that data
// written through one port is visible through all others.
`include "tb_util.svh"
module tb_mem_fabric;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic fe_en, fe_we; logic [5:0] fe_addr; logic [127:0] fe_wdata, fe_rdata;
  mem_req_t [4:0] req; logic [4:0] gnt; logic [4:0][127:0] rdata;
  mem_fabric #(.FDEPTH(64), .CDEPTH(64)) dut (.clk, .rst_n, .fe_en, .fe_we, .fe_addr,
    .fe_wdata, .fe_rdata, .req, .gnt, .rdata);

  logic [127:0] mdl [3][64];   // bank0, bank1, feature
  function automatic int rgn(logic [15:0] a);
    return a[15] ? 2 : int'(a[14]);
  endfunction
  function automatic logic [15:0] mk_addr(int r, int w);
    return (r == 2) ? 16'(16'h8000 + w) : 16'((r << 14) + w);
  endfunction

  logic [4:0] exp_gnt; bit pend_rd [5]; logic [127:0] pend_d [5];
  bit fe_pend; logic [127:0] fe_exp;
  int n_conflict = 0;

  task automatic model_cycle();
    bit busy [5];
    for (int t = 0; t < 5; t++) busy[t] = 0;
    exp_gnt = '0;
    for (int m = 0; m < 5; m++) if (req[m].vld) begin
      automatic int r = rgn(req[m].addr), t;
      t = (r == 2) ? 4 : ((m < 2) ? r : 2 + r);
      if (!busy[t]) begin busy[t] = 1; exp_gnt[m] = 1; end else n_conflict++;
    end
  endtask

  initial begin
    fe_en = 0; fe_we = 0; fe_addr = 0; fe_wdata = 0; req = '0;
    for (int r = 0; r < 3; r++) for (int w = 0; w < 64; w++) mdl[r][w] = '0;
    for (int m = 0; m < 5; m++) pend_rd[m] = 0;
    fe_pend = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // zero all memories through the fabric
    for (int r = 0; r < 3; r++) for (int w = 0; w < 64; w++) begin
      @(negedge clk); req = '0; req[4] = '{1'b1, 1'b1, mk_addr(r, w), 128'(0)};
      if (r == 2 && w >= 32) begin req[4] = '0; fe_en = 1; fe_we = 1; fe_addr = 6'(w); fe_wdata = 0; end
    end
    @(negedge clk); req = '0; fe_en = 0; fe_we = 0;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // check read data from the previous cycle
      for (int m = 0; m < 5; m++) if (pend_rd[m])
        `CHECK(rdata[m] == pend_d[m], $sformatf("rdata m%0d %h exp %h", m, rdata[m], pend_d[m]))
      if (fe_pend) `CHECK(fe_rdata == fe_exp, "fe_rdata")
      // new requests
      for (int m = 0; m < 5; m++) begin
        automatic int r = $urandom % 3, w = (m < 2) ? $urandom % 16 : 16 + $urandom % 16;
        req[m] = '{1'($urandom % 3 != 0), 1'($urandom), mk_addr(r, w), {$urandom, $urandom, $urandom, $urandom}};
      end
      fe_en = 1'($urandom); fe_we = 1'($urandom); fe_addr = 6'(32 + $urandom % 32);
      fe_wdata = {$urandom, $urandom, $urandom, $urandom};
      #1;
      model_cycle();
      `CHECK(gnt == exp_gnt, $sformatf("gnt %b exp %b", gnt, exp_gnt))
      for (int m = 0; m < 5; m++) begin
        automatic int r = rgn(req[m].addr), w = int'(req[m].addr[5:0]);
        pend_rd[m] = exp_gnt[m] && !req[m].we;
        pend_d[m]  = mdl[r][w];
        if (exp_gnt[m] && req[m].we) mdl[r][w] = req[m].wdata;
      end
      fe_pend = fe_en && !fe_we; fe_exp = mdl[2][fe_addr];
      if (fe_en && fe_we) mdl[2][fe_addr] = fe_wdata;
    end
    @(negedge clk);
    req = '0; fe_en = 0;
    for (int m = 0; m < 5; m++) if (pend_rd[m]) `CHECK(rdata[m] == pend_d[m], "last rdata")
    // sweep: every master reads every word
    for (int m = 0; m < 5; m++)
      for (int r = 0; r < 3; r++)
        for (int w = 0; w < 64; w++) begin
          @(negedge clk); req = '0; req[m] = '{1'b1, 1'b0, mk_addr(r, w), 128'(0)};
          #1 `CHECK(gnt[m], "sweep grant")
          @(negedge clk); req = '0;
          `CHECK(rdata[m] == mdl[r][w], $sformatf("sweep m%0d r%0d w%0d", m, r, w))
        end
    `CHECK(n_conflict > 1000, "arbitration conflicts exercised")
    `TB_FINISH
  end
endmodule
