// Testbench of arype (K=4). A memory model with one-cycle read latency
// serves both Mif ports; the read port is refused at random so that MM
// streams contain bubbles. A program of two weight tiles and two MM
// streams with post-increments and FIN is run once, then twice in
// auto-restart mode; every result row, the FIN address, the IRQ flag and
// the performance counters are checked against a reference model.
`include "tb_util.svh"
module tb_arype;
  import octopus_pkg::*;
  localparam int K = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic crf_we, ic_we, pc_we, fin, fin_irq, busy;
  logic [4:0] crf_addr; logic [31:0] crf_wdata, crf_rdata;
  logic [9:0] ic_addr, pc_addr; logic [ARY_IW-1:0] ic_wdata; logic [K*8-1:0] pc_wdata;
  mem_req_t [1:0] mreq; logic [1:0] mgnt; logic [1:0][127:0] mrdata; logic [4:0][31:0] perf;

  arype #(.K(K)) dut (.clk, .rst_n, .crf_we, .crf_addr, .crf_wdata, .crf_rdata, .ic_we, .ic_addr,
    .ic_wdata, .pc_we, .pc_addr, .pc_wdata, .fin, .fin_irq, .busy, .mreq, .mgnt, .mrdata, .perf);

  logic [127:0] mem [1024];
  bit deny;
  always_comb begin
    mgnt[0] = mreq[0].vld;
    mgnt[1] = mreq[1].vld && !deny;
  end
  always @(posedge clk) begin
    deny <= ($urandom % 3 == 0);
    if (mreq[1].vld && mgnt[1]) mrdata[1] <= mem[mreq[1].addr[9:0]];
    if (mreq[0].vld) begin
      mem[mreq[0].addr[9:0]] <= mreq[0].wdata;
      if (mreq[0].addr[15:14] != 0) begin failures++; $display("FAIL write outside bank 0"); end
    end
  end
  assign mrdata[0] = '0;

  int n_fin = 0; logic [15:0] last_fin;
  always @(posedge clk) if (fin) begin n_fin++; last_fin <= dut.fin_addr; end

  task automatic crf(input int a, input int v);
    @(negedge clk); crf_we = 1; crf_addr = 5'(a); crf_wdata = 32'(v);
    @(negedge clk); crf_we = 0;
  endtask
  task automatic instr(input int a, input ary_instr_t i);
    @(negedge clk); ic_we = 1; ic_addr = 10'(a); ic_wdata = i;
    @(negedge clk); ic_we = 0;
  endtask

  logic [7:0] W [2][K][K];
  function automatic logic [127:0] ref_row(int t, logic [127:0] xr, int sh, bit relu);
    logic [127:0] o = '0;
    for (int r = 0; r < K; r++) begin
      automatic int s = 0;
      for (int c = 0; c < K; c++) s += $signed(xr[8*c +: 8]) * $signed(W[t][c][r]);
      s = s >>> sh;
      if (relu && s < 0) s = 0;
      o[8*r +: 8] = (s > 127) ? 8'h7F : (s < -128) ? 8'h80 : 8'(s);
    end
    return o;
  endfunction

  task automatic check_results(input string tag);
    for (int i = 0; i < 10; i++)
      `CHECK(mem[10'h200 + i] == ref_row(0, mem[10'h100 + i], 4, 1), $sformatf("%s tile0 row %0d", tag, i))
    for (int i = 0; i < 7; i++)
      `CHECK(mem[10'h20A + i] == ref_row(1, mem[10'h100 + i], 4, 1), $sformatf("%s tile1 row %0d", tag, i))
    `CHECK(last_fin == 16'h0211, $sformatf("%s fin address %h", tag, last_fin))
  endtask

  initial begin
    crf_we = 0; crf_addr = 0; crf_wdata = 0; ic_we = 0; ic_addr = 0; ic_wdata = 0;
    pc_we = 0; pc_addr = 0; pc_wdata = 0;
    for (int i = 0; i < 1024; i++) mem[i] = '0;
    for (int i = 0; i < 16; i++) mem[10'h100 + i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2; t++)
      for (int c = 0; c < K; c++) begin
        for (int r = 0; r < K; r++) W[t][c][r] = 8'($urandom);
        @(negedge clk); pc_we = 1; pc_addr = 10'(t * K + c);
        for (int r = 0; r < K; r++) pc_wdata[8*r +: 8] = W[t][c][r];
      end
    @(negedge clk); pc_we = 0;
    instr(0, '{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0});
    instr(1, '{A_MM, 12'd10, 3'd1, 3'd2, 1'b0, 1'b1});
    instr(2, '{A_LD, 12'd0, 3'd0, 3'd0, 1'b0, 1'b0});
    instr(3, '{A_NOP, 12'd0, 3'd0, 3'd0, 1'b0, 1'b0});
    instr(4, '{A_MM, 12'd7, 3'd1, 3'd2, 1'b1, 1'b1});
    instr(5, '{A_FIN, 12'd0, 3'd2, 3'd0, 1'b0, 1'b0});
    crf(2, 0); crf(4, (1 << 8) | 4);
    crf(8, 0); crf(9, 16'h100); crf(10, 16'h200);
    // single run
    crf(0, 1);
    wait (n_fin == 1); @(negedge clk); @(negedge clk);
    `CHECK(!busy, "idle after FIN")
    @(negedge clk); crf_addr = 1; #1;
    `CHECK(crf_rdata[1] && fin_irq && crf_rdata[31:16] == 16'h0211, "STATUS fin flag and address")
    check_results("run1");
    `CHECK(perf[0] == 2 && perf[1] == 2 && perf[2] == 17 && perf[4] == 1, "perf counters")
    `CHECK(perf[3] > 0, $sformatf("read bubbles %0d", perf[3]))
    crf(1, 2);
    @(negedge clk); crf_addr = 1; #1;
    `CHECK(!crf_rdata[1] && !fin_irq, "fin flag cleared")
    // auto-restart: new input data, two passes, then stop
    for (int i = 0; i < 16; i++) mem[10'h100 + i] = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 32; i++) mem[10'h200 + i] = '0;
    crf(0, 3);
    wait (n_fin == 2);
    check_results("auto1");
    @(negedge clk); crf(0, 0);
    wait (n_fin == 3); @(negedge clk); @(negedge clk);
    `CHECK(!busy, "stopped after auto mode cleared")
    check_results("auto2");
    `CHECK(perf[4] == 3, "three FINs")
    `TB_FINISH
  end
endmodule
