// Testbench of tdp_ram: random traffic on both ports against an array
// model, checking one-cycle read latency and read-before-write.
`include "tb_util.svh"
module tb_tdp_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(20000)

  logic a_en, a_we, b_en, b_we;
  logic [5:0] a_addr, b_addr;
  logic [31:0] a_wd, b_wd, a_rd, b_rd;
  tdp_ram #(.W(32), .DEPTH(64)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata(a_wd), .a_rdata(a_rd),
    .b_en, .b_we, .b_addr, .b_wdata(b_wd), .b_rdata(b_rd));

  logic [31:0] m [64];
  logic [31:0] ea, eb;
  logic va, vb;
  initial begin
    a_en = 1; a_we = 1; b_en = 0; b_we = 0;
    for (int i = 0; i < 64; i++) begin
      a_addr = 6'(i); a_wd = 32'(i * 7); m[i] = 32'(i * 7);
      @(posedge clk); #1;
    end
    for (int n = 0; n < 2000; n++) begin
      a_en = $urandom % 2; a_we = $urandom % 2; a_addr = 6'($urandom); a_wd = $urandom;
      b_en = $urandom % 2; b_we = $urandom % 2; b_addr = 6'($urandom); b_wd = $urandom;
      if (a_addr == b_addr) b_we = 0;
      va = a_en; vb = b_en;
      ea = m[a_addr]; eb = m[b_addr];
      @(posedge clk); #1;
      if (a_en && a_we) m[a_addr] = a_wd;
      if (b_en && b_we) m[b_addr] = b_wd;
      if (va) `CHECK(a_rd == ea, "port A read")
      if (vb) `CHECK(b_rd == eb, "port B read")
    end
    `TB_FINISH
  end
endmodule
