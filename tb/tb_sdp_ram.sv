// Testbench of sdp_ram: writes then reads random words; checks one-cycle
// read latency and that the output holds while rd_en is low.
`include "tb_util.svh"
module tb_sdp_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(20000)

  logic we, rd_en;
  logic [6:0] waddr, raddr;
  logic [37:0] wdata, rdata;
  sdp_ram #(.W(38), .DEPTH(128)) dut (.clk, .we, .waddr, .wdata, .rd_en, .raddr, .rdata);

  logic [37:0] m [128];
  logic [37:0] last;
  initial begin
    we = 0; rd_en = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = {6'($urandom), $urandom}; m[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      rd_en = (n == 0) ? 1 : $urandom % 2; raddr = 7'($urandom);
      if (rd_en) last = m[raddr];
      @(posedge clk); #1;
      `CHECK(rdata == last, "read data")
    end
    `TB_FINISH
  end
endmodule
