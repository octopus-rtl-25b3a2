// Testbench of payload_reg: captures payload slices of several lengths and
// offsets and checks every byte against the payload pattern, including the
// zero padding past cfg_len and past the end of the payload.
`include "tb_util.svh"
`include "tb_pkt_lib.svh"
module tb_payload_reg;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  pkt_t p; logic load; logic [7:0] po; logic [15:0] pl; logic [4:0] cl; fword_t q;
  payload_reg dut (.clk, .rst_n, .load, .pkt(p), .pay_off(po), .pay_len(pl), .cfg_len(cl), .q);

  initial begin
    load = 0; p = '0; po = 0; pl = 0; cl = 0;
    @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int opt = n % 3, off, plen;
      automatic logic [7:0] seed = 8'($urandom);
      plen = $urandom % 24;
      off  = 14 + 4 * (5 + opt) + 20;
      @(negedge clk);
      p  = mk_pkt(1, 2, 3, 4, 6, 0, opt, 16'(off + plen), 0, 0, seed);
      po = 8'(off); pl = 16'(plen); cl = 5'($urandom % 17); load = 1;
      @(negedge clk); load = 0;
      for (int i = 0; i < 16; i++)
        `CHECK(q[i] == ((i < cl && i < plen) ? 8'(seed + i) : 8'd0), $sformatf("byte %0d", i))
      @(negedge clk);
      `CHECK(q[0] == ((0 < cl && 0 < plen) ? seed : 8'd0), "hold")
    end
    `TB_FINISH
  end
endmodule
