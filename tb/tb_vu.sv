// Testbench of vu (8 units): random vadd and vem operations on 16-element
// vectors, checking result values and that done pulses exactly two cycles
// after start (two passes of eight units).
`include "tb_util.svh"
module tb_vu;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic start, done; vu_op_e op; logic [4:0] shift; fword_t a, b, result;
  vu #(.UNITS(8)) dut (.clk, .rst_n, .start, .op, .shift, .a, .b, .done, .result);

  int n_add = 0, n_em = 0;
  initial begin
    start = 0; op = V_NOP; shift = 0; a = '0; b = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      automatic fword_t e;
      @(negedge clk);
      start = 1; op = ($urandom % 2) ? V_ADD : V_EM; shift = 5'($urandom % 9);
      for (int i = 0; i < 16; i++) begin a[i] = 8'($urandom); b[i] = 8'($urandom); end
      for (int i = 0; i < 16; i++) begin
        automatic int v = (op == V_ADD) ? $signed(a[i]) + $signed(b[i])
                                        : ($signed(a[i]) * $signed(b[i])) >>> shift;
        e[i] = (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
      end
      if (op == V_ADD) n_add++; else n_em++;
      @(negedge clk); start = 0; a = '0; b = '0; op = V_NOP;
      `CHECK(!done, "done not after one cycle")
      @(negedge clk);
      `CHECK(done, "done after two cycles")
      `CHECK(result == e, $sformatf("result %h exp %h", result, e))
      @(negedge clk);
      `CHECK(!done, "done is a pulse")
    end
    `CHECK(n_add > 1000 && n_em > 1000, "both operations")
    `TB_FINISH
  end
endmodule
