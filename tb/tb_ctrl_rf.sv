// Testbench of ctrl_rf: random register writes and reads against a model,
// the start pulse, STATUS busy/FIN flag with write-1-to-clear, the result
// address and the FIN counter.
`include "tb_util.svh"
module tb_ctrl_rf;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic we, start, auto_mode, relu, busy, fin, fin_flag;
  logic [4:0] addr, shift; logic [31:0] wdata, rdata;
  logic [15:0] start_pc, pbase, fin_addr; logic [7:0][15:0] adrf_init;
  ctrl_rf dut (.clk, .rst_n, .we, .addr, .wdata, .rdata, .start, .auto_mode, .start_pc, .pbase,
    .shift, .relu, .adrf_init, .busy, .fin, .fin_addr, .fin_flag);

  logic m_auto, m_relu, m_flag; logic [4:0] m_shift; logic [15:0] m_pc, m_pb, m_res;
  logic [15:0] m_adrf [8]; int m_cnt;

  function automatic logic [31:0] expect_rd(logic [4:0] a);
    case (a)
      0: return {30'd0, m_auto, 1'b0};
      1: return {m_res, 14'd0, m_flag, busy};
      2: return {16'd0, m_pc};
      3: return {16'd0, m_pb};
      4: return {23'd0, m_relu, 3'd0, m_shift};
      5: return 32'(m_cnt);
      default: return (a[4:3] == 2'b01) ? {16'd0, m_adrf[a[2:0]]} : 32'd0;
    endcase
  endfunction

  initial begin
    we = 0; addr = 0; wdata = 0; busy = 0; fin = 0; fin_addr = 0;
    m_auto = 0; m_relu = 0; m_flag = 0; m_shift = 0; m_pc = 0; m_pb = 0; m_res = 0; m_cnt = 0;
    for (int i = 0; i < 8; i++) m_adrf[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // outputs reflect the model
      `CHECK(auto_mode == m_auto && relu == m_relu && shift == m_shift && start_pc == m_pc &&
             pbase == m_pb && fin_flag == m_flag, "register outputs")
      for (int i = 0; i < 8; i++) `CHECK(adrf_init[i] == m_adrf[i], "adrf_init")
      we = 1'($urandom % 3 == 0); addr = 5'($urandom % 17); wdata = $urandom;
      busy = 1'($urandom); fin = 1'($urandom % 10 == 0); fin_addr = 16'($urandom);
      #1 `CHECK(rdata == expect_rd(addr), $sformatf("read %0d: %h exp %h", addr, rdata, expect_rd(addr)))
      @(posedge clk); #1;
      `CHECK(start == (we && addr == 0 && wdata[0]), "start pulse")
      if (we) case (addr)
        0: m_auto = wdata[1];
        1: if (wdata[1]) m_flag = 0;
        2: m_pc = wdata[15:0];
        3: m_pb = wdata[15:0];
        4: begin m_shift = wdata[4:0]; m_relu = wdata[8]; end
        default: if (addr[4:3] == 2'b01) m_adrf[addr[2:0]] = wdata[15:0];
      endcase
      if (fin) begin m_flag = 1; m_res = fin_addr; m_cnt++; end
    end
    `CHECK(m_cnt > 100, "FIN events exercised")
    `TB_FINISH
  end
endmodule
