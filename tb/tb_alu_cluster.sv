// Testbench of alu_cluster: random micro-op configurations, history and
// meta values, compared byte by byte with a reference model, plus the
// paper's example (add, $0, $7, $0) accumulating pkt_arv_intv into byte 0.
`include "tb_util.svh"
module tb_alu_cluster;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  fword_t h, o; meta_t m; alu_cfg_t [N_ALU-1:0] c; logic dir; logic [7:0] pidx;
  alu_cluster dut (.hist(h), .meta(m), .cfg(c), .dir, .pkt_idx(pidx), .out(o));

  function automatic logic [7:0] model(int i);
    int a = h[c[i].hsel], b = (c[i].msel < 13) ? m[c[i].msel] : 0, r;
    if (c[i].cond_en && c[i].cond_dir != dir) return h[i];
    case (c[i].op)
      ALU_ADD: r = (a + b > 255) ? 255 : a + b;
      ALU_SUB: r = (a > b) ? a - b : 0;
      ALU_MAX: r = (a > b) ? a : b;
      ALU_MIN: r = (a < b) ? a : b;
      ALU_WR:  r = b;
      ALU_WRI: r = (int'(pidx) == int'(c[i].hsel)) ? b : h[i];
      default: r = h[i];
    endcase
    return 8'(r);
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 16; i++) begin
        h[i] = 8'($urandom); c[i] = alu_cfg_t'($urandom);
        if (c[i].op == 3'd7) c[i].op = ALU_ADD;
      end
      for (int i = 0; i < 13; i++) m[i] = 8'($urandom);
      dir = 1'($urandom); pidx = 8'($urandom % 20);
      #1;
      for (int i = 0; i < 16; i++) `CHECK(o[i] == model(i), $sformatf("alu %0d op %0d", i, c[i].op))
    end
    // the paper's example: flow duration += pkt_arv_intv
    c = '0; h = '0; m = '0;
    c[0] = '{cond_en: 0, cond_dir: 0, op: ALU_ADD, hsel: 0, msel: 7};
    h[0] = 8'd40; m[7] = 8'd25; h[5] = 8'h77;
    #1;
    `CHECK(o[0] == 8'd65, "add $0,$7,$0")
    `CHECK(o[5] == 8'h77, "nop keeps")
    `TB_FINISH
  end
endmodule
