// Testbench of simd_lane: random data, weights, shift, ReLU and mode every
// cycle (with gaps), compared two cycles later against a reference of the
// eight-wide (prd) and dual four-wide (prds) products.
`include "tb_util.svh"
module tb_simd_lane;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic vld, split, relu, out_vld; logic [4:0] shift;
  logic [7:0][7:0] d, w; logic [7:0] y0, y1;
  simd_lane dut (.clk, .rst_n, .vld, .split, .relu, .shift, .d, .w, .out_vld, .y0, .y1);

  typedef struct { logic [7:0] y0, y1; } res_t;
  res_t q [$];
  int n_prd = 0, n_prds = 0, n_sat = 0;

  function automatic logic [7:0] act(int s, int sh, bit r);
    int v = s >>> sh;
    if (r && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_vld) begin
      if (q.size() == 0) begin failures++; $display("FAIL unexpected out_vld"); end
      else begin
        automatic res_t e = q.pop_front();
        checks++;
        if (y0 !== e.y0 || y1 !== e.y1) begin
          failures++; $display("FAIL y0 %h y1 %h exp %h %h", y0, y1, e.y0, e.y1);
        end
      end
    end
  end

  initial begin
    vld = 0; split = 0; relu = 0; shift = 0; d = '0; w = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      vld = 1'($urandom % 4 != 0); split = 1'($urandom); relu = 1'($urandom);
      shift = 5'($urandom % 12);
      for (int i = 0; i < 8; i++) begin d[i] = 8'($urandom); w[i] = 8'($urandom); end
      if (n % 7 == 0) for (int i = 0; i < 8; i++) begin d[i] = 8'h80; w[i] = 8'h80; end
      if (vld) begin
        automatic int s0 = 0, s1 = 0; automatic res_t e;
        for (int i = 0; i < 4; i++) s0 += $signed(d[i]) * $signed(w[i]);
        for (int i = 4; i < 8; i++) s1 += $signed(d[i]) * $signed(w[i]);
        if (split) begin e.y0 = act(s0, shift, relu); e.y1 = act(s1, shift, relu); n_prds++; end
        else begin e.y0 = act(s0 + s1, shift, relu); e.y1 = 0; n_prd++; end
        if (e.y0 == 8'h7F) n_sat++;
        q.push_back(e);
      end
    end
    @(negedge clk); vld = 0;
    repeat (4) @(posedge clk);
    `CHECK(q.size() == 0, "all results returned")
    `CHECK(n_prd > 1000 && n_prds > 1000 && n_sat > 100, "modes and saturation exercised")
    `TB_FINISH
  end
endmodule
