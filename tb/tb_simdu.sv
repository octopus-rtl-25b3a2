// Testbench of simdu (8 lanes): random data vectors and 8x64-bit parameter
// blocks in prd and prds modes, checked against a reference for the output
// byte placement (prd: byte j = lane j; prds: bytes j and 8+j = the two
// four-wide products of lane j).
`include "tb_util.svh"
module tb_simdu;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  logic vld, split, relu, out_vld; logic [4:0] shift;
  logic [7:0][7:0] data; logic [7:0][63:0] param; fword_t result;
  simdu #(.LANES(8)) dut (.clk, .rst_n, .vld, .split, .relu, .shift, .data, .param, .out_vld, .result);

  fword_t q [$];
  function automatic logic [7:0] act(int s, int sh, bit r);
    int v = s >>> sh;
    if (r && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  always @(posedge clk) if (rst_n && out_vld) begin
    if (q.size() == 0) begin failures++; $display("FAIL unexpected out_vld"); end
    else begin
      automatic fword_t e = q.pop_front();
      checks++;
      if (result !== e) begin failures++; $display("FAIL result %h exp %h", result, e); end
    end
  end

  initial begin
    vld = 0; split = 0; relu = 0; shift = 0; data = '0; param = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      vld = 1'($urandom % 3 != 0); split = 1'($urandom); relu = 1'($urandom); shift = 5'($urandom % 10);
      for (int i = 0; i < 8; i++) data[i] = 8'($urandom);
      for (int j = 0; j < 8; j++) param[j] = {$urandom, $urandom};
      if (vld) begin
        automatic fword_t e = '0;
        for (int j = 0; j < 8; j++) begin
          automatic int s0 = 0, s1 = 0;
          for (int i = 0; i < 4; i++) s0 += $signed(data[i]) * $signed(param[j][8*i +: 8]);
          for (int i = 4; i < 8; i++) s1 += $signed(data[i]) * $signed(param[j][8*i +: 8]);
          if (split) begin e[j] = act(s0, shift, relu); e[8 + j] = act(s1, shift, relu); end
          else e[j] = act(s0 + s1, shift, relu);
        end
        q.push_back(e);
      end
    end
    @(negedge clk); vld = 0;
    repeat (4) @(posedge clk);
    `CHECK(q.size() == 0, "all results returned")
    `TB_FINISH
  end
endmodule
