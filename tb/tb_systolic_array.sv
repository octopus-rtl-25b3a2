// Testbench of systolic_array (K=8, and the paper's K=16 through a second
// instance). Random weight tiles are shifted in, random input rows stream
// with random bubbles, and every output row is compared with the reference
// product y[r] = sum_c x[c]*W[c][r]; the latency from in_vld to out_vld
// must be 2K-1 cycles.
`include "tb_util.svh"
module tb_systolic_array;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(200000)

  localparam int KA = 8, KB = 16;

  logic ws_a, iv_a, ov_a; logic [KA-1:0][7:0] w_a, x_a; logic [KA-1:0][31:0] y_a;
  logic ws_b, iv_b, ov_b; logic [KB-1:0][7:0] w_b, x_b; logic [KB-1:0][31:0] y_b;
  systolic_array #(.K(KA)) dut_a (.clk, .rst_n, .w_shift(ws_a), .w_in(w_a), .in_vld(iv_a), .x(x_a),
    .out_vld(ov_a), .y(y_a));
  systolic_array dut_b (.clk, .rst_n, .w_shift(ws_b), .w_in(w_b), .in_vld(iv_b), .x(x_b),
    .out_vld(ov_b), .y(y_b));

  // array A checker
  logic [31:0] qa [$][KA]; int ta [$];
  logic [31:0] qb [$][KB]; int tb_ [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && ov_a) begin
    checks++;
    if (qa.size() == 0) begin failures++; $display("FAIL A unexpected"); end
    else begin
      for (int r = 0; r < KA; r++) if (y_a[r] !== qa[0][r]) begin
        failures++; $display("FAIL A y[%0d] %h exp %h", r, y_a[r], qa[0][r]); break;
      end
      if (cyc - ta[0] != 2 * KA - 1) begin failures++; $display("FAIL A latency %0d", cyc - ta[0]); end
      void'(qa.pop_front()); void'(ta.pop_front());
    end
  end
  always @(posedge clk) if (rst_n && ov_b) begin
    checks++;
    if (qb.size() == 0) begin failures++; $display("FAIL B unexpected"); end
    else begin
      for (int r = 0; r < KB; r++) if (y_b[r] !== qb[0][r]) begin
        failures++; $display("FAIL B y[%0d] %h exp %h", r, y_b[r], qb[0][r]); break;
      end
      if (cyc - tb_[0] != 2 * KB - 1) begin failures++; $display("FAIL B latency %0d", cyc - tb_[0]); end
      void'(qb.pop_front()); void'(tb_.pop_front());
    end
  end

  logic [7:0] wa [KA][KA]; logic [7:0] wb [KB][KB];

  initial begin
    ws_a = 0; iv_a = 0; w_a = '0; x_a = '0; ws_b = 0; iv_b = 0; w_b = '0; x_b = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int tile = 0; tile < 6; tile++) begin
      // load: row c of W in shift cycle K-1-c
      for (int c = 0; c < KA; c++) for (int r = 0; r < KA; r++) wa[c][r] = 8'($urandom);
      for (int c = 0; c < KB; c++) for (int r = 0; r < KB; r++) wb[c][r] = 8'($urandom);
      if (tile == 0) for (int c = 0; c < KB; c++) for (int r = 0; r < KB; r++) wb[c][r] = 8'h80;
      for (int s = 0; s < KB; s++) begin
        @(negedge clk);
        ws_a = (s < KA); ws_b = 1;
        for (int r = 0; r < KA; r++) w_a[r] = wa[KA - 1 - (s % KA)][r];
        for (int r = 0; r < KB; r++) w_b[r] = wb[KB - 1 - s][r];
      end
      @(negedge clk); ws_a = 0; ws_b = 0;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        iv_a = 1'($urandom % 4 != 0); iv_b = 1'($urandom % 4 != 0);
        for (int c = 0; c < KA; c++) x_a[c] = 8'($urandom);
        for (int c = 0; c < KB; c++) x_b[c] = (tile == 0) ? 8'h80 : 8'($urandom);
        if (iv_a) begin
          logic [31:0] e [KA];
          for (int r = 0; r < KA; r++) begin
            automatic int s = 0;
            for (int c = 0; c < KA; c++) s += $signed(x_a[c]) * $signed(wa[c][r]);
            e[r] = 32'(s);
          end
          qa.push_back(e); ta.push_back(cyc);
        end
        if (iv_b) begin
          logic [31:0] e [KB];
          for (int r = 0; r < KB; r++) begin
            automatic int s = 0;
            for (int c = 0; c < KB; c++) s += $signed(x_b[c]) * $signed(wb[c][r]);
            e[r] = 32'(s);
          end
          qb.push_back(e); tb_.push_back(cyc);
        end
      end
      @(negedge clk); iv_a = 0; iv_b = 0;
      repeat (2 * KB + 2) @(posedge clk);
      `CHECK(qa.size() == 0 && qb.size() == 0, "all rows drained")
    end
    `TB_FINISH
  end
endmodule
