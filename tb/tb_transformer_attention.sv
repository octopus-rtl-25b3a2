// Workload testbench: the self-attention part of the payload transformer
// (input: the first 16 payload bytes of 15 packets of a flow; WQ, WK and WV
// of size (16, 64)) on octopus_top at full size.
//  1. Q, K, V = X * WQ, X * WK, X * WV: twelve (15, 16) x (16, 16) blocks on
//     AryPE, one LD and one MM each.
//  2. S = Q * K^T, (15, 64) x (64, 15): the array loads its stationary
//     operand only from its parameter cache, so the testbench, acting as the
//     control processor, copies K^T from the banks into the cache. The four
//     partial products are added by the VPE's VU (three vadd per row).
//  3. The row softmax has no hardware; the testbench computes an int8
//     attention matrix A from S, writes it to a bank and V into the cache,
//     and AryPE computes O = A * V as four blocks.
// The payload matrix is written straight into the bank (the feature
// extractor's payload mode is covered by the top-level testbench). Every
// intermediate result is checked against a reference that repeats the
// hardware's requantisation and saturation; cycle counts are printed.
`include "tb_util.svh"
module tb_transformer_attention;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pkt_vld, pkt_ready, host_vld, host_we, host_gnt, host_rvalid;
  pkt_t pkt; logic [23:0] host_addr; logic [127:0] host_wdata, host_rdata;
  logic dec_vld, vpe_irq, ary_irq, fe_init_busy; logic [15:0] dec_addr;

  octopus_top dut (.clk, .rst_n, .pkt_vld, .pkt_ready, .pkt, .host_vld, .host_we, .host_addr,
    .host_wdata, .host_gnt, .host_rvalid, .host_rdata, .dec_vld, .dec_addr, .vpe_irq, .ary_irq,
    .fe_init_busy);

  task automatic hw(input int unsigned a, input logic [127:0] d);
    @(negedge clk); host_vld = 1; host_we = 1; host_addr = 24'(a); host_wdata = d;
    @(posedge clk); while (!host_gnt) @(posedge clk);
    @(negedge clk); host_vld = 0; host_we = 0;
  endtask
  task automatic hr(input int unsigned a, output logic [127:0] d);
    @(negedge clk); host_vld = 1; host_we = 0; host_addr = 24'(a);
    @(posedge clk); while (!host_gnt) @(posedge clk);
    @(negedge clk); host_vld = 0;
    d = host_rdata;
  endtask

  function automatic logic [7:0] act(int s, int sh);
    int v = s >>> sh;
    return (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  localparam int unsigned H_VC = 32'h100000, H_AC = 32'h200000, H_VI = 32'h300000,
                          H_AI = 32'h500000, H_AP = 32'h600000, H_MEM = 32'h800000;
  localparam int SH = 9;

  logic [7:0] x [15][16];
  logic [7:0] wm [3][16][64];           // WQ, WK, WV
  logic [7:0] qkv [3][15][64];
  logic [7:0] sp [4][15][16];           // partial products of S (column 15 is padding)
  logic [7:0] s [15][15];
  logic [7:0] a [15][15];
  logic [7:0] o [15][64];

  // run AryPE from pc with adRf $0..$2 set, wait for its FIN
  task automatic run_ary(input int pc, input int r0, input int r1, input int r2, output int cyc);
    automatic int t0;
    hw(H_AC + 2, 32'(pc)); hw(H_AC + 8, 32'(r0)); hw(H_AC + 9, 32'(r1)); hw(H_AC + 10, 32'(r2));
    t0 = $time;
    hw(H_AC + 0, 1);
    wait (ary_irq); cyc = ($time - t0) / 10;
    hw(H_AC + 1, 2);
  endtask

  // check a row-major result at base, 15 rows, one 16-byte column block
  task automatic check_rows(input int base, input string what, input logic [7:0] e [15][16]);
    automatic logic [127:0] d, ev;
    for (int i = 0; i < 15; i++) begin
      for (int r = 0; r < 16; r++) ev[8*r +: 8] = e[i][r];
      hr(H_MEM + base + i, d);
      `CHECK(d == ev, $sformatf("%s row %0d: %h exp %h", what, i, d, ev))
    end
  endtask

  initial begin
    automatic logic [127:0] d;
    automatic logic [7:0] blk [15][16];
    automatic int c1, c2, c3, c4, t0;
    pkt_vld = 0; pkt = '0; host_vld = 0; host_we = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 15; i++) for (int j = 0; j < 16; j++) x[i][j] = 8'($urandom);
    for (int m = 0; m < 3; m++) for (int c = 0; c < 16; c++) for (int r = 0; r < 64; r++) wm[m][c][r] = 8'($urandom);
    hw(H_AC + 4, SH);

    // ---------- Q, K, V ----------
    for (int i = 0; i < 15; i++) begin
      for (int j = 0; j < 16; j++) d[8*j +: 8] = x[i][j];
      hw(H_MEM + i, d);
    end
    // tile 4m+nb, word c = row c of matrix m, columns 16nb..16nb+15
    for (int m = 0; m < 3; m++) for (int nb = 0; nb < 4; nb++) for (int c = 0; c < 16; c++) begin
      for (int r = 0; r < 16; r++) d[8*r +: 8] = wm[m][c][16*nb + r];
      hw(H_AP + 16*(4*m + nb) + c, d);
    end
    for (int t = 0; t < 12; t++) begin
      hw(H_AI + 2*t,     128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0}));
      hw(H_AI + 2*t + 1, 128'(ary_instr_t'{A_MM, 12'd15, 3'd1, 3'd2, 1'b0, 1'b1}));
    end
    hw(H_AI + 24, 128'(ary_instr_t'{A_FIN, 12'd0, 3'd2, 3'd0, 1'b0, 1'b0}));
    // block (m, nb) lands at 0x4000 + 15 * (4m + nb)
    run_ary(0, 0, 16'h0000, 16'h4000, c1);
    $display("Q, K, V on AryPE: %0d cycles", c1);
    for (int m = 0; m < 3; m++)
      for (int i = 0; i < 15; i++)
        for (int r = 0; r < 64; r++) begin
          automatic int acc = 0;
          for (int c = 0; c < 16; c++) acc += $signed(x[i][c]) * $signed(wm[m][c][r]);
          qkv[m][i][r] = act(acc, SH);
        end
    for (int m = 0; m < 3; m++) for (int nb = 0; nb < 4; nb++) begin
      for (int i = 0; i < 15; i++) for (int r = 0; r < 16; r++) blk[i][r] = qkv[m][i][16*nb + r];
      check_rows(16'h4000 + 15*(4*m + nb), $sformatf("QKV m%0d nb%0d", m, nb), blk);
    end

    // ---------- S = Q * K^T ----------
    // the control processor moves K^T into the cache: tile kb word c = K column 16kb+c
    for (int kb = 0; kb < 4; kb++) for (int c = 0; c < 16; c++) begin
      d = '0;
      for (int r = 0; r < 15; r++) d[8*r +: 8] = qkv[1][r][16*kb + c];
      hw(H_AP + 192 + 16*kb + c, d);
    end
    for (int kb = 0; kb < 4; kb++) begin
      hw(H_AI + 32 + 2*kb,     128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0}));
      hw(H_AI + 32 + 2*kb + 1, 128'(ary_instr_t'{A_MM, 12'd15, 3'd1, 3'd2, 1'b1, 1'b1}));
    end
    hw(H_AI + 40, 128'(ary_instr_t'{A_FIN, 12'd0, 3'd2, 3'd0, 1'b0, 1'b0}));
    // Q block kb is the x operand of k-block kb; partial kb at 0x4200 + 15kb
    run_ary(32, 192, 16'h4000, 16'h4200, c2);
    $display("Q * K^T blocks on AryPE: %0d cycles", c2);
    for (int kb = 0; kb < 4; kb++) begin
      for (int i = 0; i < 15; i++)
        for (int r = 0; r < 16; r++) begin
          automatic int acc = 0;
          if (r < 15) for (int c = 0; c < 16; c++) acc += $signed(qkv[0][i][16*kb + c]) * $signed(qkv[1][r][16*kb + c]);
          sp[kb][i][r] = act(acc, SH);
          blk[i][r] = sp[kb][i][r];
        end
      check_rows(16'h4200 + 15*kb, $sformatf("S partial %0d", kb), blk);
    end
    // VU adds the four partials of each row into 0x4300
    for (int i = 0; i < 15; i++) begin
      automatic vliw_t w [5];
      for (int k = 0; k < 5; k++) w[k] = '0;
      for (int k = 0; k < 4; k++) w[k].mif = '{M_LD, 1'b1, 3'(k), 3'(k)};
      w[2].vu = '{V_ADD, 3'd0, 3'd1, 1'b0, 1'b0, 3'd6};
      w[3].vu = '{V_ADD, 3'd6, 3'd2, 1'b0, 1'b0, 3'd6};
      w[4].vu = '{V_ADD, 3'd6, 3'd3, 1'b1, 1'b1, 3'd4};
      if (i == 14) w[4].ctl = '{1'b1, 3'd4};
      for (int k = 0; k < 5; k++) hw(H_VI + 5*i + k, 128'(w[k]));
    end
    hw(H_VC + 2, 0);
    for (int kb = 0; kb < 4; kb++) hw(H_VC + 8 + kb, 16'h4200 + 15*kb);
    hw(H_VC + 12, 16'h4300);
    t0 = $time;
    hw(H_VC + 0, 1);
    wait (vpe_irq); c3 = ($time - t0) / 10;
    $display("S aggregation on VU: %0d cycles", c3);
    for (int i = 0; i < 15; i++) begin
      for (int r = 0; r < 16; r++) begin
        automatic int acc = $signed(sp[0][i][r]);
        for (int kb = 1; kb < 4; kb++) begin
          acc = acc + $signed(sp[kb][i][r]);
          acc = (acc > 127) ? 127 : (acc < -128) ? -128 : acc;
        end
        blk[i][r] = 8'(acc);
        if (r < 15) s[i][r] = 8'(acc);
      end
    end
    check_rows(16'h4300, "S", blk);

    // ---------- softmax (control processor) and O = A * V ----------
    // A[i][j] = round(127 * exp(s_ij / 16) / sum_j exp(s_ij / 16)), as int8
    for (int i = 0; i < 15; i++) begin
      automatic real e [15];
      automatic real sum = 0.0;
      for (int j = 0; j < 15; j++) begin e[j] = $exp(real'($signed(s[i][j])) / 16.0); sum += e[j]; end
      d = '0;
      for (int j = 0; j < 15; j++) begin
        a[i][j] = 8'($rtoi(127.0 * e[j] / sum + 0.5));
        d[8*j +: 8] = a[i][j];
      end
      hw(H_MEM + 16'h1000 + i, d);
    end
    // tile nb word c = row c of V (row 15 zero), columns 16nb..16nb+15
    for (int nb = 0; nb < 4; nb++) for (int c = 0; c < 16; c++) begin
      d = '0;
      if (c < 15) for (int r = 0; r < 16; r++) d[8*r +: 8] = qkv[2][c][16*nb + r];
      hw(H_AP + 256 + 16*nb + c, d);
    end
    for (int nb = 0; nb < 4; nb++) begin
      hw(H_AI + 48 + 2*nb,     128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0}));
      hw(H_AI + 48 + 2*nb + 1, 128'(ary_instr_t'{A_MM, 12'd15, 3'd1, 3'd2, 1'b0, 1'b1}));
    end
    hw(H_AI + 56, 128'(ary_instr_t'{A_FIN, 12'd0, 3'd2, 3'd0, 1'b0, 1'b0}));
    hw(H_AC + 4, 7);
    run_ary(48, 256, 16'h1000, 16'h4400, c4);
    $display("A * V on AryPE: %0d cycles", c4);
    for (int nb = 0; nb < 4; nb++) begin
      for (int i = 0; i < 15; i++)
        for (int r = 0; r < 16; r++) begin
          automatic int acc = 0;
          for (int j = 0; j < 15; j++) acc += $signed(a[i][j]) * $signed(qkv[2][j][16*nb + r]);
          o[i][16*nb + r] = act(acc, 7);
          blk[i][r] = o[i][16*nb + r];
        end
      check_rows(16'h4400 + 15*nb, $sformatf("O block %0d", nb), blk);
    end
    `CHECK(dut.u_arype.perf[0] == 20 && dut.u_arype.perf[1] == 20, "LD and MM count")
    `CHECK(dut.u_vpe.perf[2] == 45, "vadd count")
    $display("attention for one flow: %0d cycles of engine time", c1 + c2 + c3 + c4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
