// Workload testbench: the first two convolution layers of the flow-based
// 1D-CNN (arrival intervals of the top 20 packets of a flow, 32 kernels of
// size 3 per layer) run on octopus_top at full size, split between the
// engines as in heterogeneous collaborative computing.
//  Layer 1, (20, 3) x (3, 32), is too small for the array and runs on the
//  VPE: each prds computes three-wide products for two sliding windows at
//  once (window 2p in sub-lane 0, window 2p+1 in sub-lane 1) for eight
//  kernels, so four prds cover 32 kernels for a window pair.
//  Layer 2, (10, 96) x (96, 32), is larger than the 16 x 16 array: AryPE
//  computes the twelve (10, 16) x (16, 16) blocks, writing each partial
//  result to a bank, and the VPE's VU adds the six partials of each output
//  row (five vadd per row).
// The max-pooling (stride 2) between the layers and the img2col
// rearrangement have no hardware in this design and are done by the
// testbench in the role of the control processor. Every layer-1 output and
// every layer-2 output is compared with a reference that applies the same
// requantisation and saturation steps; cycle counts of both layers are
// printed.
`include "tb_util.svh"
module tb_cnn_layers;
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

  function automatic logic [7:0] act(int s, int sh, bit r);
    int v = s >>> sh;
    if (r && v < 0) v = 0;
    return (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  localparam int unsigned H_VC = 32'h100000, H_AC = 32'h200000, H_VI = 32'h300000,
                          H_VP = 32'h400000, H_AI = 32'h500000, H_AP = 32'h600000, H_MEM = 32'h800000;
  localparam int SH1 = 3, SH2 = 7;

  logic signed [7:0] x [22];            // 20 intervals, zero padded
  logic signed [7:0] k1 [32][3];        // layer-1 kernels
  logic [7:0]        h1 [20][32];       // layer-1 output (reference)
  logic signed [7:0] h1p [12][32];      // pooled, zero padded
  logic [7:0]        w2 [96][32];       // layer-2 weights (img2col order)
  logic [7:0]        part [6][2][10][16];
  logic [7:0]        z [10][32];

  initial begin
    automatic logic [127:0] d;
    automatic int t0, c1, c2, c3;
    pkt_vld = 0; pkt = '0; host_vld = 0; host_we = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 22; i++) x[i] = (i < 20) ? 8'($urandom % 100) : 8'd0;
    for (int k = 0; k < 32; k++) for (int j = 0; j < 3; j++) k1[k][j] = 8'($signed(int'($urandom % 41) - 20));
    for (int c = 0; c < 96; c++) for (int k = 0; k < 32; k++) w2[c][k] = 8'($urandom);

    // ---------- layer 1 on the VPE ----------
    // window pair p: bytes 0..2 = x[2p..2p+2], bytes 4..6 = x[2p+1..2p+3]
    for (int p = 0; p < 10; p++) begin
      d = '0;
      for (int j = 0; j < 3; j++) begin d[8*j +: 8] = x[2*p + j]; d[32 + 8*j +: 8] = x[2*p + 1 + j]; end
      hw(H_MEM + 16'h0000 + p, d);
    end
    // pCache: word q holds kernels 8q..8q+7 in both sub-lanes, repeated per pair
    for (int p = 0; p < 10; p++)
      for (int q = 0; q < 4; q++) begin
        automatic logic [511:0] pw = '0;
        for (int j = 0; j < 8; j++)
          for (int t = 0; t < 3; t++) begin
            pw[64*j + 8*t +: 8] = k1[8*q + j][t];
            pw[64*j + 32 + 8*t +: 8] = k1[8*q + j][t];
          end
        for (int qq = 0; qq < 4; qq++) hw(H_VP + ((4*p + q) << 2) + qq, pw[128*qq +: 128]);
      end
    for (int p = 0; p < 10; p++) begin
      automatic vliw_t w = '0;
      w.mif = '{M_LD, 1'b1, 3'd0, 3'd0};
      hw(H_VI + 5*p, 128'(w));
      for (int q = 0; q < 4; q++) begin
        w = '0;
        w.simd = '{S_PRDS, 1'b1, 3'd0, 1'b1, 1'b1, 3'd1};
        if (p == 9 && q == 3) w.ctl = '{1'b1, 3'd1};
        hw(H_VI + 5*p + 1 + q, 128'(w));
      end
    end
    hw(H_VC + 2, 0); hw(H_VC + 3, 0); hw(H_VC + 4, (1 << 8) | SH1);
    hw(H_VC + 8, 16'h0000); hw(H_VC + 9, 16'h0100);
    t0 = $time;
    hw(H_VC + 0, 1);
    wait (vpe_irq); c1 = ($time - t0) / 10;
    $display("layer 1 on VPE: %0d cycles", c1);
    // reference and check: row 4p+q, byte j = window 2p kernel 8q+j, byte 8+j = window 2p+1
    for (int wdw = 0; wdw < 20; wdw++)
      for (int k = 0; k < 32; k++) begin
        automatic int s = 0;
        for (int t = 0; t < 3; t++) s += x[wdw + t] * k1[k][t];
        h1[wdw][k] = act(s, SH1, 1);
      end
    for (int p = 0; p < 10; p++)
      for (int q = 0; q < 4; q++) begin
        automatic logic [127:0] e = '0;
        for (int j = 0; j < 8; j++) begin e[8*j +: 8] = h1[2*p][8*q + j]; e[64 + 8*j +: 8] = h1[2*p + 1][8*q + j]; end
        hr(H_MEM + 16'h0100 + 4*p + q, d);
        `CHECK(d == e, $sformatf("layer-1 pair %0d group %0d: %h exp %h", p, q, d, e))
      end
    hw(H_VC + 1, 2);

    // ---------- pooling and img2col (control processor) ----------
    for (int m = 0; m < 12; m++)
      for (int k = 0; k < 32; k++)
        h1p[m][k] = (m < 10) ? (($signed(h1[2*m][k]) > $signed(h1[2*m + 1][k])) ? h1[2*m][k] : h1[2*m + 1][k]) : 8'd0;
    // block kb (16 columns of the 96) of row i at 0x1000 + 10*kb + i
    for (int kb = 0; kb < 6; kb++)
      for (int i = 0; i < 10; i++) begin
        for (int c = 0; c < 16; c++) begin
          automatic int col = 16*kb + c;
          d[8*c +: 8] = h1p[i + col / 32][col % 32];
        end
        hw(H_MEM + 16'h1000 + 10*kb + i, d);
      end

    // ---------- layer 2 partial products on AryPE ----------
    // tiles in order (kb, nb); tile word c = row 16kb+c, columns 16nb..16nb+15
    for (int kb = 0; kb < 6; kb++)
      for (int nb = 0; nb < 2; nb++)
        for (int c = 0; c < 16; c++) begin
          for (int r = 0; r < 16; r++) d[8*r +: 8] = w2[16*kb + c][16*nb + r];
          hw(H_AP + 16*(2*kb + nb) + c, d);
        end
    for (int kb = 0; kb < 6; kb++) begin
      hw(H_AI + 4*kb + 0, 128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0}));
      hw(H_AI + 4*kb + 1, 128'(ary_instr_t'{A_MM, 12'd10, 3'd1, 3'd2, 1'b0, 1'b1}));
      hw(H_AI + 4*kb + 2, 128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0}));
      hw(H_AI + 4*kb + 3, 128'(ary_instr_t'{A_MM, 12'd10, 3'd1, 3'd2, 1'b1, 1'b1}));
    end
    hw(H_AI + 24, 128'(ary_instr_t'{A_FIN, 12'd0, 3'd2, 3'd0, 1'b0, 1'b0}));
    hw(H_AC + 2, 0); hw(H_AC + 4, SH2);
    hw(H_AC + 8, 0); hw(H_AC + 9, 16'h1000); hw(H_AC + 10, 16'h4000);
    t0 = $time;
    hw(H_AC + 0, 1);
    wait (ary_irq); c2 = ($time - t0) / 10;
    $display("layer 2 blocks on AryPE: %0d cycles", c2);
    // partial (kb, nb) row i at 0x4000 + 20kb + 10nb + i
    for (int kb = 0; kb < 6; kb++)
      for (int nb = 0; nb < 2; nb++)
        for (int i = 0; i < 10; i++) begin
          automatic logic [127:0] e;
          for (int r = 0; r < 16; r++) begin
            automatic int s = 0;
            for (int c = 0; c < 16; c++) begin
              automatic int col = 16*kb + c;
              s += h1p[i + col / 32][col % 32] * $signed(w2[col][16*nb + r]);
            end
            part[kb][nb][i][r] = act(s, SH2, 0);
            e[8*r +: 8] = part[kb][nb][i][r];
          end
          hr(H_MEM + 16'h4000 + 20*kb + 10*nb + i, d);
          `CHECK(d == e, $sformatf("layer-2 partial kb%0d nb%0d row %0d", kb, nb, i))
        end

    // ---------- block aggregation on the VPE's VU ----------
    for (int r = 0; r < 20; r++) begin
      automatic vliw_t w [7];
      for (int i = 0; i < 7; i++) w[i] = '0;
      for (int i = 0; i < 6; i++) w[i].mif = '{M_LD, 1'b1, 3'(i), 3'(i)};
      w[2].vu = '{V_ADD, 3'd0, 3'd1, 1'b0, 1'b0, 3'd6};
      w[3].vu = '{V_ADD, 3'd6, 3'd2, 1'b0, 1'b0, 3'd6};
      w[4].vu = '{V_ADD, 3'd6, 3'd3, 1'b0, 1'b0, 3'd6};
      w[5].vu = '{V_ADD, 3'd6, 3'd4, 1'b0, 1'b0, 3'd6};
      w[6].vu = '{V_ADD, 3'd6, 3'd5, 1'b1, 1'b1, 3'd6};
      if (r == 19) w[6].ctl = '{1'b1, 3'd6};
      for (int i = 0; i < 7; i++) hw(H_VI + 64 + 7*r + i, 128'(w[i]));
    end
    hw(H_VC + 2, 64);
    for (int kb = 0; kb < 6; kb++) hw(H_VC + 8 + kb, 16'h4000 + 20*kb);
    hw(H_VC + 14, 16'h4100);
    t0 = $time;
    hw(H_VC + 0, 1);
    wait (vpe_irq); c3 = ($time - t0) / 10;
    $display("layer 2 aggregation on VU: %0d cycles", c3);
    for (int nb = 0; nb < 2; nb++)
      for (int i = 0; i < 10; i++) begin
        automatic logic [127:0] e;
        for (int r = 0; r < 16; r++) begin
          automatic int acc = $signed(part[0][nb][i][r]);
          for (int kb = 1; kb < 6; kb++) begin
            acc = acc + $signed(part[kb][nb][i][r]);
            acc = (acc > 127) ? 127 : (acc < -128) ? -128 : acc;
          end
          e[8*r +: 8] = 8'(acc);
        end
        hr(H_MEM + 16'h4100 + 10*nb + i, d);
        `CHECK(d == e, $sformatf("layer-2 output nb%0d row %0d", nb, i))
      end
    `CHECK(dut.u_vpe.perf[1] == 40, "prds count")
    `CHECK(dut.u_vpe.perf[2] == 100, "vadd count")
    `CHECK(dut.u_arype.perf[0] == 12 && dut.u_arype.perf[1] == 12, "LD and MM count")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
