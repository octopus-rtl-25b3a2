// End-to-end testbench of octopus_top at full size (8k flows, 8k-word
// feature memory, two 16k-word banks, 8-lane VPE, 16 x 16 AryPE); no
// parameter is overridden. The testbench plays switch fabric and control
// domain through the host port.
//  Phase A, packet-to-inference: the feature extractor is configured for
//  per-flow statistics with a top-3 threshold; the VPE runs an MLP
//  6-12-6-3-2 that fetches each ready flow with fa, loads its features from
//  feature memory and stores its result in bank 0. Its FIN releases the
//  flow, whose address reaches the control domain on dec_vld. A fourth
//  packet sent right behind the third of some flows is dropped as frozen.
//  Features and results are read back through the host port and the
//  results compared with a reference of the MLP.
//  Phase B, heterogeneous collaboration: AryPE multiplies 16 and 40 input rows
//  by two weight tiles (one result in each bank, the second sharing
//  its bank with the input so that reads are refused), the host competes
//  for the same bank port while polling, and then the VPE aggregates the
//  two partial results with vadd (and one vem). All rows are checked.
// Every mechanism is counted; one that never happened counts as a failure.
`include "tb_util.svh"
`include "tb_pkt_lib.svh"
module tb_octopus_top;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(200000)

  logic pkt_vld, pkt_ready, host_vld, host_we, host_gnt, host_rvalid;
  pkt_t pkt; logic [23:0] host_addr; logic [127:0] host_wdata, host_rdata;
  logic dec_vld, vpe_irq, ary_irq, fe_init_busy; logic [15:0] dec_addr;

  octopus_top dut (.clk, .rst_n, .pkt_vld, .pkt_ready, .pkt, .host_vld, .host_we, .host_addr,
    .host_wdata, .host_gnt, .host_rvalid, .host_rdata, .dec_vld, .dec_addr, .vpe_irq, .ary_irq,
    .fe_init_busy);

  // ---------------- host bus ----------------
  int host_wait = 0;
  always @(posedge clk) if (host_vld && !host_gnt) host_wait++;

  task automatic hw(input int unsigned a, input logic [127:0] d);
    @(negedge clk); host_vld = 1; host_we = 1; host_addr = 24'(a); host_wdata = d;
    @(posedge clk); while (!host_gnt) @(posedge clk);
    @(negedge clk); host_vld = 0; host_we = 0;
  endtask
  task automatic hr(input int unsigned a, output logic [127:0] d);
    @(negedge clk); host_vld = 1; host_we = 0; host_addr = 24'(a);
    @(posedge clk); while (!host_gnt) @(posedge clk);
    @(negedge clk); host_vld = 0;
    `CHECK(host_rvalid, "host read data valid one cycle after grant")
    d = host_rdata;
  endtask

  // ---------------- packet source ----------------
  task automatic send(input pkt_t p);
    @(negedge clk); pkt_vld = 1; pkt = p;
    @(posedge clk); while (!pkt_ready) @(posedge clk);
    @(negedge clk); pkt_vld = 0;
  endtask

  int n_dec = 0; logic [15:0] decq [$];
  always @(posedge clk) if (dec_vld) begin n_dec++; decq.push_back(dec_addr); end

  function automatic logic [12:0] ref_hash(tuple_t tu);
    logic [15:0] crc = 16'hFFFF; logic [103:0] v = tu;
    for (int i = 0; i < 13; i++) begin
      crc = crc ^ {v[103 - 8*i -: 8], 8'h00};
      for (int b = 0; b < 8; b++) crc = crc[15] ? ((crc << 1) ^ 16'h1021) : (crc << 1);
    end
    return crc[12:0] ^ 13'(crc >> 13);
  endfunction

  // ---------------- reference arithmetic ----------------
  function automatic logic [7:0] act(int s, int sh, bit r);
    int v = s >>> sh;
    if (r && v < 0) v = 0;
    return (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
  endfunction
  function automatic fword_t prd(fword_t x, logic [511:0] p, bit split, bit relu, int sh);
    fword_t o = '0;
    for (int j = 0; j < 8; j++) begin
      int s0 = 0, s1 = 0;
      for (int i = 0; i < 4; i++) s0 += $signed(x[i]) * $signed(p[64*j + 8*i +: 8]);
      for (int i = 4; i < 8; i++) s1 += $signed(x[i]) * $signed(p[64*j + 8*i +: 8]);
      if (split) begin o[j] = act(s0, sh, relu); o[8 + j] = act(s1, sh, relu); end
      else o[j] = act(s0 + s1, sh, relu);
    end
    return o;
  endfunction
  function automatic fword_t vadd(fword_t a, fword_t b);
    fword_t o;
    for (int i = 0; i < 16; i++) o[i] = act($signed(a[i]) + $signed(b[i]), 0, 0);
    return o;
  endfunction

  logic [511:0] P [6];
  localparam int VSH = 5;
  function automatic fword_t mlp_ref(fword_t x);
    fword_t v1, v2, v3, v4, v5, v6;
    x = {80'd0, x[5:0]};
    v1 = prd(x, P[0], 0, 1, VSH); v2 = prd(x, P[1], 0, 1, VSH);
    v3 = prd(v1, P[2], 0, 0, VSH); v4 = prd(v2, P[3], 0, 0, VSH);
    v5 = vadd(v3, v4); v6 = prd(v5, P[4], 0, 1, VSH);
    return prd(v6, P[5], 1, 0, VSH);
  endfunction

  // host address map
  localparam int unsigned H_FE = 32'h000000, H_VC = 32'h100000, H_AC = 32'h200000,
                          H_VI = 32'h300000, H_VP = 32'h400000, H_AI = 32'h500000,
                          H_AP = 32'h600000, H_MEM = 32'h800000;

  localparam int NFLOW = 12;
  tuple_t flows [NFLOW]; logic [12:0] faddr [NFLOW];
  logic [7:0] Wt [2][16][16]; logic [127:0] X [40];

  initial begin
    automatic logic [127:0] d;
    automatic int lat_max = 0;
    pkt_vld = 0; pkt = '0; host_vld = 0; host_we = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    `CHECK(fe_init_busy, "flow table sweep after reset")
    wait (!fe_init_busy);

    // ===== phase A =====
    // feature extractor: threshold 3, features x0 = count, x1 = duration,
    // x2 = max length/16, x3..x5 = length/16 of packets 0..2
    hw(H_FE + 0, 3);
    hw(H_FE + 16, 128'(alu_cfg_t'{1'b0, 1'b0, ALU_ADD, 4'd0, 4'(M_ONE)}));
    hw(H_FE + 17, 128'(alu_cfg_t'{1'b0, 1'b0, ALU_ADD, 4'd1, 4'(M_INTV)}));
    hw(H_FE + 18, 128'(alu_cfg_t'{1'b0, 1'b0, ALU_MAX, 4'd2, 4'(M_SIZE16)}));
    hw(H_FE + 19, 128'(alu_cfg_t'{1'b0, 1'b0, ALU_WRI, 4'd0, 4'(M_SIZE16)}));
    hw(H_FE + 20, 128'(alu_cfg_t'{1'b0, 1'b0, ALU_WRI, 4'd1, 4'(M_SIZE16)}));
    hw(H_FE + 21, 128'(alu_cfg_t'{1'b0, 1'b0, ALU_WRI, 4'd2, 4'(M_SIZE16)}));
    hr(H_FE + 0, d);
    `CHECK(d[31:0] == 3, "FE threshold readback")
    // VPE: MLP parameters and program
    for (int p = 0; p < 6; p++) begin
      P[p] = '0;
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < 8; i++) begin
          automatic bit used;
          case (p)
            0: used = (i < 6);
            1: used = (i < 6) && (j < 4);
            2: used = (j < 6);
            3: used = (j < 6) && (i < 4);
            4: used = (j < 3) && (i < 6);
            default: used = (j < 2) && (i < 3);
          endcase
          if (used) P[p][64*j + 8*i +: 8] = 8'($signed(int'($urandom % 31) - 15));
        end
      for (int q = 0; q < 4; q++) hw(H_VP + (p << 2) + q, P[p][128*q +: 128]);
    end
    begin
      automatic vliw_t w [9];
      for (int i = 0; i < 9; i++) w[i] = '0;
      w[0].mif = '{M_FA, 1'b0, 3'd0, 3'd0};
      w[1].mif = '{M_LD, 1'b0, 3'd0, 3'd0};
      w[2].simd = '{S_PRD, 1'b1, 3'd0, 1'b0, 1'b0, 3'd1};
      w[3].simd = '{S_PRD, 1'b1, 3'd0, 1'b0, 1'b0, 3'd2};
      w[4].simd = '{S_PRD, 1'b0, 3'd1, 1'b0, 1'b0, 3'd3};
      w[5].simd = '{S_PRD, 1'b0, 3'd2, 1'b0, 1'b0, 3'd4};
      w[6].vu   = '{V_ADD, 3'd3, 3'd4, 1'b0, 1'b0, 3'd5};
      w[7].simd = '{S_PRD, 1'b1, 3'd5, 1'b0, 1'b0, 3'd6};
      w[8].simd = '{S_PRDS, 1'b0, 3'd6, 1'b1, 1'b0, 3'd1};
      w[8].ctl  = '{1'b1, 3'd1};
      for (int i = 0; i < 9; i++) hw(H_VI + i, 128'(w[i]));
    end
    hw(H_VC + 2, 0); hw(H_VC + 3, 0); hw(H_VC + 4, VSH);
    // flows with distinct table addresses
    for (int f = 0; f < NFLOW; f++) begin
      automatic bit ok;
      do begin
        flows[f] = {$urandom, $urandom, 16'($urandom), 16'($urandom), 8'd6};
        faddr[f] = ref_hash(flows[f]);
        ok = 1;
        for (int g = 0; g < f; g++) if (faddr[g] == faddr[f]) ok = 0;
      end while (!ok);
    end
    for (int f = 0; f < NFLOW; f++) begin
      automatic int t0;
      // the host arms the VPE with the result address of this flow
      hw(H_VC + 9, 16'h0200 + f);
      hw(H_VC + 0, 1);
      repeat ($urandom % 20) @(negedge clk);
      for (int k = 0; k < 3; k++)
        send(mk_pkt(flows[f].src_ip, flows[f].dst_ip, flows[f].sport, flows[f].dport, 6, 8'h10, 0,
                    16'(64 + $urandom % 1800), 32'(f * 1000 + k * (1 + $urandom % 40)), 0, 8'(f)));
      t0 = $time;
      if (f % 2 == 0)
        send(mk_pkt(flows[f].src_ip, flows[f].dst_ip, flows[f].sport, flows[f].dport, 6, 8'h10, 0,
                    16'd100, 32'(f * 1000 + 500), 0, 8'(f)));
      wait (n_dec == f + 1);
      if ((($time - t0) / 10) > lat_max) lat_max = ($time - t0) / 10;
      `CHECK(decq[f] == (16'h8000 | 16'(faddr[f])), $sformatf("dec address %h exp %h", decq[f], faddr[f]))
      @(negedge clk);
      `CHECK(vpe_irq, "VPE FIN flag")
      hw(H_VC + 1, 2);
      hr(H_MEM + (16'h8000 | faddr[f]), d);
      `CHECK(d[7:0] == 3, $sformatf("flow %0d packet count %0d", f, d[7:0]))
      begin
        automatic logic [127:0] r, e;
        e = mlp_ref(d);
        hr(H_MEM + 16'h0200 + f, r);
        `CHECK(r == e, $sformatf("flow %0d MLP result %h exp %h", f, r, e))
      end
    end
    $display("packet-to-release latency, worst case: %0d cycles", lat_max);

    // ===== phase B =====
    hw(H_FE + 4, 0);      // engine FINs no longer release flows
    for (int t = 0; t < 2; t++)
      for (int c = 0; c < 16; c++) begin
        automatic logic [127:0] wd;
        for (int r = 0; r < 16; r++) begin Wt[t][c][r] = 8'($urandom); wd[8*r +: 8] = Wt[t][c][r]; end
        hw(H_AP + t * 16 + c, wd);
      end
    for (int i = 0; i < 40; i++) begin
      X[i] = {$urandom, $urandom, $urandom, $urandom};
      hw(H_MEM + 16'h1000 + i, X[i]);
    end
    hw(H_AI + 0, 128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b1, 1'b0}));
    hw(H_AI + 1, 128'(ary_instr_t'{A_MM, 12'd16, 3'd1, 3'd2, 1'b0, 1'b0}));
    hw(H_AI + 2, 128'(ary_instr_t'{A_LD, 12'd0, 3'd0, 3'd0, 1'b0, 1'b0}));
    hw(H_AI + 3, 128'(ary_instr_t'{A_MM, 12'd40, 3'd1, 3'd3, 1'b0, 1'b0}));
    hw(H_AI + 4, 128'(ary_instr_t'{A_FIN, 12'd0, 3'd2, 3'd0, 1'b0, 1'b0}));
    hw(H_AC + 2, 0); hw(H_AC + 4, 7);
    hw(H_AC + 8, 0); hw(H_AC + 9, 16'h1000); hw(H_AC + 10, 16'h4000); hw(H_AC + 11, 16'h2000);
    hw(H_AC + 0, 1);
    // poll: memory reads of bank 0 compete with AryPE for its port
    do begin
      hr(H_MEM + 16'h1000 + ($urandom % 40), d);
      hr(H_AC + 1, d);
    end while (!d[1]);
    `CHECK(ary_irq, "AryPE FIN flag")
    `CHECK(d[31:16] == 16'h4000, "AryPE result address")
    // VPE aggregation: Z[i] = Y1[i] + Y2[i], and one element-wise product
    begin
      automatic vliw_t w [50];
      for (int i = 0; i < 50; i++) w[i] = '0;
      for (int i = 0; i < 16; i++) begin
        w[3*i].mif     = '{M_LD, 1'b1, 3'd0, 3'd0};
        w[3*i + 1].mif = '{M_LD, 1'b1, 3'd1, 3'd1};
        w[3*i + 2].vu  = '{V_ADD, 3'd0, 3'd1, 1'b1, 1'b1, 3'd2};
      end
      w[48].vu  = '{V_EM, 3'd0, 3'd1, 1'b1, 1'b0, 3'd3};
      w[48].ctl = '{1'b1, 3'd2};
      for (int i = 0; i < 49; i++) hw(H_VI + 16 + i, 128'(w[i]));
    end
    hw(H_VC + 2, 16); hw(H_VC + 8, 16'h4000); hw(H_VC + 9, 16'h2000);
    hw(H_VC + 10, 16'h4200); hw(H_VC + 11, 16'h4300);
    hw(H_VC + 0, 1);
    do hr(H_VC + 1, d); while (!d[1]);
    `CHECK(d[31:16] == 16'h4210, "VPE result address")
    begin
      automatic logic [127:0] y1, y2, z, e1, e2;
      for (int i = 0; i < 40; i++) begin
        for (int r = 0; r < 16; r++) begin
          automatic int s1 = 0, s2 = 0;
          for (int c = 0; c < 16; c++) begin
            s1 += $signed(X[i][8*c +: 8]) * $signed(Wt[0][c][r]);
            s2 += $signed(X[i][8*c +: 8]) * $signed(Wt[1][c][r]);
          end
          e1[8*r +: 8] = act(s1, 7, 0); e2[8*r +: 8] = act(s2, 7, 0);
        end
        hr(H_MEM + 16'h2000 + i, y2);
        if (i < 16) begin hr(H_MEM + 16'h4000 + i, y1); hr(H_MEM + 16'h4200 + i, z); end
        `CHECK(y2 == e2, $sformatf("AryPE tile 1 row %0d", i))
        if (i >= 16) continue;
        `CHECK(y1 == e1, $sformatf("AryPE tile 0 row %0d", i))
        `CHECK(z == vadd(e1, e2), $sformatf("VPE aggregate row %0d", i))
        if (i == 15) begin
          automatic logic [127:0] m, em;
          for (int k = 0; k < 16; k++) em[8*k +: 8] = act($signed(e1[8*k +: 8]) * $signed(e2[8*k +: 8]), VSH, 0);
          hr(H_MEM + 16'h4300, m);
          `CHECK(m == em, "VPE vem")
        end
      end
    end

    // ===== mechanism counts =====
    begin
      automatic int n_pkt = dut.u_fe.n_pkt, n_new = dut.u_fe.n_new, n_drop = dut.u_fe.n_frozen_drop;
      automatic int n_rdy = dut.u_fe.n_ready;
      $display("mechanisms: pkt %0d new %0d hit %0d push %0d frozen-drop %0d release %0d", n_pkt, n_new,
               n_pkt - n_new - n_drop, n_rdy, n_drop, n_dec);
      $display("mechanisms: prd %0d prds %0d vadd %0d vem %0d ld %0d fa %0d store %0d fa-wait %0d",
               dut.u_vpe.perf[0], dut.u_vpe.perf[1], dut.u_vpe.perf[2], dut.u_vpe.perf[3],
               dut.u_vpe.perf[4], dut.u_vpe.perf[5], dut.u_vpe.perf[6], dut.u_vpe.perf[8]);
      $display("mechanisms: LD %0d MM %0d rows %0d bubbles %0d ary-fin %0d host-wait %0d",
               dut.u_arype.perf[0], dut.u_arype.perf[1], dut.u_arype.perf[2], dut.u_arype.perf[3],
               dut.u_arype.perf[4], host_wait);
      `CHECK(n_new == NFLOW, "new flows")
      `CHECK(n_pkt - n_new - n_drop == 2 * NFLOW, "flow-table hits")
      `CHECK(n_rdy == NFLOW, "threshold pushes")
      `CHECK(n_drop == NFLOW / 2, "frozen drops")
      `CHECK(n_dec == NFLOW, "releases by FIN")
      `CHECK(dut.u_vpe.perf[0] == 5 * NFLOW, "prd")
      `CHECK(dut.u_vpe.perf[1] == NFLOW, "prds")
      `CHECK(dut.u_vpe.perf[2] == NFLOW + 16, "vadd")
      `CHECK(dut.u_vpe.perf[3] == 1, "vem")
      `CHECK(dut.u_vpe.perf[4] == NFLOW + 32, "ld")
      `CHECK(dut.u_vpe.perf[5] == NFLOW, "fa")
      `CHECK(dut.u_vpe.perf[6] == NFLOW + 17, "stores")
      `CHECK(dut.u_vpe.perf[8] > 0, "fa waits")
      `CHECK(dut.u_arype.perf[0] == 2, "LD")
      `CHECK(dut.u_arype.perf[1] == 2, "MM")
      `CHECK(dut.u_arype.perf[2] == 56, "rows streamed")
      `CHECK(dut.u_arype.perf[3] > 0, "read bubbles")
      `CHECK(host_wait > 0, "host waits for memory")
    end
    `TB_FINISH
  end
endmodule
