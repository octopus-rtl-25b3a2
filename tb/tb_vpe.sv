// Testbench of vpe (8 lanes, 8 VU units). An instruction-set reference
// model executes the same VLIW words on a model of dRf, adRf, pCache and
// memory; after each run the memory contents, FIN address and performance
// counters are compared. The memory model has one-cycle read latency and
// refuses requests at random (grant stalls).
//  1. Packet-based MLP 6-12-6-3-2 (prd, prd, vadd, prds, fa, ld, fin) in
//     auto-restart mode over several ready flows delivered with gaps (fa
//     waits); the latency of one inference from fa to FIN is measured with
//     an always-granting memory and must stay within 46 cycles.
//  2. Random VLIW programs mixing all fields, stores from SIMDU and VU in
//     the same word, loads with post-increment and dense register reuse.
`include "tb_util.svh"
module tb_vpe;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(400000)

  logic crf_we, ic_we, pc_we, fin, fin_irq, busy, fa_vld, fa_pop;
  logic [4:0] crf_addr; logic [31:0] crf_wdata, crf_rdata;
  logic [9:0] ic_addr; logic [8:0] pc_addr; logic [1:0] pc_q;
  logic [VLIW_W-1:0] ic_wdata; logic [127:0] pc_wdata;
  mem_req_t [1:0] mreq; logic [1:0] mgnt; logic [1:0][127:0] mrdata;
  logic [15:0] fa_addr; logic [9:0][31:0] perf;

  vpe dut (.clk, .rst_n, .crf_we, .crf_addr, .crf_wdata, .crf_rdata, .ic_we, .ic_addr, .ic_wdata,
    .pc_we, .pc_addr, .pc_q, .pc_wdata, .fin, .fin_irq, .busy, .mreq, .mgnt, .mrdata,
    .fa_vld, .fa_addr, .fa_pop, .perf);

  // ---------------- memory model ----------------
  logic [127:0] mem [1024];
  bit deny0, deny1, allow_deny = 1;
  always_comb begin
    mgnt[0] = mreq[0].vld && !deny0;
    mgnt[1] = mreq[1].vld && !deny1;
  end
  always @(posedge clk) begin
    deny0 <= allow_deny && ($urandom % 4 == 0);
    deny1 <= allow_deny && ($urandom % 4 == 0);
    if (mgnt[0]) mrdata[0] <= mem[mreq[0].addr[9:0]];
    if (mgnt[1]) mem[mreq[1].addr[9:0]] <= mreq[1].wdata;
    if ((mgnt[0] && mreq[0].addr >= 1024) || (mgnt[1] && mreq[1].addr >= 1024)) begin
      failures++; $display("FAIL address out of model range");
    end
  end
  assign mrdata[1] = '0;

  // ready-flow address queue
  logic [15:0] faq [$];
  always @(posedge clk) if (fa_pop) void'(faq.pop_front());
  always @(negedge clk) begin
    #1;
    fa_vld  = faq.size() > 0;
    fa_addr = fa_vld ? faq[0] : 16'd0;
  end

  int n_fin = 0; logic [15:0] fin_a [$];
  always @(posedge clk) if (fin) begin n_fin++; fin_a.push_back(dut.fin_addr); end

  // ---------------- reference model ----------------
  vliw_t        prog [1024];
  logic [511:0] pcm [512];
  logic [127:0] rmem [1024];
  fword_t       rdrf [8];
  logic [15:0]  radrf [8];
  int           rpptr, r_pc;
  logic [15:0]  r_fin [$];
  int           r_cnt [10];
  logic [15:0]  r_faq [$];
  int           r_shift; bit r_relu;

  function automatic logic [7:0] act(int s, int sh, bit r);
    int v = s >>> sh;
    if (r && v < 0) v = 0;
    return (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  // run from pc until a fin word; returns 0 if fa found no address
  function automatic bit ref_run(int start_pc, int pbase, logic [15:0] init [8]);
    r_pc = start_pc; rpptr = pbase;
    for (int i = 0; i < 8; i++) radrf[i] = init[i];
    forever begin
      vliw_t w = prog[r_pc];
      fword_t sres = '0, vres = '0, ldv = '0, a = rdrf[w.vu.srca], b = rdrf[w.vu.srcb];
      logic [15:0] mid [8];
      logic [511:0] prm = pcm[rpptr % 512];
      logic [7:0][7:0] d = rdrf[w.simd.src][7:0];
      if (w.simd.op != S_NOP) begin
        for (int j = 0; j < 8; j++) begin
          int s0 = 0, s1 = 0;
          for (int i = 0; i < 4; i++) s0 += $signed(d[i]) * $signed(prm[64*j + 8*i +: 8]);
          for (int i = 4; i < 8; i++) s1 += $signed(d[i]) * $signed(prm[64*j + 8*i +: 8]);
          if (w.simd.op == S_PRDS) begin
            sres[j] = act(s0, r_shift, w.simd.relu); sres[8 + j] = act(s1, r_shift, w.simd.relu);
          end else sres[j] = act(s0 + s1, r_shift, w.simd.relu);
        end
        rpptr++;
        r_cnt[(w.simd.op == S_PRDS) ? 1 : 0]++;
      end
      if (w.vu.op != V_NOP) begin
        for (int i = 0; i < 16; i++) begin
          int v = (w.vu.op == V_ADD) ? $signed(a[i]) + $signed(b[i])
                                     : ($signed(a[i]) * $signed(b[i])) >>> r_shift;
          vres[i] = (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
        end
        r_cnt[(w.vu.op == V_ADD) ? 2 : 3]++;
      end
      for (int i = 0; i < 8; i++) mid[i] = radrf[i];
      if (w.mif.op == M_FA) begin
        if (r_faq.size() == 0) return 0;
        mid[w.mif.adr] = r_faq.pop_front(); r_cnt[5]++;
      end
      if (w.mif.op == M_LD) begin
        ldv = rmem[radrf[w.mif.adr] % 1024]; r_cnt[4]++;
        if (w.mif.ainc) mid[w.mif.adr] = radrf[w.mif.adr] + 1;
      end
      for (int i = 0; i < 8; i++) radrf[i] = mid[i];
      if (w.simd.op != S_NOP && w.simd.dmem) begin rmem[mid[w.simd.dst] % 1024] = sres; r_cnt[6]++; end
      if (w.vu.op != V_NOP && w.vu.dmem)     begin rmem[mid[w.vu.dst] % 1024] = vres; r_cnt[6]++; end
      if (w.simd.op != S_NOP) begin
        if (!w.simd.dmem) rdrf[w.simd.dst] = sres;
        else if (w.simd.dinc) radrf[w.simd.dst] = mid[w.simd.dst] + 1;
      end
      if (w.vu.op != V_NOP) begin
        if (!w.vu.dmem) rdrf[w.vu.dst] = vres;
        else if (w.vu.dinc) radrf[w.vu.dst] = mid[w.vu.dst] + 1;
      end
      if (w.mif.op == M_LD) rdrf[w.mif.dst] = ldv;
      if (w.ctl.fin) begin r_fin.push_back(radrf[w.ctl.radr] - ((w.simd.op != S_NOP && w.simd.dmem && w.simd.dinc && w.simd.dst == w.ctl.radr) || (w.vu.op != V_NOP && w.vu.dmem && w.vu.dinc && w.vu.dst == w.ctl.radr) ? 16'd1 : 16'd0)); r_cnt[7]++; return 1; end
      r_pc++;
    end
  endfunction

  // ---------------- helpers ----------------
  task automatic crf(input int a, input int v);
    @(negedge clk); crf_we = 1; crf_addr = 5'(a); crf_wdata = 32'(v);
    @(negedge clk); crf_we = 0;
  endtask
  task automatic load_prog(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); ic_we = 1; ic_addr = 10'(i); ic_wdata = prog[i];
    end
    @(negedge clk); ic_we = 0;
  endtask
  task automatic load_pcache(input int n);
    for (int i = 0; i < n; i++)
      for (int q = 0; q < 4; q++) begin
        @(negedge clk); pc_we = 1; pc_addr = 9'(i); pc_q = 2'(q); pc_wdata = pcm[i][128*q +: 128];
      end
    @(negedge clk); pc_we = 0;
  endtask
  task automatic compare(input string tag);
    int bad = 0;
    for (int i = 0; i < 1024; i++) if (mem[i] !== rmem[i]) begin
      if (bad < 3) $display("FAIL %s mem[%0d] %h exp %h", tag, i, mem[i], rmem[i]);
      bad++;
    end
    `CHECK(bad == 0, $sformatf("%s memory image (%0d words differ)", tag, bad))
    `CHECK(fin_a.size() == r_fin.size(), $sformatf("%s FIN count %0d exp %0d", tag, fin_a.size(), r_fin.size()))
    while (fin_a.size() > 0 && r_fin.size() > 0)
      `CHECK(fin_a.pop_front() == r_fin.pop_front(), $sformatf("%s FIN address", tag))
    for (int i = 0; i < 8; i++)
      `CHECK(perf[i] == r_cnt[i], $sformatf("%s perf[%0d] %0d exp %0d", tag, i, perf[i], r_cnt[i]))
  endtask

  function automatic vliw_t nop();
    return '0;
  endfunction

  logic [15:0] init [8];
  int t_fa, t_fin, lat;
  initial begin
    crf_we = 0; crf_addr = 0; crf_wdata = 0; ic_we = 0; ic_addr = 0; ic_wdata = 0;
    pc_we = 0; pc_addr = 0; pc_q = 0; pc_wdata = 0;
    for (int i = 0; i < 1024; i++) begin mem[i] = '0; rmem[i] = '0; end
    for (int i = 0; i < 8; i++) begin rdrf[i] = '0; init[i] = 0; end
    for (int i = 0; i < 10; i++) r_cnt[i] = 0;
    r_shift = 5; r_relu = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // ---------- 1. MLP 6-12-6-3-2 ----------
    // pCache: 6 weight words, small weights; unused inputs/lanes are zero
    for (int p = 0; p < 512; p++) pcm[p] = '0;
    for (int p = 0; p < 6; p++)
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < 8; i++) begin
          bit used;
          case (p)
            0: used = (i < 6);               // L1 neurons 0..7 from x[0..5]
            1: used = (i < 6) && (j < 4);    // L1 neurons 8..11
            2: used = (j < 6);               // L2 partial from h[0..7]
            3: used = (j < 6) && (i < 4);    // L2 partial from h[8..11]
            4: used = (j < 3) && (i < 6);    // L3 6 -> 3
            default: used = (j < 2) && (i < 3); // L4 3 -> 2 (sub-lane 0)
          endcase
          if (used) pcm[p][64*j + 8*i +: 8] = 8'($signed(int'($urandom % 31) - 15));
        end
    for (int i = 0; i < 1024; i++) prog[i] = '0;
    prog[0].mif = '{M_FA, 1'b0, 3'd0, 3'd0};                       // fa $0
    prog[1].mif = '{M_LD, 1'b0, 3'd0, 3'd0};                       // ld $v0, [$0]
    prog[2].simd = '{S_PRD, 1'b1, 3'd0, 1'b0, 1'b0, 3'd1};         // prd relu $v0 -> $v1
    prog[3].simd = '{S_PRD, 1'b1, 3'd0, 1'b0, 1'b0, 3'd2};         // prd relu $v0 -> $v2
    prog[4].simd = '{S_PRD, 1'b0, 3'd1, 1'b0, 1'b0, 3'd3};         // prd $v1 -> $v3
    prog[5].simd = '{S_PRD, 1'b0, 3'd2, 1'b0, 1'b0, 3'd4};         // prd $v2 -> $v4
    prog[6].vu   = '{V_ADD, 3'd3, 3'd4, 1'b0, 1'b0, 3'd5};         // vadd $v3, $v4 -> $v5
    prog[7].simd = '{S_PRD, 1'b1, 3'd5, 1'b0, 1'b0, 3'd6};         // prd relu $v5 -> $v6
    prog[8].simd = '{S_PRDS, 1'b0, 3'd6, 1'b1, 1'b1, 3'd1};        // prds $v6 -> [$1]++
    prog[8].ctl  = '{1'b1, 3'd1};                                  // fin $1
    load_prog(9); load_pcache(6);
    for (int f = 0; f < 12; f++) for (int i = 0; i < 16; i++)
      mem[16'h100 + f][8*i +: 8] = (i < 6) ? 8'($urandom % 128) : 8'd0;
    for (int i = 0; i < 1024; i++) rmem[i] = mem[i];
    crf(2, 0); crf(3, 0); crf(4, 5); crf(9, 16'h200);
    init[1] = 16'h200;
    // first inference with an always-granting memory, for the latency figure
    allow_deny = 0;
    @(negedge clk); crf(0, 1);
    repeat (20) @(posedge clk);
    `CHECK(busy && perf[8] > 10, "fa waits for a ready flow")
    @(negedge clk); faq.push_back(16'h100); r_faq.push_back(16'h100); t_fa = $time;
    void'(ref_run(0, 0, init));
    wait (n_fin == 1); t_fin = $time;
    lat = (t_fin - t_fa) / 10;
    $display("MLP inference latency: %0d cycles", lat);
    `CHECK(lat <= 46, $sformatf("MLP latency %0d cycles within 46", lat))
    @(negedge clk); @(negedge clk);
    `CHECK(!busy, "idle after FIN")
    compare("mlp1");
    // auto-restart over 11 more flows with random gaps and grant stalls
    allow_deny = 1;
    crf(0, 3);
    for (int f = 1; f < 12; f++) begin
      repeat ($urandom % 60) @(negedge clk);
      faq.push_back(16'h100 + 16'(f)); r_faq.push_back(16'h100 + 16'(f));
    end
    for (int f = 1; f < 12; f++) void'(ref_run(0, 0, init));
    wait (n_fin == 12);
    crf(0, 0);
    repeat (40) @(posedge clk);
    `CHECK(busy, "auto mode waits in fa for the next flow")
    faq.push_back(16'h10C); r_faq.push_back(16'h10C);
    void'(ref_run(0, 0, init));
    wait (n_fin == 13); @(negedge clk); @(negedge clk);
    `CHECK(!busy, "stops after auto mode cleared")
    compare("mlp");
    `CHECK(fin_irq, "FIN flag")

    // ---------- 2. random programs ----------
    for (int run = 0; run < 30; run++) begin
      int n = 10 + $urandom % 40;
      for (int p = 0; p < 512; p++) pcm[p] = {16{$urandom}};
      for (int i = 0; i < n; i++) begin
        vliw_t w = '0;
        if ($urandom % 3 != 0) begin
          w.simd.op = ($urandom % 2) ? S_PRD : S_PRDS; w.simd.relu = 1'($urandom);
          w.simd.src = 3'($urandom); w.simd.dmem = 1'($urandom % 4 == 0); w.simd.dinc = 1'($urandom);
          w.simd.dst = w.simd.dmem ? 3'(4 + $urandom % 4) : 3'($urandom);
        end
        if ($urandom % 2) begin
          w.vu.op = ($urandom % 2) ? V_ADD : V_EM; w.vu.srca = 3'($urandom); w.vu.srcb = 3'($urandom);
          w.vu.dmem = 1'($urandom % 4 == 0); w.vu.dinc = 1'($urandom);
          w.vu.dst = w.vu.dmem ? 3'(4 + $urandom % 4) : 3'($urandom);
        end
        if ($urandom % 2) begin
          w.mif.op = M_LD; w.mif.ainc = 1'($urandom); w.mif.adr = 3'($urandom % 4); w.mif.dst = 3'($urandom);
        end
        prog[i] = w;
      end
      // flush dRf to memory through VU, then fin
      for (int r = 0; r < 8; r++) begin
        prog[n + r] = '0;
        prog[n + r].vu = '{V_ADD, 3'(r), 3'(r), 1'b1, 1'b1, 3'd7};
      end
      prog[n + 7].ctl = '{1'b1, 3'(4 + $urandom % 4)};
      load_prog(n + 8); load_pcache(512);
      for (int i = 0; i < 4; i++) init[i] = 16'(16 * i + 512);
      for (int i = 4; i < 7; i++) init[i] = 16'(64 * i);
      init[7] = 16'h300;
      for (int i = 0; i < 8; i++) crf(8 + i, init[i]);
      r_shift = $urandom % 8; crf(4, r_shift);
      crf(3, 0);
      for (int i = 512; i < 600; i++) mem[i] = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 1024; i++) rmem[i] = mem[i];
      void'(ref_run(0, 0, init));
      @(negedge clk); crf(0, 1);
      wait (n_fin == 14 + run); @(negedge clk); @(negedge clk);
      compare($sformatf("random%0d", run));
    end
    `CHECK(perf[9] > 0, "memory grant stalls exercised")
    `TB_FINISH
  end
endmodule
