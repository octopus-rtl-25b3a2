// Testbench of feature_extractor (64 flows, 2-entry FIFOs) with a
// tdp_ram as feature memory. A reference model of the flow table, the ALU
// micro-ops, the FIFOs and FIN recycling predicts every feature word, every
// ready-flow address and every freed address. Covers new/hit flows,
// interval derivation, threshold and freezing, frozen-packet drops, full
// FIFOs, FIN release, payload mode, and the 4-cycle packet rate.
`include "tb_util.svh"
`include "tb_pkt_lib.svh"
module tb_feature_extractor;
  import octopus_pkg::*;
  localparam int AW = 6, FD = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(200000)

  logic pkt_vld, pkt_ready, cfg_we, fm_en, fm_we, rdy_vld, rdy_pop, fin, dec_vld, init_busy;
  pkt_t pkt; logic [4:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata;
  logic [AW-1:0] fm_addr; fword_t fm_wdata, fm_rdata;
  logic [15:0] rdy_addr, dec_addr;
  logic [31:0] n_pkt, n_new, n_drop, n_ready, n_full;
  logic b_en; logic [AW-1:0] b_addr; logic [127:0] b_rdata;

  feature_extractor #(.AW(AW), .FIFO_DEPTH(FD)) dut (.clk, .rst_n, .pkt_vld, .pkt_ready, .pkt,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .fm_en, .fm_we, .fm_addr, .fm_wdata, .fm_rdata,
    .rdy_vld, .rdy_addr, .rdy_pop, .fin_vpe(fin), .fin_ary(1'b0), .dec_vld, .dec_addr, .init_busy,
    .n_pkt, .n_new, .n_frozen_drop(n_drop), .n_ready, .n_fifo_full(n_full));

  tdp_ram #(.W(128), .DEPTH(64)) fmem (.clk, .a_en(fm_en), .a_we(fm_we), .a_addr(fm_addr),
    .a_wdata(fm_wdata), .a_rdata(fm_rdata), .b_en, .b_we(1'b0), .b_addr, .b_wdata('0), .b_rdata);

  // -------- reference model --------
  function automatic logic [AW-1:0] ref_hash(tuple_t tu);
    logic [15:0] crc = 16'hFFFF; logic [103:0] v = tu;
    for (int i = 0; i < 13; i++) begin
      crc = crc ^ {v[103 - 8*i -: 8], 8'h00};
      for (int b = 0; b < 8; b++) crc = crc[15] ? ((crc << 1) ^ 16'h1021) : (crc << 1);
    end
    return crc[AW-1:0] ^ AW'(crc >> AW);
  endfunction

  alu_cfg_t cfgs [16];
  int cnt [64]; int lts [64]; bit frz [64]; fword_t word [64];
  int rdyq [$]; int infq [$];
  int thresh = 3;
  bit pay_mode = 0; int pay_shift = 0;

  function automatic fword_t alu_model(fword_t h, meta_t m, bit dir, int pidx);
    fword_t o;
    for (int i = 0; i < 16; i++) begin
      int a = h[cfgs[i].hsel], b = (cfgs[i].msel < 13) ? m[cfgs[i].msel] : 0, r = h[i];
      if (!cfgs[i].cond_en || cfgs[i].cond_dir == dir)
        case (cfgs[i].op)
          ALU_ADD: r = (a + b > 255) ? 255 : a + b;
          ALU_SUB: r = (a > b) ? a - b : 0;
          ALU_MAX: r = (a > b) ? a : b;
          ALU_MIN: r = (a < b) ? a : b;
          ALU_WR:  r = b;
          ALU_WRI: if (pidx == int'(cfgs[i].hsel)) r = b;
          default: r = h[i];
        endcase
      o[i] = 8'(r);
    end
    return o;
  endfunction

  task automatic wcfg(input int a, input int v);
    @(negedge clk); cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = 32'(v);
    @(negedge clk); cfg_we = 0;
  endtask

  tuple_t flows [4];
  logic [AW-1:0] faddr [4];

  // send one packet of flow f and update the model
  task automatic send(input int f, input int ts, input int len, input bit dir);
    pkt_t p; meta_t m; int a, intv; bit is_new;
    p = mk_pkt(flows[f].src_ip, flows[f].dst_ip, flows[f].sport, flows[f].dport, 6, 8'h12, 0,
               16'(len), 32'(ts), dir, 8'(f * 16));
    @(negedge clk); pkt_vld = 1; pkt = p;
    do @(posedge clk); while (!pkt_ready);
    @(negedge clk); pkt_vld = 0;
    a = int'(faddr[f]) & ((1 << (AW - pay_shift)) - 1);
    if (frz[a] && cnt[a] != 0) return;
    is_new = (cnt[a] == 0);
    intv = is_new ? 0 : ((ts - lts[a]) > 255 ? 255 : ts - lts[a]);
    m = '0;
    m[M_SIZE_L] = 8'(len); m[M_SIZE_H] = 8'(len >> 8); m[M_DIR] = 8'(dir); m[M_FLAG] = 8'h12;
    m[M_PROTO] = 6; m[M_ONE] = 1; m[M_SIZE16] = (len >> 4) > 255 ? 8'd255 : 8'(len >> 4);
    m[M_INTV] = 8'(intv); m[M_TTL] = 64; m[M_SPORT_L] = flows[f].sport[7:0];
    m[M_DPORT_L] = flows[f].dport[7:0]; m[M_TOS] = 8'h10; m[M_PKTIDX] = 8'(cnt[a]);
    if (!pay_mode) word[a] = alu_model(is_new ? '0 : word[a], m, dir, cnt[a]);
    cnt[a]++; lts[a] = ts;
    if (cnt[a] >= thresh && rdyq.size() < FD && infq.size() < FD) begin
      frz[a] = 1; rdyq.push_back(a << pay_shift); infq.push_back(a << pay_shift);
    end
    repeat (4) @(posedge clk);
  endtask

  task automatic check_word(input int waddr, input fword_t exp, input string what);
    @(negedge clk); b_en = 1; b_addr = AW'(waddr);
    @(negedge clk); b_en = 0;
    `CHECK(b_rdata == exp, $sformatf("%s word %0d: %h exp %h", what, waddr, b_rdata, exp))
  endtask

  task automatic pop_ready();
    `CHECK(rdy_vld == (rdyq.size() > 0), "rdy_vld")
    if (rdyq.size() > 0) begin
      `CHECK(rdy_addr == 16'(16'h8000 | rdyq[0]), $sformatf("rdy_addr %h exp %h", rdy_addr, rdyq[0]))
      @(negedge clk); rdy_pop = 1; @(negedge clk); rdy_pop = 0;
      void'(rdyq.pop_front());
    end
  endtask

  int n_dec = 0; int exp_dec [$];
  always @(posedge clk) if (dec_vld) begin
    n_dec++;
    if (exp_dec.size() == 0) begin failures++; $display("FAIL unexpected dec %0t %h", $time, dec_addr); end
    else begin
      checks++;
      if (dec_addr != 16'(16'h8000 | exp_dec[0])) begin failures++; $display("FAIL dec_addr %h", dec_addr); end
      void'(exp_dec.pop_front());
    end
  end

  task automatic do_fin();
    int a = infq.pop_front();
    exp_dec.push_back(a);
    @(negedge clk); fin = 1; @(negedge clk); fin = 0;
    repeat (3) @(posedge clk);
    cnt[a >> pay_shift] = 0; frz[a >> pay_shift] = 0;
  endtask

  int t0, t1;
  initial begin
    pkt_vld = 0; pkt = '0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; rdy_pop = 0; fin = 0; b_en = 0; b_addr = 0;
    for (int i = 0; i < 64; i++) begin cnt[i] = 0; lts[i] = 0; frz[i] = 0; word[i] = '0; end
    // four flows with distinct addresses
    for (int f = 0; f < 4; f++) begin
      bit ok;
      do begin
        flows[f] = {$urandom, $urandom, 16'($urandom), 16'($urandom), 8'd6};
        faddr[f] = ref_hash(flows[f]);
        ok = 1;
        for (int g = 0; g < f; g++) if (faddr[g] == faddr[f]) ok = 0;
      end while (!ok);
    end
    repeat (2) @(posedge clk); rst_n = 1;
    wait (!init_busy);
    for (int i = 0; i < 16; i++) cfgs[i] = '0;
    cfgs[0] = '{0, 0, ALU_ADD, 4'd0, 4'(M_INTV)};    // flow duration
    cfgs[1] = '{0, 0, ALU_ADD, 4'd1, 4'(M_ONE)};     // packet count
    cfgs[2] = '{0, 0, ALU_MAX, 4'd2, 4'(M_SIZE16)};  // max packet length
    cfgs[3] = '{0, 0, ALU_WRI, 4'd0, 4'(M_SIZE16)};  // size vector
    cfgs[4] = '{0, 0, ALU_WRI, 4'd1, 4'(M_SIZE16)};
    cfgs[5] = '{0, 0, ALU_WRI, 4'd2, 4'(M_SIZE16)};
    cfgs[6] = '{1, 1, ALU_ADD, 4'd6, 4'(M_ONE)};     // packets in direction 1
    cfgs[7] = '{0, 0, ALU_WR,  4'd0, 4'(M_FLAG)};
    cfgs[8] = '{0, 0, ALU_MIN, 4'd8, 4'(M_INTV)};
    cfgs[9] = '{0, 0, ALU_SUB, 4'd9, 4'(M_ONE)};
    for (int i = 0; i < 16; i++) wcfg(16 + i, int'(cfgs[i]));
    wcfg(0, thresh);
    wcfg(16 + 3, 32'(cfgs[3])); 
    @(negedge clk); cfg_addr = 5'd19; #1;
    `CHECK(cfg_rdata == 32'(cfgs[3]), "cfg readback")

    // phase 1: random traffic, pops and FINs
    for (int n = 0; n < 120; n++) begin
      automatic int f = $urandom % 4;
      send(f, n * 37 + int'($urandom % 30), 64 + int'($urandom % 1400), 1'($urandom));
      check_word(int'(faddr[f]), word[int'(faddr[f])], "alu");
      if ($urandom % 3 == 0) pop_ready();
      if ($urandom % 4 == 0 && infq.size() > 0 && infq.size() > rdyq.size()) do_fin();
    end
    while (rdyq.size() > 0) pop_ready();
    while (infq.size() > 0) do_fin();
    // three flows reach the threshold with no pops: the third finds the FIFOs full
    for (int f = 0; f < 3; f++)
      for (int k = 0; k < 3; k++) begin
        send(f, 10000 + f * 100 + k, 100, 0);
        check_word(int'(faddr[f]), word[int'(faddr[f])], "full");
      end
    `CHECK(infq.size() == FD, "model FIFOs full")
    while (rdyq.size() > 0) pop_ready();
    while (infq.size() > 0) do_fin();
    `CHECK(n_dec > 5 && exp_dec.size() == 0, "all FINs freed flows")
    `CHECK(n_new > 10, "new flows seen")
    `CHECK(n_drop > 0, "frozen packets dropped")
    `CHECK(n_full > 0, $sformatf("full FIFOs seen %0d ready %0d drop %0d", n_full, n_ready, n_drop))
    `CHECK(n_ready > 5, "ready flows")

    // phase 2: throughput, 8 back-to-back packets of distinct flows (model not used)
    @(negedge clk); pkt_vld = 1; pkt = mk_pkt(9, 9, 9, 9, 17, 0, 0, 100, 0, 0, 0);
    @(posedge clk); while (!pkt_ready) @(posedge clk);
    t0 = n_pkt;
    repeat (32) @(posedge clk);
    t1 = n_pkt;
    @(negedge clk); pkt_vld = 0;
    `CHECK(t1 - t0 == 8, $sformatf("4 cycles per packet: %0d packets in 32 cycles", t1 - t0))
    repeat (8) @(posedge clk);

    // phase 3: payload mode, 4 words per flow, top-4 packets
    for (int i = 0; i < 64; i++) begin cnt[i] = 0; frz[i] = 0; end
    rst_n = 0; @(negedge clk); rst_n = 1; wait (!init_busy);
    rdyq.delete(); infq.delete();
    pay_mode = 1; pay_shift = 2; thresh = 4;
    wcfg(0, 4); wcfg(2, (2 << 1) | 1); wcfg(3, 16);
    for (int k = 0; k < 4; k++) send(1, k * 5, 200, 0);
    for (int k = 0; k < 4; k++) begin
      fword_t e;
      for (int i = 0; i < 16; i++) e[i] = 8'(16 + i);
      check_word((int'(faddr[1]) & 15) * 4 + k, e, "payload");
    end
    `CHECK(rdy_vld && rdy_addr == 16'(16'h8000 | ((int'(faddr[1]) & 15) * 4)), "payload flow ready")
    `TB_FINISH
  end
endmodule
