// Vector process element (VPE): the low-latency engine for packet-based
// models.
//
// Structure (Fig. 5a of the paper): iCache of VLIW words, pCache of
// read-only parameters, data register file dRf ($v0..$v7, 16 Int-8 each),
// address register file adRf ($0..$7, unified word addresses), SIMDU
// (LANES lanes of two four-wide sub-lanes), VU (UNITS adders/multipliers),
// Mif with two memory ports and the ready-flow address input, and CtrlRf to
// the control domain. A VLIW word (octopus_pkg::vliw_t) has the paper's
// four fields, one per function module, all issued together:
//   SIMDU: prd / prds  src dRf -> dst dRf, or memory at adRf[dst]
//   VU:    vadd / vem  srca, srcb dRf -> dst dRf, or memory at adRf[dst]
//   Mif:   fa  adRf[adr] <= next ready feature address (waits for one)
//          ld  dRf[dst] <= memory[adRf[adr]] (optional post-increment)
//   CtrlRf: fin  raise FIN, report adRf[radr] as result address, stop
//               (or restart at START_PC in auto-restart mode)
// Each prd/prds implicitly consumes the next pCache word, starting at
// PBASE, as the paper describes parameters being sent to SIMDU while an
// instruction is decoded.
//
// Timing: one VLIW word takes three cycles (DEC: operands read, Mif
// request, SIMDU/VU start; EX: pipelines and load return; WB: write-back
// and next fetch), plus one per memory store and any cycles spent waiting
// for a feature address or a memory grant. All fields of a word read the
// dRf/adRf values from before the word; writes land at the end of WB in the
// order SIMDU, VU, Mif (a later one wins on the same register); the adRf
// update of fa or of a load post-increment happens in DEC, so the store and
// FIN addresses of the same word already see it. Memory port
// 0 carries loads, port 1 stores, so a load and a store in different banks
// proceed in parallel (ping-pong). Field encodings, the three-cycle schedule
// and the store ordering are this design's choices.
//
// perf counters: 0 prd, 1 prds, 2 vadd, 3 vem, 4 ld, 5 fa, 6 stores,
// 7 fin, 8 cycles waiting for fa, 9 cycles waiting for a memory grant.
module vpe
  import octopus_pkg::*;
#(
  parameter int LANES    = 8,
  parameter int UNITS    = 8,
  parameter int IC_DEPTH = 1024,
  parameter int PC_DEPTH = 512,
  localparam int IAW     = $clog2(IC_DEPTH),
  localparam int PAW     = $clog2(PC_DEPTH),
  localparam int NQ      = LANES * 64 / WORD_W,
  localparam int QW      = (NQ > 1) ? $clog2(NQ) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // control domain
  input  logic               crf_we,
  input  logic [4:0]         crf_addr,
  input  logic [31:0]        crf_wdata,
  output logic [31:0]        crf_rdata,
  input  logic               ic_we,
  input  logic [IAW-1:0]     ic_addr,
  input  logic [VLIW_W-1:0]  ic_wdata,
  input  logic               pc_we,
  input  logic [PAW-1:0]     pc_addr,
  input  logic [QW-1:0]      pc_q,
  input  logic [WORD_W-1:0]  pc_wdata,
  output logic               fin,
  output logic               fin_irq,
  output logic               busy,
  // memory fabric: [0] loads, [1] stores
  output mem_req_t [1:0]     mreq,
  input  logic     [1:0]     mgnt,
  input  logic     [1:0][WORD_W-1:0] mrdata,
  // ready-flow address from the feature extractor
  input  logic               fa_vld,
  input  logic [MADDR_W-1:0] fa_addr,
  output logic               fa_pop,
  output logic [9:0][31:0]   perf
);

  // ---------------- CtrlRf ----------------
  logic        c_start, c_auto, c_relu;
  logic [15:0] c_start_pc, c_pbase, fin_addr;
  logic [4:0]  c_shift;
  logic [7:0][15:0] c_adrf;

  ctrl_rf u_ctrl (
    .clk, .rst_n, .we(crf_we), .addr(crf_addr), .wdata(crf_wdata), .rdata(crf_rdata),
    .start(c_start), .auto_mode(c_auto), .start_pc(c_start_pc), .pbase(c_pbase),
    .shift(c_shift), .relu(c_relu), .adrf_init(c_adrf),
    .busy, .fin, .fin_addr, .fin_flag(fin_irq)
  );

  // ---------------- caches ----------------
  typedef enum logic [2:0] {IDLE, FETCH, DEC, EX, WB} st_e;
  st_e st;

  logic [IAW-1:0] pc;
  logic [PAW-1:0] pptr;
  logic           fetch_en;
  logic [IAW-1:0] fetch_addr;
  logic [VLIW_W-1:0] ic_rdata;
  vliw_t          ir;
  logic [NQ-1:0][WORD_W-1:0] prm;

  sdp_ram #(.W(VLIW_W), .DEPTH(IC_DEPTH)) u_icache (
    .clk, .we(ic_we), .waddr(ic_addr), .wdata(ic_wdata),
    .rd_en(fetch_en), .raddr(fetch_addr), .rdata(ic_rdata)
  );
  assign ir = vliw_t'(ic_rdata);

  for (genvar q = 0; q < NQ; q++) begin : g_pcache
    sdp_ram #(.W(WORD_W), .DEPTH(PC_DEPTH)) u_pcache (
      .clk, .we(pc_we && (pc_q == QW'(q))), .waddr(pc_addr), .wdata(pc_wdata),
      .rd_en(fetch_en), .raddr(pptr), .rdata(prm[q])
    );
  end

  // ---------------- register files ----------------
  fword_t                 drf  [N_DRF];
  logic [MADDR_W-1:0]     adrf [N_ADRF];

  // ---------------- function units ----------------
  logic   mif_ok, issue;
  logic   s_vld, s_out_vld, v_start, v_done;
  fword_t s_res, v_res, ld_q;
  fword_t s_src;

  assign s_src = drf[ir.simd.src];

  always_comb begin
    unique case (ir.mif.op)
      M_FA:    mif_ok = fa_vld;
      M_LD:    mif_ok = mgnt[0];
      default: mif_ok = 1'b1;
    endcase
  end
  assign issue   = (st == DEC) && mif_ok;
  assign s_vld   = issue && (ir.simd.op != S_NOP);
  assign v_start = issue && (ir.vu.op != V_NOP);
  assign fa_pop  = issue && (ir.mif.op == M_FA);

  simdu #(.LANES(LANES)) u_simdu (
    .clk, .rst_n, .vld(s_vld), .split(ir.simd.op == S_PRDS), .relu(ir.simd.relu),
    .shift(c_shift), .data(s_src[7:0]), .param(prm), .out_vld(s_out_vld), .result(s_res)
  );

  vu #(.UNITS(UNITS)) u_vu (
    .clk, .rst_n, .start(v_start), .op(ir.vu.op), .shift(c_shift),
    .a(drf[ir.vu.srca]), .b(drf[ir.vu.srcb]), .done(v_done), .result(v_res)
  );

  // ---------------- Mif ----------------
  logic s_st_need, v_st_need, wb_ph, wb_done;
  assign s_st_need = (ir.simd.op != S_NOP) && ir.simd.dmem;
  assign v_st_need = (ir.vu.op != V_NOP) && ir.vu.dmem;

  always_comb begin
    mreq[0]       = '0;
    mreq[0].vld   = (st == DEC) && (ir.mif.op == M_LD);
    mreq[0].addr  = adrf[ir.mif.adr];
    mreq[1]       = '0;
    mreq[1].we    = 1'b1;
    if (st == WB) begin
      if (!wb_ph && s_st_need) begin
        mreq[1].vld = 1'b1; mreq[1].addr = adrf[ir.simd.dst]; mreq[1].wdata = s_res;
      end else if (v_st_need) begin
        mreq[1].vld = 1'b1; mreq[1].addr = adrf[ir.vu.dst]; mreq[1].wdata = v_res;
      end
    end
  end

  // WB completes when the store that is due (if any) is granted and no
  // other store follows
  always_comb begin
    wb_done = 1'b0;
    if (st == WB) begin
      if (!wb_ph && s_st_need) wb_done = mgnt[1] && !v_st_need;
      else if (v_st_need)      wb_done = mgnt[1];
      else                     wb_done = 1'b1;
    end
  end

  logic last;
  assign last = ir.ctl.fin;
  assign fetch_en   = (st == FETCH) || (wb_done && !last);
  assign fetch_addr = (st == FETCH) ? pc : pc + 1'b1;
  assign busy       = (st != IDLE);
  assign fin_addr   = adrf[ir.ctl.radr];
  assign fin        = wb_done && last;

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; pc <= '0; pptr <= '0; wb_ph <= 1'b0; ld_q <= '0; perf <= '0;
      for (int i = 0; i < N_DRF; i++)  drf[i]  <= '0;
      for (int i = 0; i < N_ADRF; i++) adrf[i] <= '0;
    end else begin
      unique case (st)
        IDLE: if (c_start) begin
          pc   <= IAW'(c_start_pc);
          pptr <= PAW'(c_pbase);
          for (int i = 0; i < N_ADRF; i++) adrf[i] <= c_adrf[i];
          st   <= FETCH;
        end
        FETCH: st <= DEC;
        DEC: begin
          if (issue) begin
            if (ir.simd.op != S_NOP) pptr <= pptr + 1'b1;
            if (ir.mif.op == M_FA) begin adrf[ir.mif.adr] <= fa_addr; perf[5] <= perf[5] + 1; end
            if (ir.mif.op == M_LD) begin
              if (ir.mif.ainc) adrf[ir.mif.adr] <= adrf[ir.mif.adr] + 1'b1;
              perf[4] <= perf[4] + 1;
            end
            if (ir.simd.op == S_PRD)  perf[0] <= perf[0] + 1;
            if (ir.simd.op == S_PRDS) perf[1] <= perf[1] + 1;
            if (ir.vu.op == V_ADD)    perf[2] <= perf[2] + 1;
            if (ir.vu.op == V_EM)     perf[3] <= perf[3] + 1;
            st <= EX;
          end else if (ir.mif.op == M_FA) perf[8] <= perf[8] + 1;
          else                            perf[9] <= perf[9] + 1;
        end
        EX: begin
          if (ir.mif.op == M_LD) ld_q <= mrdata[0];
          wb_ph <= 1'b0;
          st    <= WB;
        end
        WB: begin
          if (mreq[1].vld) begin
            if (mgnt[1]) perf[6] <= perf[6] + 1;
            else         perf[9] <= perf[9] + 1;
          end
          if (!wb_ph && s_st_need && mgnt[1]) wb_ph <= 1'b1;
          if (wb_done) begin
            if (ir.simd.op != S_NOP) begin
              if (!ir.simd.dmem)     drf[ir.simd.dst]  <= s_res;
              else if (ir.simd.dinc) adrf[ir.simd.dst] <= adrf[ir.simd.dst] + 1'b1;
            end
            if (ir.vu.op != V_NOP) begin
              if (!ir.vu.dmem)       drf[ir.vu.dst]    <= v_res;
              else if (ir.vu.dinc)   adrf[ir.vu.dst]   <= adrf[ir.vu.dst] + 1'b1;
            end
            if (ir.mif.op == M_LD)   drf[ir.mif.dst]   <= ld_q;
            if (last) begin
              perf[7] <= perf[7] + 1;
              if (c_auto) begin
                pc   <= IAW'(c_start_pc);
                pptr <= PAW'(c_pbase);
                for (int i = 0; i < N_ADRF; i++) adrf[i] <= c_adrf[i];
                st   <= FETCH;
              end else st <= IDLE;
            end else begin
              pc <= pc + 1'b1;
              st <= DEC;
            end
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  // the SIMDU and VU results are ready when write-back starts
  a_simd_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (st == EX && ir.simd.op != S_NOP) |=> s_out_vld);
  a_vu_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (st == EX && ir.vu.op != V_NOP) |=> v_done);

endmodule
