// Feature extractor: the feature extracting domain of Octopus.
//
// For each packet from the switch fabric it parses the header (fe_parser),
// hashes the 5-tuple to a flow address (flow_hash), looks the flow up in the
// flow tracker, pre-fetches the flow's previous feature word from feature
// memory into the history register, derives pkt_arv_intv from the last
// timestamp (0 for a new flow), updates the feature word with the 16-ALU
// cluster (or takes the payload register in payload mode) and writes it back
// to feature memory. A flow whose packet count reaches the configured
// threshold is pushed into the ready-flow address FIFO (popped by the
// computing domain) and the in-flight FIFO, and frozen. Each FIN pulse from
// the computing domain pops the in-flight FIFO, frees that flow in the
// tracker and hands its address to the control domain (dec_vld/dec_addr).
//
// Timing: one packet every 4 cycles (S_ACC accept + lookup issue, S_LKP
// tracker/history result, S_ALU update, S_WR write-back and FIFO push),
// i.e. 31.25 Mpkt/s at the paper's 125 MHz, matching its 31 Mpkt/s.
// pkt_ready is high in S_ACC. Feature memory port: fm_en/fm_we/fm_addr/
// fm_wdata, read data on fm_rdata one cycle after fm_en. Addresses leaving
// the block (rdy_addr, dec_addr) are unified word addresses (0x8000 +
// feature memory word).
//
// Control register (cfg_* port, written by the control domain):
//   0 thresh (top-n)   1 ts_shift (interval = (ts-last) >> ts_shift,
//   saturated to 8 bits)   2 {pay_shift[3:1], payload_mode[0]}
//   3 payload length (bytes)   4 FIN source {AryPE[1], VPE[0]} (reset 01)
//   16..31 ALU i micro-op (alu_cfg_t).
// In payload mode a flow owns 2^pay_shift consecutive feature words and
// packet k of the flow writes word k (top-k payload slices). The 4-stage
// schedule, register map, payload-mode layout and FIFO depths are this
// design's choices; the data flow follows Fig. 4 of the paper.
module feature_extractor
  import octopus_pkg::*;
#(
  parameter int AW         = FLOW_AW,
  parameter int FIFO_DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  // packets from the switch fabric
  input  logic               pkt_vld,
  output logic               pkt_ready,
  input  pkt_t               pkt,
  // control register port
  input  logic               cfg_we,
  input  logic [4:0]         cfg_addr,
  input  logic [31:0]        cfg_wdata,
  output logic [31:0]        cfg_rdata,
  // feature memory port
  output logic               fm_en,
  output logic               fm_we,
  output logic [AW-1:0]      fm_addr,
  output fword_t             fm_wdata,
  input  fword_t             fm_rdata,
  // ready-flow address FIFO to the computing domain
  output logic               rdy_vld,
  output logic [MADDR_W-1:0] rdy_addr,
  input  logic               rdy_pop,
  // FIN from the computing domain, freed flow to the control domain
  input  logic               fin_vpe,
  input  logic               fin_ary,
  output logic               dec_vld,
  output logic [MADDR_W-1:0] dec_addr,
  // status
  output logic               init_busy,
  output logic [31:0]        n_pkt,
  output logic [31:0]        n_new,
  output logic [31:0]        n_frozen_drop,
  output logic [31:0]        n_ready,
  output logic [31:0]        n_fifo_full
);

  // ---------------- control register ----------------
  logic [7:0]             thresh;
  logic [4:0]             ts_shift;
  logic                   pay_mode;
  logic [2:0]             pay_shift;
  logic [4:0]             pay_cfg_len;
  alu_cfg_t [N_ALU-1:0]   alu_cfg;
  logic [1:0]             fin_src;
  logic                   fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thresh <= 8'd1; ts_shift <= '0; pay_mode <= 1'b0; pay_shift <= '0;
      pay_cfg_len <= 5'd16; alu_cfg <= '0; fin_src <= 2'b01;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        5'd0: thresh      <= cfg_wdata[7:0];
        5'd1: ts_shift    <= cfg_wdata[4:0];
        5'd2: begin pay_mode <= cfg_wdata[0]; pay_shift <= (cfg_wdata[3:1] > 3'd4) ? 3'd4 : cfg_wdata[3:1]; end
        5'd3: pay_cfg_len <= (cfg_wdata[4:0] > 5'd16) ? 5'd16 : cfg_wdata[4:0];
        5'd4: fin_src     <= cfg_wdata[1:0];
        default: if (cfg_addr[4]) alu_cfg[cfg_addr[3:0]] <= cfg_wdata[$bits(alu_cfg_t)-1:0];
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    unique case (cfg_addr)
      5'd0: cfg_rdata = {24'd0, thresh};
      5'd1: cfg_rdata = {27'd0, ts_shift};
      5'd2: cfg_rdata = {28'd0, pay_shift, pay_mode};
      5'd3: cfg_rdata = {27'd0, pay_cfg_len};
      5'd4: cfg_rdata = {30'd0, fin_src};
      default: if (cfg_addr[4]) cfg_rdata = 32'(alu_cfg[cfg_addr[3:0]]);
    endcase
  end

  assign fin = (fin_src[0] && fin_vpe) || (fin_src[1] && fin_ary);

  // ---------------- parse and hash (combinational, S_ACC) ----------------
  tuple_t        p_tuple;
  logic [47:0]   p_mac;
  meta_t         p_meta;
  logic          p_is_ip;
  logic [7:0]    p_pay_off;
  logic [15:0]   p_pay_len;
  logic [AW-1:0] p_hash;

  fe_parser u_parser (
    .pkt(pkt), .tuple(p_tuple), .src_mac(p_mac), .meta(p_meta), .is_ip(p_is_ip),
    .pay_off(p_pay_off), .pay_len(p_pay_len)
  );

  flow_hash #(.AW(AW)) u_hash (.tuple(p_tuple), .addr(p_hash));

  // flow index in the tracker and base word in feature memory
  logic [AW-1:0] idx_mask, p_flow, p_base;
  assign idx_mask = {AW{1'b1}} >> pay_shift;
  assign p_flow   = p_hash & idx_mask;
  assign p_base   = p_flow << pay_shift;

  // ---------------- state ----------------
  typedef enum logic [2:0] {S_INIT, S_ACC, S_LKP, S_ALU, S_WR} st_e;
  st_e st;

  logic          accept;
  logic [AW-1:0] flow_q, base_q, waddr_q;
  logic [31:0]   ts_q;
  logic          dir_q;
  meta_t         meta_r;        // meta register
  fword_t        hist_r;        // history register
  fword_t        out_r;         // ALU cluster output register
  logic          drop_q, push_q;
  logic [7:0]    fin_pend;

  // flow tracker
  logic          t_st_vld, t_new, t_frozen, t_reach, t_push, t_commit, t_rel;
  logic [31:0]   t_last_ts;
  logic [7:0]    t_pkt_idx;
  logic [AW-1:0] t_rel_addr;
  logic          fifo_ok;

  // FIFOs
  logic          rf_empty, rf_full, if_empty, if_full, if_pop, fifo_push;
  logic [AW-1:0] rf_head, if_head;
  fword_t        pay_q;

  assign accept = (st == S_ACC) && pkt_vld;
  assign pkt_ready = (st == S_ACC);

  flow_tracker #(.AW(AW)) u_tracker (
    .clk, .rst_n, .init_busy, .thresh,
    .lk_vld(accept), .lk_addr(p_flow), .lk_ts(pkt.ts), .lk_mac(p_mac),
    .st_vld(t_st_vld), .st_new(t_new), .st_frozen(t_frozen), .st_last_ts(t_last_ts),
    .st_pkt_idx(t_pkt_idx), .st_reach(t_reach),
    .commit(t_commit), .fifo_ok, .push(t_push),
    .rel_vld(t_rel), .rel_addr(t_rel_addr)
  );

  assign t_commit = (st == S_LKP);
  assign fifo_ok  = !rf_full && !if_full;

  // release: in S_ACC when no packet is accepted, or in S_WR
  assign t_rel      = (fin_pend != 0) && !if_empty && ((st == S_ACC && !pkt_vld) || st == S_WR);
  assign t_rel_addr = (if_head >> pay_shift) & idx_mask;
  assign if_pop     = t_rel;
  assign dec_vld    = t_rel;
  assign dec_addr   = MADDR_W'(16'h8000 | 16'(if_head));

  payload_reg u_payload (
    .clk, .rst_n, .load(accept), .pkt, .pay_off(p_pay_off), .pay_len(p_pay_len),
    .cfg_len(pay_cfg_len), .q(pay_q)
  );

  fword_t alu_out;
  alu_cluster u_alu (
    .hist(hist_r), .meta(meta_r), .cfg(alu_cfg), .dir(dir_q), .pkt_idx(meta_r[M_PKTIDX]),
    .out(alu_out)
  );

  // interval from the last timestamp
  logic [31:0] dts;
  logic [7:0]  intv;
  always_comb begin
    dts  = (ts_q - t_last_ts) >> ts_shift;
    intv = (dts > 32'd255) ? 8'd255 : dts[7:0];
  end

  // feature memory port
  assign fm_en    = accept || (st == S_WR && !drop_q);
  assign fm_we    = (st == S_WR) && !drop_q;
  assign fm_addr  = (st == S_WR) ? waddr_q : p_base;
  assign fm_wdata = pay_mode ? pay_q : out_r;

  assign fifo_push = (st == S_WR) && push_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_INIT;
      flow_q <= '0; base_q <= '0; waddr_q <= '0; ts_q <= '0; dir_q <= 1'b0;
      meta_r <= '0; hist_r <= '0; out_r <= '0; drop_q <= 1'b0; push_q <= 1'b0;
      fin_pend <= '0;
      n_pkt <= '0; n_new <= '0; n_frozen_drop <= '0; n_ready <= '0; n_fifo_full <= '0;
    end else begin
      fin_pend <= fin_pend + ((fin && fin_pend != 8'hFF) ? 8'd1 : 8'd0) - (t_rel ? 8'd1 : 8'd0);
      unique case (st)
        S_INIT: if (!init_busy) st <= S_ACC;
        S_ACC: if (accept) begin
          flow_q <= p_flow;
          base_q <= p_base;
          ts_q   <= pkt.ts;
          dir_q  <= pkt.dir;
          meta_r <= p_meta;
          n_pkt  <= n_pkt + 1;
          st     <= S_LKP;
        end
        S_LKP: begin
          hist_r           <= t_new ? '0 : fm_rdata;
          meta_r[M_INTV]   <= t_new ? 8'd0 : intv;
          meta_r[M_PKTIDX] <= t_pkt_idx;
          waddr_q          <= pay_mode ? (base_q | (AW'(t_pkt_idx) & low_mask(pay_shift))) : base_q;
          drop_q           <= t_frozen;
          push_q           <= t_push;
          if (t_new)    n_new <= n_new + 1;
          if (t_frozen) n_frozen_drop <= n_frozen_drop + 1;
          if (t_push)   n_ready <= n_ready + 1;
          if (t_reach && !fifo_ok) n_fifo_full <= n_fifo_full + 1;
          st <= S_ALU;
        end
        S_ALU: begin
          out_r <= alu_out;
          st    <= S_WR;
        end
        S_WR: st <= S_ACC;
        default: st <= S_ACC;
      endcase
    end
  end

  // mask of the low word-index bits owned by one flow in payload mode
  function automatic logic [AW-1:0] low_mask(input logic [2:0] s);
    return ~(({AW{1'b1}} >> s) << s);
  endfunction

  sync_fifo #(.W(AW), .DEPTH(FIFO_DEPTH)) u_rdy_fifo (
    .clk, .rst_n, .push(fifo_push), .wr_data(base_q), .pop(rdy_pop && !rf_empty),
    .rd_data(rf_head), .empty(rf_empty), .full(rf_full), .count()
  );

  sync_fifo #(.W(AW), .DEPTH(FIFO_DEPTH)) u_inflight_fifo (
    .clk, .rst_n, .push(fifo_push), .wr_data(base_q), .pop(if_pop),
    .rd_data(if_head), .empty(if_empty), .full(if_full), .count()
  );

  assign rdy_vld  = !rf_empty;
  assign rdy_addr = MADDR_W'(16'h8000 | 16'(rf_head));

endmodule
