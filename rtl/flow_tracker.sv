// Flow tracker: the flow-state table of the feature extractor.
//
// One entry per flow address holds the packet number, the timestamp of the
// last packet, the MAC address and a frozen bit (octopus_pkg::flow_entry_t).
// Following the paper: a lookup reads the entry at the hash address; packet
// number zero means a new flow, anything else a hit; every accepted packet
// updates the entry; when the packet number reaches the threshold (top-n
// packets of the flow have arrived) the flow is reported ready (push) and
// its entry is frozen; a release (after FIN) sets the packet number back to
// zero and unfreezes the entry.
//
// Timing: lk_vld in cycle t; the st_* outputs are valid in cycle t+1, when
// commit may be raised to write the updated entry (pkt_num+1, new
// timestamp, MAC, frozen=push). push = commit & reach & fifo_ok, so a flow
// whose FIFOs are full is not frozen and is reported again with its next
// packet. Packets of a frozen flow are not committed. rel_vld writes a
// cleared entry. After reset the table is cleared by a sweep of DEPTH
// cycles (init_busy high). The caller must not raise commit and rel_vld in
// the same cycle, nor look up an address in the cycle it is written. The
// sweep, the saturation of pkt_num at 255 and the push condition are this
// design's choices.
module flow_tracker
  import octopus_pkg::*;
#(
  parameter int AW    = FLOW_AW,
  parameter int DEPTH = 1 << AW
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          init_busy,
  input  logic [7:0]    thresh,
  // lookup
  input  logic          lk_vld,
  input  logic [AW-1:0] lk_addr,
  input  logic [31:0]   lk_ts,
  input  logic [47:0]   lk_mac,
  // lookup result, one cycle later
  output logic          st_vld,
  output logic          st_new,
  output logic          st_frozen,
  output logic [31:0]   st_last_ts,
  output logic [7:0]    st_pkt_idx,   // packets of the flow before this one
  output logic          st_reach,
  // update
  input  logic          commit,
  input  logic          fifo_ok,
  output logic          push,
  // release after FIN
  input  logic          rel_vld,
  input  logic [AW-1:0] rel_addr
);

  flow_entry_t   tab [DEPTH];
  flow_entry_t   rd_q;
  logic [AW-1:0] addr_q;
  logic [31:0]   ts_q;
  logic [47:0]   mac_q;
  logic [AW:0]   init_cnt;

  assign init_busy = !init_cnt[AW];

  always_ff @(posedge clk) begin
    if (lk_vld) rd_q <= tab[lk_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_vld   <= 1'b0;
      addr_q   <= '0;
      ts_q     <= '0;
      mac_q    <= '0;
      init_cnt <= '0;
    end else begin
      st_vld <= lk_vld && !init_busy;
      if (lk_vld) begin
        addr_q <= lk_addr;
        ts_q   <= lk_ts;
        mac_q  <= lk_mac;
      end
      if (init_busy) init_cnt <= init_cnt + 1'b1;
    end
  end

  assign st_new     = (rd_q.pkt_num == 8'd0);
  assign st_frozen  = rd_q.frozen && !st_new;
  assign st_last_ts = rd_q.last_ts;
  assign st_pkt_idx = rd_q.pkt_num;
  assign st_reach   = !st_frozen && ((rd_q.pkt_num == 8'd255) ? 1'b1 : (rd_q.pkt_num + 8'd1 >= thresh));
  assign push       = commit && st_vld && st_reach && fifo_ok;

  flow_entry_t upd;
  always_comb begin
    upd.pkt_num = (rd_q.pkt_num == 8'd255) ? 8'd255 : rd_q.pkt_num + 8'd1;
    upd.last_ts = ts_q;
    upd.mac     = mac_q;
    upd.frozen  = push;
  end

  always_ff @(posedge clk) begin
    if (init_busy)                            tab[init_cnt[AW-1:0]] <= '0;
    else if (commit && st_vld && !st_frozen)  tab[addr_q] <= upd;
    else if (rel_vld)                         tab[rel_addr] <= '0;
  end

  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(commit && rel_vld));

endmodule
