// Packet header parser of the feature extractor.
//
// Purely combinational. It takes the header window handed over by the
// switch fabric (Ethernet II + IPv4 + TCP/UDP/ICMP, IPv4 options allowed)
// and produces the directly readable parts of the meta feature set: the IP
// 5-tuple for the hash, the source MAC for the flow tracker, the meta
// register (pkt_size, direction, TCP flags or ICMP type, protocol, ...) and
// the offset/length of the payload for the payload register.
//
// Following the paper: pkt_size, tuple and flag are taken from fixed header
// fields; pkt_arv_intv sits in byte 7 of the 13-byte meta register and is
// filled in later from the flow tracker's last timestamp (it is 0 here).
// This design's choices: the remaining meta byte layout (see octopus_pkg),
// treating non-IPv4 frames as tuple 0, and reading bytes beyond the header
// window as 0.
module fe_parser
  import octopus_pkg::*;
(
  input  pkt_t        pkt,
  output tuple_t      tuple,
  output logic [47:0] src_mac,
  output meta_t       meta,
  output logic        is_ip,
  output logic [7:0]  pay_off,   // byte offset of the payload in the frame
  output logic [15:0] pay_len    // payload bytes in the frame
);

  function automatic logic [7:0] hb(input int unsigned idx);
    return (idx < HDR_BYTES) ? pkt.hdr[idx] : 8'h00;
  endfunction

  int unsigned l4;      // start of the L4 header
  int unsigned l4len;   // length of the L4 header
  logic [7:0]  flag;
  logic [15:0] size16;

  always_comb begin
    is_ip   = (hb(12) == 8'h08) && (hb(13) == 8'h00) && (hb(14)[7:4] == 4'd4);
    src_mac = {hb(6), hb(7), hb(8), hb(9), hb(10), hb(11)};
    l4      = 14 + 4 * int'(hb(14)[3:0]);
    tuple   = '0;
    flag    = 8'h00;
    l4len   = 0;
    if (is_ip) begin
      tuple.proto  = hb(23);
      tuple.src_ip = {hb(26), hb(27), hb(28), hb(29)};
      tuple.dst_ip = {hb(30), hb(31), hb(32), hb(33)};
      unique case (hb(23))
        8'd6: begin   // TCP
          tuple.sport = {hb(l4), hb(l4 + 1)};
          tuple.dport = {hb(l4 + 2), hb(l4 + 3)};
          flag        = hb(l4 + 13);
          l4len       = 4 * int'(hb(l4 + 12)[7:4]);
        end
        8'd17: begin  // UDP
          tuple.sport = {hb(l4), hb(l4 + 1)};
          tuple.dport = {hb(l4 + 2), hb(l4 + 3)};
          l4len       = 8;
        end
        8'd1: begin   // ICMP: type is the flag
          flag  = hb(l4);
          l4len = 8;
        end
        default: l4len = 0;
      endcase
    end
    pay_off = is_ip ? 8'(l4 + l4len) : 8'd14;
    pay_len = (pkt.len > 16'(pay_off)) ? pkt.len - 16'(pay_off) : 16'd0;

    size16            = pkt.len >> 4;
    meta              = '0;
    meta[M_SIZE_L]    = pkt.len[7:0];
    meta[M_SIZE_H]    = pkt.len[15:8];
    meta[M_DIR]       = {7'd0, pkt.dir};
    meta[M_FLAG]      = flag;
    meta[M_PROTO]     = tuple.proto;
    meta[M_ONE]       = 8'd1;
    meta[M_SIZE16]    = (size16 > 16'd255) ? 8'd255 : size16[7:0];
    meta[M_INTV]      = 8'd0;
    meta[M_TTL]       = is_ip ? hb(22) : 8'd0;
    meta[M_SPORT_L]   = tuple.sport[7:0];
    meta[M_DPORT_L]   = tuple.dport[7:0];
    meta[M_TOS]       = is_ip ? hb(15) : 8'd0;
    meta[M_PKTIDX]    = 8'd0;
  end

endmodule
