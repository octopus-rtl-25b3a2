// Packet construction helpers shared by the feature-extractor testbenches:
// builds Ethernet II / IPv4 / TCP, UDP or ICMP frames into a pkt_t header
// window, with an optional number of IPv4 option words and a payload
// pattern (byte i of the payload = pay_seed + i).
`ifndef TB_PKT_LIB_SVH
`define TB_PKT_LIB_SVH
function automatic octopus_pkg::pkt_t mk_pkt(
    input logic [31:0] sip, input logic [31:0] dip, input logic [15:0] sp, input logic [15:0] dp,
    input logic [7:0] proto, input logic [7:0] tflags, input int opt_words,
    input logic [15:0] len, input logic [31:0] ts, input logic dir, input logic [7:0] pay_seed,
    input logic [47:0] smac = 48'h02_00_00_00_00_01);
  octopus_pkg::pkt_t p;
  int l4, pl;
  p = '0;
  for (int i = 0; i < 6; i++) p.hdr[i] = 8'hAA;
  for (int i = 0; i < 6; i++) p.hdr[6+i] = smac[47-8*i -: 8];
  p.hdr[12] = 8'h08; p.hdr[13] = 8'h00;
  p.hdr[14] = 8'(8'h40 | (5 + opt_words));
  p.hdr[15] = 8'h10;                  // tos
  p.hdr[22] = 8'd64;                  // ttl
  p.hdr[23] = proto;
  for (int i = 0; i < 4; i++) begin
    p.hdr[26+i] = sip[31-8*i -: 8];
    p.hdr[30+i] = dip[31-8*i -: 8];
  end
  l4 = 14 + 4 * (5 + opt_words);
  if (proto == 6) begin
    p.hdr[l4] = sp[15:8]; p.hdr[l4+1] = sp[7:0]; p.hdr[l4+2] = dp[15:8]; p.hdr[l4+3] = dp[7:0];
    p.hdr[l4+12] = 8'h50; p.hdr[l4+13] = tflags; pl = l4 + 20;
  end else if (proto == 17) begin
    p.hdr[l4] = sp[15:8]; p.hdr[l4+1] = sp[7:0]; p.hdr[l4+2] = dp[15:8]; p.hdr[l4+3] = dp[7:0];
    pl = l4 + 8;
  end else begin
    p.hdr[l4] = tflags; pl = l4 + 8;
  end
  for (int i = pl; i < octopus_pkg::HDR_BYTES; i++) if (i < len) p.hdr[i] = 8'(pay_seed + (i - pl));
  p.len = len; p.ts = ts; p.dir = dir;
  return p;
endfunction
`endif
