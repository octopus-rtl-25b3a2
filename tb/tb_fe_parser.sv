// Testbench of fe_parser: TCP, UDP, ICMP frames (with and without IPv4
// options) and a non-IPv4 frame; checks tuple, MAC, meta bytes and payload
// offset/length against values known from how the frames were built.
`include "tb_util.svh"
`include "tb_pkt_lib.svh"
module tb_fe_parser;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  pkt_t p; tuple_t tu; logic [47:0] mac; meta_t m; logic ip; logic [7:0] po; logic [15:0] pl;
  fe_parser dut (.pkt(p), .tuple(tu), .src_mac(mac), .meta(m), .is_ip(ip), .pay_off(po), .pay_len(pl));

  task automatic one(input logic [7:0] proto, input int opt, input logic [15:0] len, input logic dir);
    logic [31:0] s = $urandom, d = $urandom;
    logic [15:0] sp = 16'($urandom), dp = 16'($urandom);
    logic [7:0] fl = 8'($urandom);
    int exp_off;
    p = mk_pkt(s, d, sp, dp, proto, fl, opt, len, 32'd0, dir, 8'h30, 48'h0A0B0C0D0E0F);
    #1;
    exp_off = 14 + 4 * (5 + opt) + ((proto == 6) ? 20 : 8);
    `CHECK(ip, "is_ip")
    `CHECK(tu.src_ip == s && tu.dst_ip == d && tu.proto == proto, "ip fields")
    if (proto != 1) `CHECK(tu.sport == sp && tu.dport == dp, "ports")
    else            `CHECK(tu.sport == 0 && tu.dport == 0, "icmp ports")
    `CHECK(mac == 48'h0A0B0C0D0E0F, "mac")
    `CHECK(m[M_SIZE_L] == len[7:0] && m[M_SIZE_H] == len[15:8], "pkt_size")
    `CHECK(m[M_DIR] == {7'd0, dir}, "dir")
    `CHECK(m[M_FLAG] == ((proto == 17) ? 8'd0 : fl), "flag")
    `CHECK(m[M_PROTO] == proto && m[M_ONE] == 1 && m[M_TTL] == 64 && m[M_TOS] == 8'h10, "meta misc")
    `CHECK(m[M_SIZE16] == ((len >> 4) > 255 ? 8'd255 : 8'(len >> 4)), "size16")
    `CHECK(m[M_INTV] == 0, "intv zero")
    `CHECK(int'(po) == exp_off, $sformatf("pay_off %0d exp %0d", po, exp_off))
    `CHECK(int'(pl) == int'(len) - exp_off, "pay_len")
  endtask

  initial begin
    for (int n = 0; n < 50; n++) begin
      one(8'd6, n % 3, 16'(100 + $urandom % 1400), 1'(n));
      one(8'd17, n % 2, 16'(60 + $urandom % 1400), 1'(n + 1));
      one(8'd1, 0, 16'(70 + $urandom % 100), 1'b0);
    end
    p = mk_pkt(1, 2, 3, 4, 6, 0, 0, 100, 0, 0, 0);
    p.hdr[12] = 8'h86; p.hdr[13] = 8'hDD;   // IPv6 ethertype
    #1;
    `CHECK(!ip && tu == '0, "non-ip")
    `TB_FINISH
  end
endmodule
