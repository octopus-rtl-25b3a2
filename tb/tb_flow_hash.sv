// Testbench of flow_hash: compares the address with a byte-wise table-free
// CRC-16/CCITT reference over the 13 tuple bytes, and checks that distinct
// tuples spread over many addresses.
`include "tb_util.svh"
module tb_flow_hash;
  import octopus_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(100000)

  tuple_t t;
  logic [12:0] a;
  flow_hash dut (.tuple(t), .addr(a));

  function automatic logic [12:0] ref_hash(tuple_t tu);
    logic [7:0] by [13];
    logic [15:0] crc = 16'hFFFF;
    logic [103:0] v = tu;
    for (int i = 0; i < 13; i++) by[i] = v[103 - 8*i -: 8];
    for (int i = 0; i < 13; i++) begin
      crc = crc ^ {by[i], 8'h00};
      for (int b = 0; b < 8; b++) crc = crc[15] ? ((crc << 1) ^ 16'h1021) : (crc << 1);
    end
    return crc[12:0] ^ {10'd0, crc[15:13]};
  endfunction

  bit seen [8192];
  int distinct = 0;
  initial begin
    for (int n = 0; n < 500; n++) begin
      t = {$urandom, $urandom, 16'($urandom), 16'($urandom), 8'($urandom)};
      #1;
      `CHECK(a == ref_hash(t), $sformatf("hash %h", t))
      if (!seen[a]) begin seen[a] = 1; distinct++; end
    end
    `CHECK(distinct > 450, $sformatf("spread %0d", distinct))
    `TB_FINISH
  end
endmodule
