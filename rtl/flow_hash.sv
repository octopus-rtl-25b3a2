// Flow hash of the feature extractor.
//
// Combinational. Maps the 13-byte IP 5-tuple to an AW-bit flow address,
// which indexes both the flow-state table and the feature memory. The
// paper only says that a hash module turns the tuple into an address; the
// function is this design's choice: CRC-16/CCITT (polynomial 0x1021,
// initial value 0xFFFF, tuple bytes src_ip first, MSB first) with the
// upper CRC bits folded onto the lower AW bits by XOR.
module flow_hash
  import octopus_pkg::*;
#(
  parameter int AW = FLOW_AW
) (
  input  tuple_t        tuple,
  output logic [AW-1:0] addr
);

  logic [103:0] bits;
  logic [15:0]  crc;

  always_comb begin
    bits = tuple;
    crc  = 16'hFFFF;
    for (int i = 103; i >= 0; i--) begin
      if (crc[15] ^ bits[i]) crc = (crc << 1) ^ 16'h1021;
      else                   crc = crc << 1;
    end
    addr = crc[AW-1:0] ^ AW'(crc >> AW);
  end

endmodule
