// Payload register of the feature extractor.
//
// On load it captures the first cfg_len (at most 16) bytes of the packet
// payload, starting at pay_off in the header window, and clears the bytes
// beyond cfg_len or beyond the payload. The register drives the feature word
// written to feature memory when the extractor works in payload mode.
// The paper says only that the payload register truncates a certain length
// of payload and writes feature memory; the byte order (payload byte 0 in
// word byte 0) and the zero padding are this design's choices.
module payload_reg
  import octopus_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  pkt_t        pkt,
  input  logic [7:0]  pay_off,
  input  logic [15:0] pay_len,
  input  logic [4:0]  cfg_len,
  output fword_t      q
);

  fword_t d;

  always_comb begin
    for (int i = 0; i < HIST_BYTES; i++) begin
      int unsigned idx;
      idx  = int'(pay_off) + i;
      d[i] = 8'h00;
      if (i < int'(cfg_len) && 16'(i) < pay_len && idx < HDR_BYTES) d[i] = pkt.hdr[idx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= d;
  end

endmodule
