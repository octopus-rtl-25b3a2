// True dual-port RAM (the BRAM element of the on-chip memory fabric).
//
// Two independent read/write ports on one clock, synchronous read with one
// cycle of latency, read-before-write on each port. The paper builds
// feature memory (8k x 128) and each computing memory bank (16k x 128) from
// true-dual-port BRAM; the single clock for both ports and the
// read-before-write behaviour are this design's choices (the paper runs the
// feature extractor at 125 MHz and the computing domain at 222 MHz).
// Writing one address from both ports in the same cycle is not allowed
// (assertion).
module tdp_ram #(
  parameter int W     = 128,
  parameter int DEPTH = 16384,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [W-1:0]  a_wdata,
  output logic [W-1:0]  a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [W-1:0]  b_wdata,
  output logic [W-1:0]  b_rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

  a_no_collision: assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr));

endmodule
