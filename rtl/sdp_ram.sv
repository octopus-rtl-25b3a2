// Simple dual-port RAM used for the iCache and pCache of VPE and AryPE.
//
// One write port (the control domain loads instructions and read-only DL
// parameters before computing) and one synchronous read port for the
// engine (data one cycle after rd_en; the output holds its value while
// rd_en is low). The paper names both caches but gives no size or
// organisation; depth and width are set by the engine that uses them.
module sdp_ram #(
  parameter int W     = 128,
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= mem[raddr];
  end

endmodule
