// SIMD unit (SIMDU) of the VPE: LANES lanes (eight in the paper's
// implementation) that all execute the same instruction on the same data
// vector with different parameter slices.
//
// Inputs: the data vector (first eight Int-8 elements of a dRf register)
// and one pCache word holding eight weights per lane (lane j uses bytes
// 8j..8j+7). prd: output byte j = lane j's eight-wide product. prds: output
// byte j = lane j's product of data[0:3], byte LANES+j = lane j's product
// of data[4:7]; each lane thus computes two four-wide products, e.g. two
// sliding windows of a convolution with kernel size up to 4. Remaining
// bytes of the 16-byte result are 0. Latency two cycles (simd_lane).
// The placement of results in the output word is this design's choice.
module simdu
  import octopus_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   vld,
  input  logic                   split,
  input  logic                   relu,
  input  logic [4:0]             shift,
  input  logic [7:0][7:0]        data,
  input  logic [LANES-1:0][63:0] param,
  output logic                   out_vld,
  output fword_t                 result
);

  logic [LANES-1:0]      lv;
  logic [LANES-1:0][7:0] y0, y1;
  logic                  split_q, split_qq;

  for (genvar j = 0; j < LANES; j++) begin : g_lane
    simd_lane u_lane (
      .clk, .rst_n, .vld, .split, .relu, .shift,
      .d(data), .w(param[j]), .out_vld(lv[j]), .y0(y0[j]), .y1(y1[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      split_q <= 1'b0; split_qq <= 1'b0;
    end else begin
      if (vld) split_q <= split;
      split_qq <= split_q;
    end
  end

  assign out_vld = lv[0];

  always_comb begin
    result = '0;
    for (int j = 0; j < LANES && j < HIST_BYTES; j++) result[j] = y0[j];
    if (split_qq)
      for (int j = 0; j < LANES && LANES + j < HIST_BYTES; j++) result[LANES + j] = y1[j];
  end

endmodule
