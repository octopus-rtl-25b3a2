// One SIMDU lane: two sub-lanes, each with four multipliers and a two-level
// adder tree, a combining adder, three activation stages and an output mux
// (Fig. 5b of the paper).
//
// Mode prd (split=0): one eight-element vector product
//   y0 = act(sum_{i<8} d[i]*w[i]), y1 = 0.
// Mode prds (split=1): two four-element products
//   y0 = act(sum_{i<4} d[i]*w[i]), y1 = act(sum_{i<4} d[4+i]*w[4+i]).
// Data and weights are signed Int-8; products and sums are kept at full
// width and requantised to Int-8 by act() = saturate((sum >>> shift), with
// ReLU when relu=1). The paper also names GeLU; only ReLU and identity are
// provided here. Two pipeline stages: products are registered in the cycle
// of vld, results appear with out_vld one cycle later. The requantisation
// by shift and the two-stage pipeline are this design's choices.
module simd_lane
  import octopus_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             vld,
  input  logic             split,
  input  logic             relu,
  input  logic [4:0]       shift,
  input  logic [7:0][7:0]  d,
  input  logic [7:0][7:0]  w,
  output logic             out_vld,
  output logic [7:0]       y0,
  output logic [7:0]       y1
);

  logic signed [15:0] prod_q [8];
  logic               split_q, relu_q;
  logic [4:0]         shift_q;
  logic               vld_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= 1'b0; split_q <= 1'b0; relu_q <= 1'b0; shift_q <= '0;
      for (int i = 0; i < 8; i++) prod_q[i] <= '0;
    end else begin
      vld_q <= vld;
      if (vld) begin
        split_q <= split; relu_q <= relu; shift_q <= shift;
        for (int i = 0; i < 8; i++) prod_q[i] <= $signed(d[i]) * $signed(w[i]);
      end
    end
  end

  // adder trees
  logic signed [31:0] s0, s1, s_all;
  always_comb begin
    s0    = 32'(prod_q[0] + prod_q[1]) + 32'(prod_q[2] + prod_q[3]);
    s1    = 32'(prod_q[4] + prod_q[5]) + 32'(prod_q[6] + prod_q[7]);
    s_all = s0 + s1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vld <= 1'b0; y0 <= '0; y1 <= '0;
    end else begin
      out_vld <= vld_q;
      if (vld_q) begin
        y0 <= split_q ? requant(s0, shift_q, relu_q) : requant(s_all, shift_q, relu_q);
        y1 <= split_q ? requant(s1, shift_q, relu_q) : 8'd0;
      end
    end
  end

endmodule
