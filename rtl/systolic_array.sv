// K x K weight-stationary systolic array of AryPE.
//
// Computes one output row per cycle of a streaming matrix product
// (l, K) x (K, K): for each input row x (K Int-8 elements) it returns
// y[r] = sum_c x[c] * W[c][r] as K 32-bit sums. Cell (r, c) holds W[c][r];
// x[c] enters column c at the top and moves down, partial sums of output r
// move right along row r. Input skew (column c delayed c cycles) and output
// de-skew (row r delayed K-1-r cycles) are inside, so a row given with
// in_vld in cycle t comes out with out_vld in cycle t + 2K - 1, and a new
// row may be given every cycle. Rows without in_vld are bubbles.
//
// Weights: while w_shift is high, each row shifts its weights one cell to
// the right and w_in[r] enters cell (r, 0); after K shifts the value given
// in shift cycle s sits in column K-1-s, so row c of W must be given in
// shift cycle K-1-c. The latency figure and the loading scheme are this
// design's; the paper fixes K x K MAC cells and the (l,k)x(k,k) function.
module systolic_array #(
  parameter int K   = 16,
  parameter int PSW = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         w_shift,
  input  logic [K-1:0][7:0]            w_in,
  input  logic                         in_vld,
  input  logic [K-1:0][7:0]            x,
  output logic                         out_vld,
  output logic [K-1:0][PSW-1:0]        y
);

  // input skew: column c delayed by c cycles
  logic [K-1:0][7:0] x_sk;
  for (genvar c = 0; c < K; c++) begin : g_skew
    if (c == 0) begin : g_0
      assign x_sk[0] = x[0];
    end else begin : g_d
      logic [7:0] sr [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int i = 0; i < c; i++) sr[i] <= '0;
        else begin
          sr[0] <= x[c];
          for (int i = 1; i < c; i++) sr[i] <= sr[i-1];
        end
      end
      assign x_sk[c] = sr[c-1];
    end
  end

  logic [K-1:0][K-1:0][7:0]     xo, wo;
  logic [K-1:0][K-1:0][PSW-1:0] po;

  for (genvar r = 0; r < K; r++) begin : g_row
    for (genvar c = 0; c < K; c++) begin : g_col
      sa_mac #(.PSW(PSW)) u_mac (
        .clk, .rst_n, .w_shift,
        .w_in ((c == 0) ? w_in[r] : wo[r][(c == 0) ? 0 : c - 1]),
        .w_out(wo[r][c]),
        .x_in ((r == 0) ? x_sk[c] : xo[(r == 0) ? 0 : r - 1][c]),
        .x_out(xo[r][c]),
        .ps_in((c == 0) ? '0 : po[r][(c == 0) ? 0 : c - 1]),
        .ps_out(po[r][c])
      );
    end
  end

  // output de-skew: row r delayed by K-1-r cycles
  for (genvar r = 0; r < K; r++) begin : g_deskew
    if (r == K - 1) begin : g_0
      assign y[r] = po[r][K-1];
    end else begin : g_d
      logic [PSW-1:0] sr [K-1-r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int i = 0; i < K - 1 - r; i++) sr[i] <= '0;
        else begin
          sr[0] <= po[r][K-1];
          for (int i = 1; i < K - 1 - r; i++) sr[i] <= sr[i-1];
        end
      end
      assign y[r] = sr[K-2-r];
    end
  end

  logic [2*K-2:0] vsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vsr <= '0;
    else        vsr <= {vsr[2*K-3:0], in_vld};
  end
  assign out_vld = vsr[2*K-2];

endmodule
