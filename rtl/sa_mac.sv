// One MAC cell of the AryPE systolic array.
//
// Holds a stationary Int-8 weight, loaded by shifting from the left
// neighbour (w_shift). Each cycle it passes its data input down to the cell
// below and adds w * x to the partial sum coming from the left, passing the
// result to the right, both through registers. The weight-stationary
// organisation is this design's reading of Fig. 6a (parameters entering
// from the left, data from the top, results leaving on the right).
module sa_mac #(
  parameter int PSW = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_shift,
  input  logic [7:0]            w_in,
  output logic [7:0]            w_out,
  input  logic [7:0]            x_in,
  output logic [7:0]            x_out,
  input  logic signed [PSW-1:0] ps_in,
  output logic signed [PSW-1:0] ps_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out  <= '0;
      x_out  <= '0;
      ps_out <= '0;
    end else begin
      if (w_shift) w_out <= w_in;
      x_out  <= x_in;
      ps_out <= ps_in + PSW'($signed(w_out) * $signed(x_in));
    end
  end

endmodule
