// Vector unit (VU) of the VPE: UNITS parallel adder/multiplier pairs
// (eight in the paper's implementation) for vector add (vadd) and
// element-wise multiply (vem) on 16-element Int-8 vectors, as used for
// normalisation and for aggregating partial blocks of a blocked matrix
// multiplication.
//
// A 16-element vector takes 16/UNITS passes, one per cycle: on start the
// first UNITS elements are computed, the rest in the following cycles; done
// pulses in the cycle after the last pass, with result valid. vadd
// saturates to Int-8; vem requantises the 16-bit product by shift with
// saturation. Saturation and requantisation are this design's choices.
module vu
  import octopus_pkg::*;
#(
  parameter int UNITS = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  vu_op_e     op,
  input  logic [4:0] shift,
  input  fword_t     a,
  input  fword_t     b,
  output logic       done,
  output fword_t     result
);

  localparam int PASSES = (HIST_BYTES + UNITS - 1) / UNITS;

  fword_t     a_q, b_q;
  vu_op_e     op_q;
  logic [4:0] shift_q;
  int unsigned pass;
  logic       busy;

  // the UNITS operators of one pass
  fword_t src_a, src_b;
  logic [UNITS-1:0][7:0] y;
  int unsigned base;
  always_comb begin
    src_a = start ? a : a_q;
    src_b = start ? b : b_q;
    base  = start ? 0 : pass * UNITS;
    for (int u = 0; u < UNITS; u++) begin
      logic signed [31:0] sa, sb;
      sa = 32'($signed(src_a[(base + u) % HIST_BYTES]));
      sb = 32'($signed(src_b[(base + u) % HIST_BYTES]));
      if ((start ? op : op_q) == V_EM) y[u] = requant(sa * sb, start ? shift : shift_q, 1'b0);
      else                             y[u] = sat8(sa + sb);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0; b_q <= '0; op_q <= V_NOP; shift_q <= '0; pass <= 0; busy <= 1'b0;
      done <= 1'b0; result <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        a_q <= a; b_q <= b; op_q <= op; shift_q <= shift;
        for (int u = 0; u < UNITS; u++) if (u < HIST_BYTES) result[u] <= y[u];
        if (PASSES == 1) done <= 1'b1;
        else begin busy <= 1'b1; pass <= 1; end
      end else if (busy) begin
        for (int u = 0; u < UNITS; u++)
          if (pass * UNITS + u < HIST_BYTES) result[pass * UNITS + u] <= y[u];
        if (pass == PASSES - 1) begin busy <= 1'b0; done <= 1'b1; end
        else pass <= pass + 1;
      end
    end
  end

endmodule
