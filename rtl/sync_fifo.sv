// Synchronous first-word-fall-through FIFO.
//
// Used twice in the feature extractor: as the ready-flow address FIFO that
// the computing domain pops, and as the in-flight FIFO that holds flows
// whose feature words are frozen until the computing domain signals FIN.
// The paper names both FIFOs but not their depth or handshake; here the
// head word is visible on rd_data whenever empty is low, push/pop act on
// the rising clock edge, and pushing a full or popping an empty FIFO is
// ignored (and flagged by an assertion).
module sync_fifo #(
  parameter int W     = 16,
  parameter int DEPTH = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH):0] count
);

  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
