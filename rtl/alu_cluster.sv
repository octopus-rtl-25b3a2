// ALU cluster of the feature extractor.
//
// Combinational. N_ALU (16) byte-wide ALUs, ALU i producing byte i of the
// 16-byte feature word that is written back to feature memory. Sources are
// the history register (the flow's previous feature word) and the meta
// register (meta features of the current packet). Each ALU has its own
// micro-operation, loaded from the control register, of the form
// (op, $hsel, $msel, $i) as in the paper's example (add, $0, $7, $0), which
// accumulates pkt_arv_intv (meta byte 7) into flow duration (byte 0).
//
// The operations add, subtract, max, min and wr are the paper's. This
// design adds: NOP (keep own history byte), WRI (write meta[msel] only when
// the packet index equals hsel, which builds "vector of ..." features of
// the first 16 packets), an optional direction condition per ALU (for the
// "with two directions" features), unsigned saturating add/subtract, and
// meta selectors 13-15 reading as 0.
module alu_cluster
  import octopus_pkg::*;
(
  input  fword_t                 hist,
  input  meta_t                  meta,
  input  alu_cfg_t [N_ALU-1:0]   cfg,
  input  logic                   dir,
  input  logic [7:0]             pkt_idx,
  output fword_t                 out
);

  always_comb begin
    for (int i = 0; i < N_ALU; i++) begin
      logic [7:0] a, b;
      logic [8:0] s;
      s = '0;
      a = hist[cfg[i].hsel];
      b = (cfg[i].msel < 4'(META_BYTES)) ? meta[cfg[i].msel] : 8'h00;
      out[i] = hist[i];
      if (!cfg[i].cond_en || (cfg[i].cond_dir == dir)) begin
        unique case (cfg[i].op)
          ALU_ADD: begin s = {1'b0, a} + {1'b0, b}; out[i] = s[8] ? 8'hFF : s[7:0]; end
          ALU_SUB: out[i] = (a > b) ? a - b : 8'h00;
          ALU_MAX: out[i] = (a > b) ? a : b;
          ALU_MIN: out[i] = (a < b) ? a : b;
          ALU_WR:  out[i] = b;
          ALU_WRI: if (pkt_idx == {4'd0, cfg[i].hsel}) out[i] = b;
          default: out[i] = hist[i];
        endcase
      end
    end
  end

endmodule
