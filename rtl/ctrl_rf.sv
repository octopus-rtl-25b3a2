// Control register file (CtrlRf) between the control domain and one
// computing engine (VPE or AryPE).
//
// Dual-ported: the control domain reads and writes registers through the
// host port while the engine reads its configuration and reports FIN at the
// same time. Following the paper: the control domain writes the
// configuration, then starts the engine; on FIN the engine leaves the
// address of its output data here and a FIN flag is raised for the control
// domain (fin_flag, also an interrupt line). Register map (this design's):
//   0 CTRL   write bit0=1: start pulse; bit1: auto-restart after FIN
//   1 STATUS bit0 busy (RO), bit1 FIN (write 1 to clear), [31:16] result
//            address reported with the last FIN (RO)
//   2 START_PC   3 PBASE (first pCache word)   4 {relu[8], shift[4:0]}
//   5 FIN count (RO)   8..15 initial values of adRf $0..$7
// Host reads are combinational.
module ctrl_rf (
  input  logic        clk,
  input  logic        rst_n,
  // control domain port
  input  logic        we,
  input  logic [4:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  // engine port
  output logic        start,
  output logic        auto_mode,
  output logic [15:0] start_pc,
  output logic [15:0] pbase,
  output logic [4:0]  shift,
  output logic        relu,
  output logic [7:0][15:0] adrf_init,
  input  logic        busy,
  input  logic        fin,
  input  logic [15:0] fin_addr,
  output logic        fin_flag
);

  logic [15:0] res_addr;
  logic [31:0] fin_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; auto_mode <= 1'b0; start_pc <= '0; pbase <= '0;
      shift <= '0; relu <= 1'b0; adrf_init <= '0; fin_flag <= 1'b0;
      res_addr <= '0; fin_cnt <= '0;
    end else begin
      start <= we && (addr == 5'd0) && wdata[0];
      if (we) begin
        unique case (addr)
          5'd0: auto_mode <= wdata[1];
          5'd1: if (wdata[1]) fin_flag <= 1'b0;
          5'd2: start_pc <= wdata[15:0];
          5'd3: pbase <= wdata[15:0];
          5'd4: begin shift <= wdata[4:0]; relu <= wdata[8]; end
          default: if (addr[4:3] == 2'b01) adrf_init[addr[2:0]] <= wdata[15:0];
        endcase
      end
      if (fin) begin
        fin_flag <= 1'b1;
        res_addr <= fin_addr;
        fin_cnt  <= fin_cnt + 1;
      end
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      5'd0: rdata = {30'd0, auto_mode, 1'b0};
      5'd1: rdata = {res_addr, 14'd0, fin_flag, busy};
      5'd2: rdata = {16'd0, start_pc};
      5'd3: rdata = {16'd0, pbase};
      5'd4: rdata = {23'd0, relu, 3'd0, shift};
      5'd5: rdata = fin_cnt;
      default: if (addr[4:3] == 2'b01) rdata = {16'd0, adrf_init[addr[2:0]]};
    endcase
  end

endmodule
