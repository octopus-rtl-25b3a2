// Array process element (AryPE): the high-throughput engine for flow-based
// models.
//
// Structure (Fig. 6a of the paper): iCache, pCache of read-only weights,
// adRf ($0..$7), CtrlRf to the control domain, a two-port Mif and a K x K
// systolic array (16 x 16 in the paper's implementation). Instructions
// (octopus_pkg::ary_instr_t):
//   (LD, $p)        load a K x K weight tile from pCache words
//                   adRf[$p] .. adRf[$p]+K-1 (word c = row c of the tile,
//                   byte r = column r) into the array
//   (MM, l, $x, $y) stream l rows of K Int-8 values from memory at adRf[$x]
//                   through the array and write the l result rows,
//                   requantised to Int-8, to memory at adRf[$y]
//   FIN $x          raise FIN with adRf[$x] as result address and stop (or
//                   restart in auto-restart mode)
// Optional post-increments (xinc, yinc) advance the address registers after
// an instruction so that programs can walk through blocks. LD, MM and the
// (l, $x, $y) operands are the paper's; FIN, the post-increments and the
// encoding are this design's.
//
// Timing: LD takes K+1 cycles. MM issues one read per cycle on memory port
// 1 and writes one result row per cycle on port 0, 2K cycles behind; a
// read that is not granted (for instance because the result of an earlier
// row is being written to the same bank) becomes a bubble in the array, so
// an MM takes about l + 2K cycles, plus one per bubble. Results are
// requantised with CtrlRf's shift and optional ReLU. Writes to port 0
// must always be granted (the memory fabric gives AryPE's write port the
// highest priority on its bank ports); they may not target feature memory.
//
// perf counters: 0 LD, 1 MM, 2 rows streamed, 3 read bubbles, 4 fin.
module arype
  import octopus_pkg::*;
#(
  parameter int K        = 16,
  parameter int IC_DEPTH = 1024,
  parameter int PC_DEPTH = 1024,
  localparam int IAW     = $clog2(IC_DEPTH),
  localparam int PAW     = $clog2(PC_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               crf_we,
  input  logic [4:0]         crf_addr,
  input  logic [31:0]        crf_wdata,
  output logic [31:0]        crf_rdata,
  input  logic               ic_we,
  input  logic [IAW-1:0]     ic_addr,
  input  logic [ARY_IW-1:0]  ic_wdata,
  input  logic               pc_we,
  input  logic [PAW-1:0]     pc_addr,
  input  logic [K*8-1:0]     pc_wdata,
  output logic               fin,
  output logic               fin_irq,
  output logic               busy,
  // memory fabric: [0] result writes, [1] operand reads
  output mem_req_t [1:0]     mreq,
  input  logic     [1:0]     mgnt,
  input  logic     [1:0][WORD_W-1:0] mrdata,
  output logic [4:0][31:0]   perf
);

  // ---------------- CtrlRf ----------------
  logic        c_start, c_auto, c_relu;
  logic [15:0] c_start_pc, c_pbase, fin_addr;
  logic [4:0]  c_shift;
  logic [7:0][15:0] c_adrf;

  ctrl_rf u_ctrl (
    .clk, .rst_n, .we(crf_we), .addr(crf_addr), .wdata(crf_wdata), .rdata(crf_rdata),
    .start(c_start), .auto_mode(c_auto), .start_pc(c_start_pc), .pbase(c_pbase),
    .shift(c_shift), .relu(c_relu), .adrf_init(c_adrf),
    .busy, .fin, .fin_addr, .fin_flag(fin_irq)
  );

  typedef enum logic [2:0] {IDLE, FETCH, DEC, LDW, MM, NEXT} st_e;
  st_e st;

  logic [IAW-1:0]    pc;
  logic [ARY_IW-1:0] ic_rdata;
  ary_instr_t        ir;
  logic [MADDR_W-1:0] adrf [N_ADRF];

  sdp_ram #(.W(ARY_IW), .DEPTH(IC_DEPTH)) u_icache (
    .clk, .we(ic_we), .waddr(ic_addr), .wdata(ic_wdata),
    .rd_en(st == FETCH), .raddr(pc), .rdata(ic_rdata)
  );
  assign ir = ary_instr_t'(ic_rdata);

  // weight loading
  logic [$clog2(K):0] ld_cnt;
  logic               ld_rd, ld_vld_q;
  logic [K*8-1:0]     pc_rdata;
  logic [PAW-1:0]     ld_addr;
  assign ld_rd   = (st == LDW) && (ld_cnt < ($clog2(K)+1)'(K));
  assign ld_addr = PAW'(adrf[ir.x] + MADDR_W'(K - 1) - MADDR_W'(ld_cnt));

  sdp_ram #(.W(K*8), .DEPTH(PC_DEPTH)) u_pcache (
    .clk, .we(pc_we), .waddr(pc_addr), .wdata(pc_wdata),
    .rd_en(ld_rd), .raddr(ld_addr), .rdata(pc_rdata)
  );

  // streaming
  logic [11:0]        n_rd, n_wr;
  logic [MADDR_W-1:0] rd_ptr, wr_ptr;
  logic               rd_vld_q;
  logic               sa_out_vld;
  logic [K-1:0][31:0] sa_y;
  logic [K-1:0][7:0]  sa_x;

  assign sa_x = mrdata[1][K*8-1:0];

  systolic_array #(.K(K)) u_array (
    .clk, .rst_n, .w_shift(ld_vld_q), .w_in(pc_rdata),
    .in_vld(rd_vld_q), .x(sa_x), .out_vld(sa_out_vld), .y(sa_y)
  );

  logic [WORD_W-1:0] res_word;
  always_comb begin
    res_word = '0;
    for (int r = 0; r < K && r < WORD_BYTES; r++)
      res_word[8*r +: 8] = requant(sa_y[r], c_shift, c_relu);
  end

  always_comb begin
    mreq          = '0;
    mreq[1].vld   = (st == MM) && (n_rd < ir.len);
    mreq[1].addr  = rd_ptr;
    mreq[0].vld   = (st == MM) && sa_out_vld;
    mreq[0].we    = 1'b1;
    mreq[0].addr  = wr_ptr;
    mreq[0].wdata = res_word;
  end

  assign busy     = (st != IDLE);
  assign fin_addr = adrf[ir.x];
  assign fin      = (st == DEC) && (ir.op == A_FIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; pc <= '0; ld_cnt <= '0; ld_vld_q <= 1'b0; rd_vld_q <= 1'b0;
      n_rd <= '0; n_wr <= '0; rd_ptr <= '0; wr_ptr <= '0; perf <= '0;
      for (int i = 0; i < N_ADRF; i++) adrf[i] <= '0;
    end else begin
      ld_vld_q <= ld_rd;
      rd_vld_q <= mreq[1].vld && mgnt[1];
      unique case (st)
        IDLE: if (c_start) begin
          pc <= IAW'(c_start_pc);
          for (int i = 0; i < N_ADRF; i++) adrf[i] <= c_adrf[i];
          st <= FETCH;
        end
        FETCH: st <= DEC;
        DEC: begin
          unique case (ir.op)
            A_LD: begin ld_cnt <= '0; perf[0] <= perf[0] + 1; st <= LDW; end
            A_MM: begin
              n_rd <= '0; n_wr <= '0; rd_ptr <= adrf[ir.x]; wr_ptr <= adrf[ir.y];
              perf[1] <= perf[1] + 1;
              st <= (ir.len == 0) ? NEXT : MM;
            end
            A_FIN: begin
              perf[4] <= perf[4] + 1;
              if (c_auto) begin
                pc <= IAW'(c_start_pc);
                for (int i = 0; i < N_ADRF; i++) adrf[i] <= c_adrf[i];
                st <= FETCH;
              end else st <= IDLE;
            end
            default: st <= NEXT;
          endcase
        end
        LDW: begin
          if (ld_rd) ld_cnt <= ld_cnt + 1'b1;
          else if (!ld_vld_q) begin
            if (ir.xinc) adrf[ir.x] <= adrf[ir.x] + MADDR_W'(K);
            st <= NEXT;
          end
        end
        MM: begin
          if (mreq[1].vld) begin
            if (mgnt[1]) begin
              n_rd <= n_rd + 1'b1; rd_ptr <= rd_ptr + 1'b1; perf[2] <= perf[2] + 1;
            end else perf[3] <= perf[3] + 1;
          end
          if (sa_out_vld) begin
            n_wr   <= n_wr + 1'b1;
            wr_ptr <= wr_ptr + 1'b1;
            if (n_wr + 1'b1 == ir.len) begin
              if (ir.xinc) adrf[ir.x] <= adrf[ir.x] + MADDR_W'(ir.len);
              if (ir.yinc) adrf[ir.y] <= adrf[ir.y] + MADDR_W'(ir.len);
              st <= NEXT;
            end
          end
        end
        NEXT: begin
          pc <= pc + 1'b1;
          st <= FETCH;
        end
        default: st <= IDLE;
      endcase
    end
  end

  a_write_granted: assert property (@(posedge clk) disable iff (!rst_n)
    mreq[0].vld |-> mgnt[0]);

endmodule
