// Octopus top level: a heterogeneous in-network computing accelerator.
//
// Packets from the switch fabric enter the feature extractor, which keeps
// per-flow state and writes feature words to feature memory; each flow (or
// packet) that is ready is announced by its feature address, which the VPE
// fetches with its fa instruction. The VPE (SIMD/VLIW vector engine) and
// AryPE (systolic array) compute DL models out of the on-chip memory
// fabric, exchanging intermediate blocks through the two computing memory
// banks. A FIN from the selected engine frees the flow in the feature
// extractor and hands its address to the control domain (dec_vld/dec_addr),
// which turns results into rules for the switch.
//
// The control domain (the paper's PULP RISC-V core, not part of this RTL)
// connects through the host port: a request/grant bus with 128-bit data,
// read data returned with host_rvalid one cycle after the grant. Address
// map (host_addr[23:20]):
//   0 feature extractor control register (addr[4:0])
//   1 VPE CtrlRf (addr[4:0])            2 AryPE CtrlRf (addr[4:0])
//   3 VPE iCache word (addr[9:0], write only)
//   4 VPE pCache: word addr[10:2], 128-bit quarter addr[1:0] (write only)
//   5 AryPE iCache word (write only)    6 AryPE pCache word (write only)
//   8 on-chip memory, unified word address addr[15:0]
// Register and cache accesses are always granted; memory accesses wait
// for the fabric. One clock for the whole design (the paper runs the
// feature extractor at 125 MHz and the engines at 222 MHz); the host bus,
// the address map and the single clock are this design's choices.
// dec_addr always lies in the feature-memory region, so its top three bits
// are constant.
module octopus_top
  import octopus_pkg::*;
#(
  parameter int AW       = FLOW_AW,
  parameter int FDEPTH   = FMEM_DEPTH,
  parameter int CDEPTH   = CMEM_DEPTH,
  parameter int LANES    = 8,
  parameter int UNITS    = 8,
  parameter int K        = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // switch fabric
  input  logic               pkt_vld,
  output logic               pkt_ready,
  input  pkt_t               pkt,
  // control domain host port
  input  logic               host_vld,
  input  logic               host_we,
  input  logic [23:0]        host_addr,
  input  logic [WORD_W-1:0]  host_wdata,
  output logic               host_gnt,
  output logic               host_rvalid,
  output logic [WORD_W-1:0]  host_rdata,
  // to the control domain
  output logic               dec_vld,
  output logic [MADDR_W-1:0] dec_addr,
  output logic               vpe_irq,
  output logic               ary_irq,
  output logic               fe_init_busy
);

  localparam int FAW = $clog2(FDEPTH);

  // ---------------- host decode ----------------
  logic [3:0] hr;
  logic       h_fe, h_vc, h_ac, h_vi, h_vp, h_ai, h_ap, h_mem;
  assign hr    = host_addr[23:20];
  assign h_fe  = host_vld && hr == 4'h0;
  assign h_vc  = host_vld && hr == 4'h1;
  assign h_ac  = host_vld && hr == 4'h2;
  assign h_vi  = host_vld && hr == 4'h3;
  assign h_vp  = host_vld && hr == 4'h4;
  assign h_ai  = host_vld && hr == 4'h5;
  assign h_ap  = host_vld && hr == 4'h6;
  assign h_mem = host_vld && hr == 4'h8;

  logic [31:0]      fe_cfg_rdata, vc_rdata, ac_rdata;
  mem_req_t [4:0]   mreq;
  logic     [4:0]   mgnt;
  logic     [4:0][WORD_W-1:0] mrdata;

  assign host_gnt = h_mem ? mgnt[4] : host_vld;

  logic        h_rd_reg, h_rd_mem;
  logic [31:0] h_reg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_rd_reg <= 1'b0; h_rd_mem <= 1'b0; h_reg_q <= '0;
    end else begin
      h_rd_reg <= host_vld && !host_we && !h_mem;
      h_rd_mem <= h_mem && !host_we && mgnt[4];
      h_reg_q  <= h_fe ? fe_cfg_rdata : h_vc ? vc_rdata : h_ac ? ac_rdata : 32'd0;
    end
  end
  assign host_rvalid = h_rd_reg || h_rd_mem;
  assign host_rdata  = h_rd_mem ? mrdata[4] : {96'd0, h_reg_q};

  always_comb begin
    mreq[4]       = '0;
    mreq[4].vld   = h_mem;
    mreq[4].we    = host_we;
    mreq[4].addr  = host_addr[15:0];
    mreq[4].wdata = host_wdata;
  end

  // ---------------- feature extractor ----------------
  logic               fm_en, fm_we;
  logic [FAW-1:0]     fm_addr;
  fword_t             fm_wdata, fm_rdata;
  logic               rdy_vld, rdy_pop, vpe_fin, ary_fin;
  logic [MADDR_W-1:0] rdy_addr;

  feature_extractor #(.AW(AW)) u_fe (
    .clk, .rst_n,
    .pkt_vld, .pkt_ready, .pkt,
    .cfg_we(h_fe && host_we), .cfg_addr(host_addr[4:0]), .cfg_wdata(host_wdata[31:0]),
    .cfg_rdata(fe_cfg_rdata),
    .fm_en, .fm_we, .fm_addr, .fm_wdata, .fm_rdata,
    .rdy_vld, .rdy_addr, .rdy_pop,
    .fin_vpe(vpe_fin), .fin_ary(ary_fin), .dec_vld, .dec_addr,
    .init_busy(fe_init_busy),
    .n_pkt(), .n_new(), .n_frozen_drop(), .n_ready(), .n_fifo_full()
  );

  // ---------------- memory fabric ----------------
  mem_fabric #(.FDEPTH(FDEPTH), .CDEPTH(CDEPTH)) u_mem (
    .clk, .rst_n,
    .fe_en(fm_en), .fe_we(fm_we), .fe_addr(fm_addr), .fe_wdata(fm_wdata), .fe_rdata(fm_rdata),
    .req(mreq), .gnt(mgnt), .rdata(mrdata)
  );

  // ---------------- VPE ----------------
  vpe #(.LANES(LANES), .UNITS(UNITS)) u_vpe (
    .clk, .rst_n,
    .crf_we(h_vc && host_we), .crf_addr(host_addr[4:0]), .crf_wdata(host_wdata[31:0]),
    .crf_rdata(vc_rdata),
    .ic_we(h_vi && host_we), .ic_addr(host_addr[9:0]), .ic_wdata(host_wdata[VLIW_W-1:0]),
    .pc_we(h_vp && host_we), .pc_addr(host_addr[10:2]), .pc_q(host_addr[1:0]),
    .pc_wdata(host_wdata),
    .fin(vpe_fin), .fin_irq(vpe_irq), .busy(),
    .mreq(mreq[1:0]), .mgnt(mgnt[1:0]), .mrdata(mrdata[1:0]),
    .fa_vld(rdy_vld), .fa_addr(rdy_addr), .fa_pop(rdy_pop),
    .perf()
  );

  // ---------------- AryPE ----------------
  arype #(.K(K)) u_arype (
    .clk, .rst_n,
    .crf_we(h_ac && host_we), .crf_addr(host_addr[4:0]), .crf_wdata(host_wdata[31:0]),
    .crf_rdata(ac_rdata),
    .ic_we(h_ai && host_we), .ic_addr(host_addr[9:0]), .ic_wdata(host_wdata[ARY_IW-1:0]),
    .pc_we(h_ap && host_we), .pc_addr(host_addr[9:0]), .pc_wdata(host_wdata[K*8-1:0]),
    .fin(ary_fin), .fin_irq(ary_irq), .busy(),
    .mreq(mreq[3:2]), .mgnt(mgnt[3:2]), .mrdata(mrdata[3:2]),
    .perf()
  );

endmodule
