// On-chip memory fabric: feature memory plus two computing memory banks.
//
// Following the paper: feature memory is one true-dual-port RAM (8k x 128)
// written by the feature extractor on one port and read by the computing
// domain on the other; computing memory is two true-dual-port banks
// (16k x 128 each), port A of each bank serving VPE and port B serving
// AryPE, so that both engines reach both banks at once (ping-pong buffers
// for heterogeneous collaborative computing). The control domain reaches
// computing memory too.
//
// Masters (index): 0,1 VPE ports; 2,3 AryPE ports; 4 control domain. Each
// presents a mem_req_t with a unified word address (octopus_pkg address
// map); gnt[m] is combinational and read data appears on rdata[m] in the
// cycle after a granted read. Arbitration per RAM port is fixed priority,
// lowest master index first: bank port A takes VPE ports; bank port B takes
// AryPE ports, then the control domain; the compute side of feature memory
// takes any master. Fixed priority and the control domain sharing AryPE's
// bank ports are this design's choices. Port fe_* is the feature
// extractor's own port of feature memory (no arbitration).
module mem_fabric
  import octopus_pkg::*;
#(
  parameter int FDEPTH = FMEM_DEPTH,
  parameter int CDEPTH = CMEM_DEPTH,
  localparam int FAW   = $clog2(FDEPTH),
  localparam int CAW   = $clog2(CDEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // feature extractor port of feature memory
  input  logic              fe_en,
  input  logic              fe_we,
  input  logic [FAW-1:0]    fe_addr,
  input  logic [WORD_W-1:0] fe_wdata,
  output logic [WORD_W-1:0] fe_rdata,
  // arbitrated masters
  input  mem_req_t [4:0]          req,
  output logic     [4:0]          gnt,
  output logic     [4:0][WORD_W-1:0] rdata
);

  localparam int NM = 5;
  localparam int NT = 5;   // 0 bank0.A 1 bank1.A 2 bank0.B 3 bank1.B 4 feat.B

  logic [NM-1:0][NT-1:0] elig;
  logic [NT-1:0]         t_busy;
  logic [NT-1:0][2:0]    t_win;
  logic [NT-1:0]         t_en, t_we;
  logic [NT-1:0][MADDR_W-1:0] t_addr;
  logic [NT-1:0][WORD_W-1:0]  t_wdata, t_rdata;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      region_e r;
      r = addr_region(req[m].addr);
      elig[m]    = '0;
      elig[m][0] = req[m].vld && (m < 2)  && (r == RGN_BANK0);
      elig[m][1] = req[m].vld && (m < 2)  && (r == RGN_BANK1);
      elig[m][2] = req[m].vld && (m >= 2) && (r == RGN_BANK0);
      elig[m][3] = req[m].vld && (m >= 2) && (r == RGN_BANK1);
      elig[m][4] = req[m].vld && (r == RGN_FEAT);
    end
    gnt = '0;
    for (int t = 0; t < NT; t++) begin
      t_busy[t] = 1'b0;
      t_win[t]  = '0;
      for (int m = 0; m < NM; m++) begin
        if (elig[m][t] && !t_busy[t]) begin
          t_busy[t] = 1'b1;
          t_win[t]  = 3'(m);
          gnt[m]    = 1'b1;
        end
      end
      t_en[t]    = t_busy[t];
      t_we[t]    = t_busy[t] && req[t_win[t]].we;
      t_addr[t]  = req[t_win[t]].addr;
      t_wdata[t] = req[t_win[t]].wdata;
    end
  end

  // read data return
  logic [NM-1:0][2:0]  rd_src;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_src  <= '0;
    end else begin
      for (int m = 0; m < NM; m++) begin
        for (int t = 0; t < NT; t++)
          if (elig[m][t]) rd_src[m] <= 3'(t);
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) rdata[m] = t_rdata[rd_src[m]];
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    tdp_ram #(.W(WORD_W), .DEPTH(CDEPTH)) u_bank (
      .clk,
      .a_en(t_en[b]),   .a_we(t_we[b]),   .a_addr(t_addr[b][CAW-1:0]),
      .a_wdata(t_wdata[b]),   .a_rdata(t_rdata[b]),
      .b_en(t_en[2+b]), .b_we(t_we[2+b]), .b_addr(t_addr[2+b][CAW-1:0]),
      .b_wdata(t_wdata[2+b]), .b_rdata(t_rdata[2+b])
    );
  end

  tdp_ram #(.W(WORD_W), .DEPTH(FDEPTH)) u_feature_mem (
    .clk,
    .a_en(fe_en), .a_we(fe_we), .a_addr(fe_addr), .a_wdata(fe_wdata), .a_rdata(fe_rdata),
    .b_en(t_en[4]), .b_we(t_we[4]), .b_addr(t_addr[4][FAW-1:0]),
    .b_wdata(t_wdata[4]), .b_rdata(t_rdata[4])
  );

endmodule
