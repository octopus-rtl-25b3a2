// Shared types and constants of the Octopus in-network DL accelerator.
//
// Everything here is used by more than one module: the memory request
// bundle of the on-chip memory fabric, the unified 16-bit word address map,
// the flow-state and meta-feature formats of the feature extractor, and the
// instruction formats of the two computing engines (VPE VLIW words and
// AryPE MM/LD words). Numbers that follow the paper: 128-bit memory words,
// 8k-word feature memory, two 16k-word computing memory banks, 8k flows,
// 13-byte meta register, 16-byte history/feature word, 16 ALUs, Int-8 data.
// Bit-level encodings (opcodes, field order, address map) are this design's
// own, since the paper names the instructions but gives no encoding.
package octopus_pkg;

  // ---------------- memory fabric ----------------
  localparam int WORD_W      = 128;        // BRAM width, Sec 4.1
  localparam int WORD_BYTES  = WORD_W / 8; // 16 Int-8 elements per word
  localparam int MADDR_W     = 16;         // unified word address
  localparam int FMEM_DEPTH  = 8192;       // feature memory, Sec 4.1
  localparam int CMEM_DEPTH  = 16384;      // each computing bank, Sec 4.1
  localparam int FLOW_AW     = 13;         // 8k-depth flow-state table

  // Address map (word addresses):
  //   0x0000-0x3FFF computing bank 0, 0x4000-0x7FFF computing bank 1,
  //   0x8000-0x9FFF feature memory.
  typedef enum logic [1:0] {RGN_BANK0 = 2'd0, RGN_BANK1 = 2'd1, RGN_FEAT = 2'd2} region_e;

  function automatic region_e addr_region(input logic [MADDR_W-1:0] a);
    if (a[15])      return RGN_FEAT;
    else if (a[14]) return RGN_BANK1;
    else            return RGN_BANK0;
  endfunction

  typedef struct packed {
    logic               vld;
    logic               we;
    logic [MADDR_W-1:0] addr;
    logic [WORD_W-1:0]  wdata;
  } mem_req_t;

  // ---------------- feature extractor ----------------
  localparam int HDR_BYTES  = 96;   // header window handed over by the switch
  localparam int META_BYTES = 13;   // meta register width, Sec 3.1
  localparam int HIST_BYTES = 16;   // history register / ALU output width
  localparam int N_ALU      = 16;

  typedef struct packed {
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] sport;
    logic [15:0] dport;
    logic [7:0]  proto;
  } tuple_t;  // 13 bytes

  // Packet as handed over by the switch fabric: the first HDR_BYTES bytes of
  // the frame (byte 0 = first byte on the wire), frame length, arrival
  // timestamp and direction (ingress side).
  typedef struct packed {
    logic [HDR_BYTES-1:0][7:0] hdr;   // hdr[0] is the first wire byte
    logic [15:0]               len;
    logic [31:0]               ts;
    logic                      dir;
  } pkt_t;

  // Meta register byte positions. Byte 7 holds pkt_arv_intv as in the
  // paper's example; the rest of the layout is this design's choice.
  localparam int M_SIZE_L = 0, M_SIZE_H = 1, M_DIR = 2, M_FLAG = 3,
                 M_PROTO = 4, M_ONE = 5, M_SIZE16 = 6, M_INTV = 7,
                 M_TTL = 8, M_SPORT_L = 9, M_DPORT_L = 10, M_TOS = 11,
                 M_PKTIDX = 12;

  typedef logic [META_BYTES-1:0][7:0] meta_t;
  typedef logic [HIST_BYTES-1:0][7:0] fword_t;

  typedef struct packed {
    logic [7:0]  pkt_num;   // 0 = free entry / new flow
    logic [31:0] last_ts;
    logic [47:0] mac;
    logic        frozen;    // waiting in the in-flight FIFO for FIN
  } flow_entry_t;

  typedef enum logic [2:0] {
    ALU_NOP = 3'd0,  // keep own history byte
    ALU_ADD = 3'd1,  // sat(hist[hsel] + meta[msel])
    ALU_SUB = 3'd2,  // sat0(hist[hsel] - meta[msel])
    ALU_MAX = 3'd3,
    ALU_MIN = 3'd4,
    ALU_WR  = 3'd5,  // meta[msel]
    ALU_WRI = 3'd6   // meta[msel] if packet index == hsel, else keep
  } alu_op_e;

  typedef struct packed {
    logic    cond_en;   // only act on packets with dir == cond_dir
    logic    cond_dir;
    alu_op_e op;
    logic [3:0] hsel;
    logic [3:0] msel;
  } alu_cfg_t;  // 13 bits

  // ---------------- VPE VLIW ----------------
  localparam int N_DRF  = 8;
  localparam int N_ADRF = 8;

  typedef enum logic [1:0] {S_NOP = 2'd0, S_PRD = 2'd1, S_PRDS = 2'd2} simd_op_e;
  typedef enum logic [1:0] {V_NOP = 2'd0, V_ADD = 2'd1, V_EM = 2'd2}   vu_op_e;
  typedef enum logic [1:0] {M_NOP = 2'd0, M_FA = 2'd1, M_LD = 2'd2}    mif_op_e;

  typedef struct packed {
    simd_op_e   op;
    logic       relu;
    logic [2:0] src;    // dRf
    logic       dmem;   // 1: destination is memory at adRf[dst]
    logic       dinc;   // post-increment adRf[dst] after a memory store
    logic [2:0] dst;
  } simd_f_t;  // 12 bits

  typedef struct packed {
    vu_op_e     op;
    logic [2:0] srca;
    logic [2:0] srcb;
    logic       dmem;
    logic       dinc;
    logic [2:0] dst;
  } vu_f_t;    // 13 bits

  typedef struct packed {
    mif_op_e    op;
    logic       ainc;   // ld: post-increment adRf[adr]
    logic [2:0] adr;    // adRf index
    logic [2:0] dst;    // ld: dRf index
  } mif_f_t;   // 9 bits

  typedef struct packed {
    logic       fin;
    logic [2:0] radr;   // adRf register reported as result address
  } ctl_f_t;   // 4 bits

  typedef struct packed {
    simd_f_t simd;
    vu_f_t   vu;
    mif_f_t  mif;
    ctl_f_t  ctl;
  } vliw_t;    // 38 bits

  localparam int VLIW_W = $bits(vliw_t);

  // ---------------- AryPE ----------------
  typedef enum logic [1:0] {A_NOP = 2'd0, A_LD = 2'd1, A_MM = 2'd2, A_FIN = 2'd3} ary_op_e;

  typedef struct packed {
    ary_op_e     op;
    logic [11:0] len;   // MM: streaming length l
    logic [2:0]  x;     // MM: source adRf / LD: $p / FIN: result adRf
    logic [2:0]  y;     // MM: destination adRf
    logic        xinc;  // MM: adRf[x] += len after / LD: adRf[x] += K after
    logic        yinc;  // MM: adRf[y] += len after
  } ary_instr_t;  // 22 bits

  localparam int ARY_IW = $bits(ary_instr_t);

  // ---------------- shared arithmetic ----------------
  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  // Requantisation of an accumulator to Int-8: arithmetic shift, optional
  // ReLU, saturation.
  function automatic logic [7:0] requant(input logic signed [31:0] acc,
                                         input logic [4:0] shift,
                                         input logic relu);
    logic signed [31:0] s;
    s = acc >>> shift;
    if (relu && s < 0) s = 0;
    return sat8(s);
  endfunction

endpackage
