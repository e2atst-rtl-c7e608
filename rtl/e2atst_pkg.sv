// e2atst_pkg: sizes, encodings and bundles shared by the accelerator blocks.
//
// LANES is the vector width of every SRAM word and of the SOMA/GRAD/RES and
// BN datapaths; it equals the 64 columns of the 64x64 matrix array so that one
// drained array row is one SRAM word. FP16 SRAM words hold LANES binary16
// values, spike SRAM words hold LANES one-bit spikes or masks.
// The memory requests (mem_req_t / mem_rsp_t) are the bundle every fetch&store
// unit and the bus interface drive towards the SRAM banks: one read port and
// one write port per bank, read data one cycle after the request.
// The reuse-module mode encoding (GRAD=0, SOMA=1, RES=2) is the selector
// numbering printed on the mode multiplexer of the paper's reuse figure;
// everything else here (bank counts, address widths, command layout) is this
// design's own choice.
package e2atst_pkg;

  localparam int unsigned LANES    = 64;   // SRAM word / vector lanes
  localparam int unsigned AW       = 10;   // word address width of every bank
  localparam int unsigned NFP      = 4;    // FP16 SRAM banks
  localparam int unsigned NSPK     = 2;    // spike SRAM banks (spikes, masks)
  localparam int unsigned PAW      = 6;    // Para SRAM address width
  localparam int unsigned LENW     = 12;   // operation length field
  localparam int unsigned NFP_RD   = 3;    // FP16 read slots of a requester
  localparam int unsigned NFP_WR   = 2;    // FP16 write slots of a requester
  localparam int unsigned NSPK_RD  = 2;
  localparam int unsigned NSPK_WR  = 2;

  typedef logic [LANES-1:0][15:0]  fpvec_t;
  typedef logic [LANES-1:0]        spkvec_t;

  // selector values of the reuse-module mode multiplexer
  typedef enum logic [1:0] {
    RM_GRAD = 2'd0,
    RM_SOMA = 2'd1,
    RM_RES  = 2'd2
  } rm_mode_e;

  typedef enum logic [2:0] {
    OP_NOP  = 3'd0,
    OP_MM   = 3'd1,   // matrix multiply tile on the 64x64 array
    OP_SOMA = 3'd2,   // LIF forward: membrane update, fire, gradient mask
    OP_GRAD = 3'd3,   // LIF backward: potential gradient
    OP_RES  = 3'd4,   // residual element-wise addition
    OP_BNF  = 3'd5,   // forward batch normalization
    OP_BNB  = 3'd6    // backward batch normalization
  } op_e;

  // One command, 128 bits, written over the bus as four 32-bit words.
  typedef struct packed {
    op_e              op;        // 3
    logic             a_spike;   // MM: A operand from spike SRAM (FP/WG), else FP16 (BP)
    logic             first;     // SOMA: t = first step; GRAD: t = last step
    logic [LENW-1:0]  len;       // MM: reduction length; others: rows / batch m
    logic [1:0]       s0_bank;   // MM A | PS | BN x or dY
    logic [AW-1:0]    s0_addr;
    logic [1:0]       s1_bank;   // MM B | U(t-1) or U(t) | residual | BN N
    logic [AW-1:0]    s1_addr;
    logic [1:0]       s2_bank;   // GRAD: dU(t+1)
    logic [AW-1:0]    s2_addr;
    logic [1:0]       d0_bank;   // MM out | U(t) | dU(t) | RES sum | BN y or dX
    logic [AW-1:0]    d0_addr;
    logic [1:0]       d1_bank;   // BNF: N
    logic [AW-1:0]    d1_addr;
    logic [AW-1:0]    sk_raddr;  // spike banks read address (S, mask)
    logic [AW-1:0]    sk_waddr;  // spike banks write address
    logic [PAW-1:0]   p0;        // Para: gamma
    logic [PAW-1:0]   p1;        // Para: beta (BNF) | sqrt (BNB)
    logic [PAW-1:0]   p2;        // Para: sqrt out (BNF) | dgamma (BNB)
    logic [PAW-1:0]   p3;        // Para: dbeta (BNB)
    logic [6:0]       pad;
  } cmd_t;

  // scalar configuration registers
  typedef struct packed {
    fp16_pkg::fp16_t alpha;     // leakage factor
    fp16_pkg::fp16_t beta_sg;   // surrogate-gradient height (beta input of GRAD mode)
    fp16_pkg::fp16_t th_f;      // firing threshold
    fp16_pkg::fp16_t th_l;      // lower bound of the gradient-mask window
    fp16_pkg::fp16_t th_r;      // upper bound of the gradient-mask window
    fp16_pkg::fp16_t eps;       // BN epsilon
  } cfg_t;

  typedef struct packed {
    logic                     en;
    logic [$clog2(NFP)-1:0]   bank;
    logic [AW-1:0]            addr;
  } fp_rd_t;

  typedef struct packed {
    logic                     en;
    logic [$clog2(NFP)-1:0]   bank;
    logic [AW-1:0]            addr;
    logic [LANES-1:0]         mask;
    fpvec_t                   data;
  } fp_wr_t;

  typedef struct packed {
    logic                     en;
    logic [$clog2(NSPK)-1:0]  bank;
    logic [AW-1:0]            addr;
  } spk_rd_t;

  typedef struct packed {
    logic                     en;
    logic [$clog2(NSPK)-1:0]  bank;
    logic [AW-1:0]            addr;
    logic [LANES-1:0]         mask;
    spkvec_t                  data;
  } spk_wr_t;

  typedef struct packed {
    logic             en;
    logic [PAW-1:0]   addr;
  } par_rd_t;

  typedef struct packed {
    logic             en;
    logic [PAW-1:0]   addr;
    logic [LANES-1:0] mask;
    fpvec_t           data;
  } par_wr_t;

  // everything one requester (a fetch&store unit or the bus) drives
  typedef struct packed {
    fp_rd_t  [NFP_RD-1:0]  fr;
    fp_wr_t  [NFP_WR-1:0]  fw;
    spk_rd_t [NSPK_RD-1:0] sr;
    spk_wr_t [NSPK_WR-1:0] sw;
    par_rd_t               pr;
    par_wr_t               pw;
  } mem_req_t;

  // read data returned to it, one cycle after the request
  typedef struct packed {
    fpvec_t  [NFP_RD-1:0]  fr;
    spkvec_t [NSPK_RD-1:0] sr;
    fpvec_t                pr;
  } mem_rsp_t;

endpackage
