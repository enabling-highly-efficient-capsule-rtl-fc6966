// pim_pkg: types and constants shared by the PIM-CapsNet logic-layer RTL.
//
// The logic layer of a Hybrid Memory Cube holds one sub-memory controller and
// sixteen processing elements (PEs) per vault, a crossbar between the host
// link and the vaults, and one runtime memory access scheduler (RMAS). This
// package fixes the formats that travel between those parts:
//   * 34-bit physical addresses laid out as in the PIM-CapsNet mapping
//     (vault ID in bits 32..28, a 3-bit sub-page size indicator in bits 3..1);
//   * 16-byte memory blocks (four FP32 words) as the unit of every access;
//   * PE commands (macro operations issued by the host-side scheduler) and
//     the micro-operations the PE's OP controller steps through.
// The vault count, banks per vault, PEs per vault and the 16-byte block come
// from the paper; tag layout, command encoding and data-buffer size are this
// design's own choices.
package pim_pkg;

  // ---- HMC organisation (paper: 8 GB, 32 vaults, 16 banks/vault, 16 PEs) --
  localparam int unsigned ADDR_W      = 34;  // byte address, bits 33..0
  localparam int unsigned VAULT_ID_W  = 5;   // 32 vaults
  localparam int unsigned BANK_ID_W   = 4;   // 16 banks per vault
  localparam int unsigned BLOCK_BYTES = 16;  // access granularity
  localparam int unsigned BLOCK_W     = 128; // bits per block
  localparam int unsigned WORDS_PER_BLOCK = 4;
  localparam int unsigned BANK_ADDR_W = 20;  // blocks per bank: 16 MB / 16 B
  localparam int unsigned IND_MAX     = 4;   // indicator 000..100 = 16 B..256 B

  // ---- request tags: {vault of the requester, source inside that vault} --
  localparam int unsigned SRC_W    = 5;
  localparam int unsigned TAG_W    = VAULT_ID_W + SRC_W;
  localparam logic [SRC_W-1:0] SRC_HOST = 5'd31;  // the host link

  typedef struct packed {
    logic [VAULT_ID_W-1:0] vault;
    logic [SRC_W-1:0]      src;
  } tag_t;

  typedef struct packed {
    logic                we;
    logic [ADDR_W-1:0]   addr;
    logic [BLOCK_W-1:0]  wdata;
    tag_t                tag;
  } mem_req_t;

  typedef struct packed {
    logic [BLOCK_W-1:0]  rdata;
    tag_t                tag;
  } mem_rsp_t;

  // request from the sub-memory controller to one DRAM bank
  typedef struct packed {
    logic                   we;
    logic [BANK_ADDR_W-1:0] baddr;
    logic [BLOCK_W-1:0]     wdata;
    logic [SRC_W-1:0]       src;
  } bank_req_t;

  typedef struct packed {
    logic [BLOCK_W-1:0]     rdata;
    logic [SRC_W-1:0]       src;
  } bank_rsp_t;

  // ---- PE macro operations ------------------------------------------------
  localparam int unsigned DB_DEPTH = 32;   // data buffer entries (FP32)
  localparam int unsigned DB_AW    = 5;

  typedef enum logic [3:0] {
    PE_NOP   = 4'd0,
    PE_LOAD  = 4'd1,   // db[dst+i] <- block[addr].word[i], i = 0..3
    PE_STORE = 4'd2,   // block[addr].word[i] <- db[a+i]
    PE_SETI  = 4'd3,   // db[dst] <- imm
    PE_MAC   = 4'd4,   // db[dst] <- db[a]*db[b] + db[c]      flow 1-2
    PE_MUL   = 4'd5,   // db[dst] <- db[a]*db[b]
    PE_ADD   = 4'd6,   // db[dst] <- db[a]+db[b]
    PE_SUB   = 4'd7,   // db[dst] <- db[a]-db[b]
    PE_RSQRT = 4'd8,   // db[dst] <- 1/sqrt(db[a])  (bit-shift seed + Newton)
    PE_RECIP = 4'd9,   // db[dst] <- 1/db[a]        (bit seed + Newton)
    PE_EXP   = 4'd10   // db[dst] <- exp(db[a])     (bit-shift approximation)
  } pe_op_e;

  typedef struct packed {
    pe_op_e             op;
    logic [DB_AW-1:0]   dst;
    logic [DB_AW-1:0]   a;
    logic [DB_AW-1:0]   b;
    logic [DB_AW-1:0]   c;
    logic [ADDR_W-1:0]  addr;
    logic [31:0]        imm;
  } pe_cmd_t;

  // command as it enters the logic layer: which vault and which PE
  typedef struct packed {
    logic [VAULT_ID_W-1:0] vault;
    logic [3:0]            pe;
    pe_cmd_t               cmd;
  } host_cmd_t;

  // ---- micro-operations of the PE datapath --------------------------------
  // operand sources: latched operands, temporaries and constants
  typedef enum logic [4:0] {
    S_X = 5'd0, S_Y = 5'd1, S_Z = 5'd2,
    S_T0 = 5'd3, S_T1 = 5'd4, S_T2 = 5'd5, S_T3 = 5'd6,
    S_ZERO = 5'd7, S_LOG2E = 5'd8, S_BIAS = 5'd9, S_AVGM1 = 5'd10,
    S_RECOV = 5'd11, S_HALF = 5'd12, S_THREEHALF = 5'd13, S_TWO = 5'd14,
    S_KRSQRT = 5'd15, S_KRECIP = 5'd16
  } src_e;

  typedef enum logic [1:0] {
    ADD_F  = 2'd0,  // c + a          (FP32)
    ADD_FR = 2'd1,  // c - a          (FP32)
    ADD_IR = 2'd2   // c - a          (32-bit integer, for bit-trick seeds)
  } add_mode_e;

  typedef enum logic [0:0] {
    SH_R1 = 1'b0,   // logical right shift by one (inverse square root seed)
    SH_BS = 1'b1    // BS: FP32 value t -> bit pattern floor(t * 2^23)
  } sh_mode_e;

  typedef struct packed {
    logic       mul_en;     // unit 1 in the chain
    logic       add_en;     // unit 2 in the chain
    logic       sh_en;      // unit 3 in the chain
    add_mode_e  add_mode;
    sh_mode_e   sh_mode;
    src_e       src_a;      // multiplier operand 1, or chain input
    src_e       src_b;      // multiplier operand 2
    src_e       src_c;      // adder second operand
    logic [1:0] dst;        // temporary T0..T3
    logic       last;       // result of this step is the command's result
  } uop_t;

  // ---- constants (FP32 bit patterns) --------------------------------------
  localparam logic [31:0] FP_ZERO      = 32'h0000_0000;
  localparam logic [31:0] FP_ONE       = 32'h3F80_0000;
  localparam logic [31:0] FP_LOG2E     = 32'h3FB8_AA3B;  // log2(e)
  localparam logic [31:0] FP_BIAS      = 32'h42FE_0000;  // b = 127.0
  // Avg - 1, Avg = integral_0^1 (2^f - f) df = 1/ln2 - 1/2 = 0.9426950
  localparam logic [31:0] FP_AVGM1     = 32'hBD6A_B89B;  // -0.0573050
  // accuracy recovery: 1 + mean relative shortfall of the approximation,
  // measured over 10,000 uniformly spread arguments in [-8, 8)
  localparam logic [31:0] FP_RECOV     = 32'h3F80_01E2;  // 1.0000574
  localparam logic [31:0] FP_HALF      = 32'h3F00_0000;
  localparam logic [31:0] FP_THREEHALF = 32'h3FC0_0000;
  localparam logic [31:0] FP_TWO       = 32'h4000_0000;
  localparam logic [31:0] K_RSQRT      = 32'h5F37_59DF;  // inverse sqrt seed
  localparam logic [31:0] K_RECIP      = 32'h7EF3_11C7;  // reciprocal seed

endpackage
