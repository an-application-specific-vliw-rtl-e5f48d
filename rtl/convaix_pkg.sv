// convaix_pkg: sizes, types and the instruction encoding shared by the
// ConvAix core and its units.
//
// Sizes that follow the paper: 16-bit fixed-point words, vectors of 16
// lanes (256 bit), 4 slices per vector ALU, 3 vector ALUs (slots 1-3),
// 32 scalar registers, VR = 16 x 256 bit in 4 sub-regions, VRl = 12 x 512 bit
// in 3 sub-regions, 16 DM banks of 8 KByte, 16 KByte of program memory and an
// 8 x 16 bit external memory port.
//
// The instruction set and its binary encoding are this design's own (the
// paper programs the processor in C and lists no instructions). A bundle is
// 128 bits: slot 0 in bits [31:0], vector slot k (1..3) in bits [32k+31:32k].
//
// Slot 0 word:  [31:26] op  [25:21] rd  [20:16] ra  [15:0] imm
//               (ALU: [15:11] rb, [3:0] func)
// Vector slot:  [31:27] op  [26] perm  [25:22] d/vd  [21:18] b/va
//               [17:14] vb  [13:12] ia
package convaix_pkg;

  localparam int unsigned DW        = 16;        // data word
  localparam int unsigned AW        = 32;        // accumulator lane
  localparam int unsigned VLEN      = 16;        // lanes per vector
  localparam int unsigned NSLICE    = 4;         // slices per vector ALU
  localparam int unsigned NVALU     = 3;         // vector issue slots
  localparam int unsigned NR        = 32;        // scalar registers
  localparam int unsigned NVR       = 16;        // VR entries
  localparam int unsigned NVRL      = 12;        // VRl entries
  localparam int unsigned NBANK     = 16;        // DM banks
  localparam int unsigned BANK_WORDS= 4096;      // 8 KByte / 16 bit
  localparam int unsigned PM_DEPTH  = 1024;      // 16 KByte / 128 bit
  localparam int unsigned PCW       = 10;
  localparam int unsigned BUNDLE_W  = 128;
  localparam int unsigned EXT_WORDS = 8;         // 8 x 16 bit external port
  localparam int unsigned LB_WORDS  = 512;       // line buffer capacity

  typedef logic [DW-1:0]               word_t;
  typedef logic [VLEN-1:0][DW-1:0]     vec_t;     // 256 bit
  typedef logic [VLEN-1:0][AW-1:0]     accv_t;    // 512 bit
  typedef logic [VLEN-1:0]             lmask_t;   // lane/word enables
  typedef logic [PCW-1:0]              pc_t;

  // ---------------- slot 0 ----------------
  typedef enum logic [5:0] {
    S0_NOP   = 6'd0,
    S0_LI    = 6'd1,   // R[rd] = imm
    S0_ADDI  = 6'd2,   // R[rd] = R[ra] + imm
    S0_ALU   = 6'd3,   // R[rd] = R[ra] func R[rb]  (32-bit funcs use pairs)
    S0_LD    = 6'd4,   // R[rd] = DM[R[ra]+imm]
    S0_ST    = 6'd5,   // DM[R[ra]+imm] = R[rd]
    S0_VLD   = 6'd6,   // VR[rd[3:0]] = DM[R[ra]+imm +: 16]; rd[4]: to VR[4s+rd[1:0]], all s
    S0_VST   = 6'd7,   // DM[R[ra]+imm +: 16] = VR[rd[3:0]]
    S0_VLD2  = 6'd8,   // VR[rd] = DM[R[ra]], VR[imm[3:0]] = DM[R[rb]] (both ports)
    S0_VLDL  = 6'd9,   // VRl[rd] = {DM[a+16 +:16] hi, DM[a +:16] lo}
    S0_VSTL  = 6'd10,  // inverse of VLDL
    S0_LBFILL= 6'd11,  // line buffer <- DM: R[ra]=dm addr, R[rb]=lb addr, R[imm[10:6]]=count
    S0_LBRD  = 6'd12,  // VR[rd] = LB[R[ra]+imm[13:0] + i*(imm[15:14]+1)]; rd[4] as VLD
    S0_DMA   = 6'd13,  // ext {R[rd+1],R[rd]}, dm R[ra], beats R[rb], dir imm[0]
    S0_WAIT  = 6'd14,  // stall while DMA (imm[0]) / LB fill (imm[1]) busy
    S0_BNZ   = 6'd15,  // if R[ra]!=0 pc += imm
    S0_BEZ   = 6'd16,  // if R[ra]==0 pc += imm
    S0_J     = 6'd17,  // pc += imm
    S0_HALT  = 6'd18,
    S0_VCFG  = 6'd19,  // vector ALU config = R[ra]
    S0_VPERM = 6'd20   // permutation pattern = VR[rd[3:0]]
  } s0_op_e;

  typedef enum logic [3:0] {
    F_ADD = 4'd0, F_SUB = 4'd1, F_AND = 4'd2, F_OR  = 4'd3,
    F_XOR = 4'd4, F_SHL = 4'd5, F_SRA = 4'd6, F_SRL = 4'd7,
    F_MUL = 4'd8, F_SLT = 4'd9, F_ADD32 = 4'd10, F_SUB32 = 4'd11
  } alu_func_e;

  typedef struct packed {
    s0_op_e      op;
    logic [4:0]  rd;
    logic [4:0]  ra;
    logic [4:0]  rb;
    logic [15:0] imm;
    alu_func_e   func;
  } s0_dec_t;

  // ---------------- vector slots ----------------
  typedef enum logic [4:0] {
    V_NOP  = 5'd0,
    V_MAC  = 5'd1,   // acc[s] += A[s] * B'[s]
    V_MUL  = 5'd2,   // acc[s]  = A[s] * B'[s]
    V_OUT  = 5'd3,   // VR[4s+d] = narrow(acc[s])
    V_CLR  = 5'd4,   // acc[s]  = 0
    V_RELU = 5'd8,   // slot 1 only: VR[vd] = max(VR[va],0)
    V_MAX  = 5'd9,   // slot 1 only: VR[vd] = max(VR[va],VR[vb])
    V_PMAX = 5'd10   // slot 1 only: pairwise max of {VR[vb],VR[va]}
  } v_op_e;

  typedef struct packed {
    v_op_e       op;
    logic        perm;
    logic [3:0]  d;    // vd (unit ops) / d in low 2 bits (V_OUT)
    logic [3:0]  b;    // VR entry for the broadcast operand / va
    logic [3:0]  vb;
    logic [1:0]  ia;   // index inside each VR sub-region for operand A
  } v_dec_t;

  // vector ALU run-time configuration (set by VCFG from R[ra])
  typedef struct packed {
    logic [4:0] pg;     // effective operand width (0 or 16 = full 16 bit)
    logic       sat;    // saturate when narrowing
    logic       rnd;    // 1: round half up, 0: truncate
    logic [4:0] frac;   // fractional right shift when narrowing
  } vcfg_t;

  function automatic vcfg_t vcfg_from_word(word_t w);
    vcfg_t c;
    c.frac = w[4:0];
    c.rnd  = w[5];
    c.sat  = w[6];
    c.pg   = w[11:7];
    return c;
  endfunction

  typedef enum logic [1:0] {MA_RELU = 2'd0, MA_MAX = 2'd1, MA_PMAX = 2'd2, MA_PASS = 2'd3} ma_op_e;

  // memory-controller request: 16 word lanes starting at a word address
  typedef struct packed {
    logic        req;
    logic        we;
    logic [15:0] addr;   // word address of lane 0
    lmask_t      lanes;  // which of the 16 consecutive words take part
    vec_t        wdata;  // lane i -> word addr+i
  } mreq_t;

endpackage
