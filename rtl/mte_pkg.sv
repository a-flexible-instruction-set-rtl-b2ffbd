// mte_pkg: types and constants shared by the Matrix Tile Extension (MTE) vector unit.
//
// MTE reuses the vector register file of a long-vector processor to hold matrix tiles: a
// VLEN-bit register is read as VLEN/RLEN rows of RLEN bits each. The default numbers below are
// those of the vector implementation the evaluation calls MTE_32v: VLEN = 8192 bits, RLEN = 512
// bits, 32 architectural vector registers and a 2048-bit wide unit, i.e. 64 lanes of 32 bits.
//
// The 64-bit MTE CSR holds tm, tn, tk (12 bits each), ttypei and ttypeo (4 bits each), rlenb
// (12 bits) and 8 reserved bits; the field widths follow the paper, their order inside the word
// and the meaning of each ttype bit are this design's choice (see mte_csr_t and ttype_t).
// The instruction struct (mte_instr_t) is a decoded form of the MTE instructions plus the few
// vector instructions the MTE GEMM kernel needs; its layout is not an encoding from the paper.
package mte_pkg;

  // ---- default configuration (MTE_32v) ----
  localparam int unsigned VLEN_D   = 8192;  // vector register length in bits
  localparam int unsigned RLEN_D   = 512;   // tile row length in bits
  localparam int unsigned NLANES_D = 64;    // 2048-bit unit / 32-bit lanes
  localparam int unsigned NREGS_D  = 32;    // architectural vector registers
  localparam int unsigned ELEN     = 32;    // datapath element width (SEW 32)
  localparam int unsigned XLEN     = 64;    // scalar register width
  localparam int unsigned DIMW     = 12;    // CSR dimension field width (max 4095)

  // ---- element widths ----
  typedef enum logic [1:0] {SEW8 = 2'd0, SEW16 = 2'd1, SEW32 = 2'd2, SEW64 = 2'd3} sew_e;

  // ttype field: 2 bits of SEW plus 2 policy bits (1 = agnostic, 0 = undisturbed)
  typedef struct packed {
    logic row_agn;   // [3] inactive rows (vector tail)
    logic col_agn;   // [2] inactive columns inside active rows
    sew_e sew;       // [1:0]
  } ttype_t;

  // 64-bit MTE CSR
  typedef struct packed {
    logic [7:0]      rsvd;    // [63:56]
    logic [11:0]     rlenb;   // [55:44] RLEN in bytes, read-only
    ttype_t          ttypeo;  // [43:40]
    ttype_t          ttypei;  // [39:36]
    logic [DIMW-1:0] tk;      // [35:24]
    logic [DIMW-1:0] tn;      // [23:12]
    logic [DIMW-1:0] tm;      // [11:0]
  } mte_csr_t;

  // tile operand kinds of tl/tvmask
  typedef enum logic [1:0] {TILE_A = 2'd0, TILE_B = 2'd1, TILE_C = 2'd2, TILE_BT = 2'd3} tile_e;

  // decoded operations accepted by the unit
  typedef enum logic [3:0] {
    OP_TSSM    = 4'd0,   // tile set shape M
    OP_TSSN    = 4'd1,   // tile set shape N
    OP_TSSK    = 4'd2,   // tile set shape K
    OP_CSRW    = 4'd3,   // write the whole MTE CSR (rlenb stays read-only)
    OP_VSETVL  = 4'd4,   // set vector length (e32)
    OP_TL      = 4'd5,   // t{t}l[a,b,c,bt] tile load
    OP_TSC     = 4'd6,   // t{t}sc C tile store
    OP_TMUL    = 4'd7,   // integer tile MMA
    OP_TFMUL   = 4'd8,   // FP32 tile MMA
    OP_TVMASK  = 4'd9,   // tvmask[a,b,c,bt]
    OP_VBCAST  = 4'd10,  // vd[i] = x
    OP_VMUL_VX = 4'd11,  // vd[i] = vs2[i] * x          (int)
    OP_VFMUL_VF= 4'd12,  // vd[i] = vs2[i] * f          (fp32)
    OP_VMACC_VX= 4'd13,  // vd[i] = vd[i] + vs2[i] * x  (int)
    OP_VFMACC_VF=4'd14   // vd[i] = vd[i] + vs2[i] * f  (fp32)
  } mte_op_e;

  typedef struct packed {
    mte_op_e         op;
    tile_e           tile;   // operand kind for OP_TL / OP_TVMASK
    logic            trans;  // transposed load/store (ttl, tts)
    logic            vm;     // 1: masked by v0
    logic [4:0]      vd;
    logic [4:0]      vs1;
    logic [4:0]      vs2;
    logic [2:0]      ttypeio; // tss immediate
    logic [XLEN-1:0] rs1;    // scalar operand (request, base address, scalar value)
    logic [XLEN-1:0] rs2;    // scalar operand (leading dimension in bytes)
  } mte_instr_t;

  // lane function-unit operations
  typedef enum logic [2:0] {
    LOP_MOVE  = 3'd0,  // result = a
    LOP_MUL_I = 3'd1,  // result = a*b       (ALU)
    LOP_MAC_I = 3'd2,  // result = c + a*b   (ALU)
    LOP_MUL_F = 3'd3,  // result = a*b       (FPU)
    LOP_MAC_F = 3'd4   // result = fma(a,b,c) (FPU)
  } lane_op_e;

  // how the lane interconnect forms the a/b operands and the element enables
  typedef enum logic [1:0] {
    XB_CVFMA = 2'd0,   // a = A[row,k] from lane of column k, b = B[k,col], implicit tn mask
    XB_VX    = 2'd1,   // a = own vs2 element, b = scalar
    XB_BCAST = 2'd2,   // a = scalar
    XB_IMAGE = 2'd3    // a = element of the register image held by the tile LSU / tvmask
  } xbar_mode_e;

  // control word that travels with a micro-op from the read stage to the execute stage
  typedef struct packed {
    logic        valid;    // micro-op writes back
    logic        capture;  // read-only: hand the vd operand buffer to the tile LSU (stores)
    lane_op_e    op;
    xbar_mode_e  mode;
    logic        vm;       // apply v0 mask
    logic [4:0]  wreg;
    logic [7:0]  slot;     // step index (slot inside each lane's VRF slice)
    logic [11:0] k;        // cvfma index
    logic [15:0] vlim;     // elements with index >= vlim are inactive (tail)
    logic [11:0] ncols;    // active columns per row for the implicit cvfma mask
  } uop_ctrl_t;

  // read-stage request to every lane
  typedef struct packed {
    logic       en;
    logic [4:0] vd_reg;
    logic [7:0] vd_slot;
    logic [4:0] vs1_reg;
    logic [7:0] vs1_slot;
    logic [4:0] vs2_reg;
    logic [7:0] vs2_slot;
    logic [7:0] v0_slot;
  } lane_rd_t;

  function automatic int unsigned sew_bits(sew_e s);
    return 8 << s;
  endfunction

endpackage
