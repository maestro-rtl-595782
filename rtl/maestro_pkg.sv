// Shared constants and types of the Maestro cluster.
//
// The vector register file (VRF) holds 32 registers of VLEN = 512 bit. It is split into four
// banks whose words are 256 bit wide; register r occupies the global VRF words 2r and 2r+1,
// and global word g lives in bank g % 4 at row g / 4. A register group opened with LMUL = 8
// therefore covers 16 consecutive global words, four rows of all four banks (the layout of the
// X, Y, W and Z groups of the tensor unit). These sizes are the paper's; the word mapping is
// this design's reading of the bank drawing (V0 on banks 0-1, V1 on banks 2-3).
//
// The L1 tightly coupled data memory (TCDM) is 128 KiB in 16 word-interleaved banks of 64 bit.
package maestro_pkg;

  // ---------------- vector register file ----------------
  localparam int unsigned VLEN        = 512;
  localparam int unsigned NR_VREGS    = 32;
  localparam int unsigned VRF_BANKS   = 4;
  localparam int unsigned VRF_WORD_W  = 256;
  localparam int unsigned VRF_WORDS   = NR_VREGS * VLEN / VRF_WORD_W;  // 64 global words
  localparam int unsigned VRF_ROWS    = VRF_WORDS / VRF_BANKS;         // 16 rows per bank
  localparam int unsigned VRF_AW      = $clog2(VRF_WORDS);             // global word address

  typedef logic [VRF_WORD_W-1:0] vword_t;
  typedef logic [VRF_AW-1:0]     vaddr_t;

  // Read ports of the VRF, in the order of the per-bank priority rules.
  typedef enum logic [2:0] {
    RD_VAU_VS2  = 3'd0,  // bank port 0, highest priority
    RD_VLSU_VS2 = 3'd1,  // bank port 0, lower priority
    RD_VAU_VS1  = 3'd2,  // bank port 1, highest priority (tensor unit when in tensor mode)
    RD_VSLDU    = 3'd3,  // bank port 1, lower priority
    RD_VAU_VD   = 3'd4,  // bank port 2, highest priority
    RD_VLSU_VD  = 3'd5   // bank port 2, lower priority
  } vrf_rd_port_e;
  localparam int unsigned VRF_NR_RD = 6;

  typedef enum logic [1:0] {
    WR_VAU   = 2'd0,     // VAU or, in tensor mode, the tensor unit (shared port)
    WR_VLSU  = 2'd1,
    WR_VSLDU = 2'd2
  } vrf_wr_port_e;
  localparam int unsigned VRF_NR_WR = 3;

  // Global VRF word of word `idx` inside the register group that starts at register `vreg`.
  function automatic vaddr_t vrf_word(input logic [4:0] vreg, input int unsigned idx);
    return vaddr_t'(int'(vreg) * 2 + int'(idx));
  endfunction

  // ---------------- L1 TCDM ----------------
  localparam int unsigned L1_BYTES    = 128 * 1024;
  localparam int unsigned L1_BANKS    = 16;
  localparam int unsigned TCDM_DW     = 64;
  localparam int unsigned TCDM_AW     = 32;   // byte address
  localparam int unsigned L1_BANK_WORDS = L1_BYTES / L1_BANKS / (TCDM_DW / 8);  // 1024

  typedef struct packed {
    logic [TCDM_AW-1:0]   addr;   // byte address, 8-byte aligned
    logic                 we;
    logic [TCDM_DW/8-1:0] be;
    logic [TCDM_DW-1:0]   wdata;
  } tcdm_req_t;

  // ---------------- floating-point formats ----------------
  typedef enum logic [1:0] {
    FMT_FP16 = 2'd0,
    FMT_FP32 = 2'd1
  } fp_fmt_e;

  // ---------------- vector instructions (pre-decoded by the scalar core) ----------------
  typedef enum logic [3:0] {
    VOP_VFADD   = 4'd0,   // vd = vs2 + vs1
    VOP_VFMUL   = 4'd1,   // vd = vs2 * vs1
    VOP_VFMACC  = 4'd2,   // vd = vs1 * vs2 + vd
    VOP_VADD    = 4'd3,   // integer add (IPU)
    VOP_VMUL    = 4'd4,   // integer multiply, low half (IPU)
    VOP_VLE     = 4'd5,   // unit-stride load
    VOP_VSE     = 4'd6,   // unit-stride store
    VOP_VSLIDEUP   = 4'd7,
    VOP_VSLIDEDOWN = 4'd8,
    VOP_VMV     = 4'd9,   // whole-group register move
    VOP_TCSR    = 4'd10,  // write the tensor CSR
    VOP_TENSOR  = 4'd11   // configure and start the tensor unit
  } vop_e;

  typedef enum logic [1:0] {
    EW8  = 2'd0,
    EW16 = 2'd1,
    EW32 = 2'd2
  } vew_e;

  typedef struct packed {
    vop_e        op;
    vew_e        ew;      // element width
    logic [3:0]  lmul;    // register group size: 1, 2, 4 or 8
    logic [4:0]  vd;
    logic [4:0]  vs1;
    logic [4:0]  vs2;
    logic [31:0] rs1;     // scalar operand: base address, slide amount or CSR value
    logic [31:0] rs2;     // scalar operand for the tensor unit (packed configuration)
  } vinstr_t;

  // Functional units behind the controller.
  typedef enum logic [1:0] {
    FU_VAU   = 2'd0,
    FU_VLSU  = 2'd1,
    FU_VSLDU = 2'd2,
    FU_VTU   = 2'd3
  } fu_e;

  // Tensor CSR layout (bit positions are this design's choice).
  typedef struct packed {
    logic tensor_en;   // [4] VS1 port and shared write port routed to the tensor unit
    logic vtu_cg_en;   // [3] clock enable of the tensor unit
    logic vsldu_cg_en; // [2]
    logic vlsu_cg_en;  // [1]
    logic vau_cg_en;   // [0]
  } tcsr_t;

  // ---------------- tensor unit geometry (12 x 4 CEs) ----------------
  localparam int unsigned VTU_ROWS   = 12;   // L, rows of X and Z in a tile
  localparam int unsigned VTU_COLS   = 4;    // H, CE columns, X elements per row in flight
  localparam int unsigned VTU_PIPE   = 4;    // cycles per CE, gives the 4/8/12 column stagger
  localparam int unsigned VTU_K      = VTU_COLS * VTU_PIPE;  // 16 Z columns per tile

endpackage
