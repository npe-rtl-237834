// npe_pkg: types and constants shared by the NPE overlay processor.
//
// Holds the instruction formats of the instruction control unit (ICU), the
// command bundles it hands to the memory read unit (MRU), matrix multiply
// unit (MMU), nonlinear vector unit (NVU) and memory write unit (MWU), and
// the VLIW micro-instruction bundle that the NVU microprogram controller
// executes. The unit split (ICU/MRU/MMU/NVU/MWU, and LSU + three VCU slots +
// SCU inside a bundle) follows the published architecture; every field
// width, encoding and opcode value here is this design's own choice.
package npe_pkg;

  // Width of one external memory beat, one ICU instruction and one
  // micro-instruction word (all this design's choice).
  localparam int EXT_W  = 256;
  localparam int EXT_AW = 32;

  // Element widths handled by the vector and scalar compute units.
  typedef enum logic [1:0] {EW8 = 2'd0, EW16 = 2'd1, EW32 = 2'd2, EW64 = 2'd3} ew_e;

  // ---------------------------------------------------------------- ICU
  typedef enum logic [3:0] {
    I_END  = 4'd0,   // program finished
    I_MRU  = 4'd1,   // external memory -> on-chip copy
    I_MMU  = 4'd2,   // matrix multiply
    I_NVU  = 4'd3,   // start a microprogram on the NVU
    I_MWU  = 4'd4,   // NMEM -> external memory copy
    I_SYNC = 4'd5    // wait until the units in the mask are idle
  } iop_e;

  // Unit bits of the SYNC mask.
  localparam int U_MRU = 0, U_MMU = 1, U_NVU = 2, U_MWU = 3;

  localparam int PAYLOAD_W = EXT_W - 4 - 4;

  typedef struct packed {
    iop_e                 op;
    logic [3:0]           sync_mask;
    logic [PAYLOAD_W-1:0] payload;   // one of the *_cmd_t below, right aligned
  } icu_instr_t;

  typedef enum logic [1:0] {
    D_MIB_ACT = 2'd0,  // MIB activation buffer
    D_MIB_W   = 2'd1,  // MIB weight banks (one bank per PE)
    D_UCODE   = 2'd2,  // NVU microprogram memory
    D_IMEM    = 2'd3   // ICU instruction memory
  } mru_dst_e;

  typedef struct packed {
    mru_dst_e    dst;
    logic [15:0] dst_bank;   // first weight bank (D_MIB_W only)
    logic [15:0] dst_addr;   // first destination word
    logic [15:0] count;      // number of external words
    logic [31:0] ext_addr;   // first external word address
  } mru_cmd_t;

  typedef struct packed {
    logic [5:0]  qshift;     // quantization right shift
    logic [15:0] out_base;   // first MMEM row written
    logic [15:0] act_stride; // activation word step between output rows
    logic [15:0] rows;       // output rows (activation vectors)
    logic [15:0] k_steps;    // PE_LANES-element chunks accumulated per row
    logic [15:0] w_base;     // first weight word (same address in every bank)
    logic [15:0] act_base;   // first activation word
  } mmu_cmd_t;

  typedef struct packed {
    logic [31:0] arg3, arg2, arg1, arg0;  // copied to SRF s0..s3 at start
    logic [15:0] upc;                     // microprogram entry point
  } nvu_cmd_t;

  typedef struct packed {
    logic [31:0] ext_addr;  // first external word address
    logic [15:0] rows;      // NMEM rows to copy
    logic [15:0] nmem_row;  // first NMEM row
  } mwu_cmd_t;

  // ------------------------------------------------ NVU micro-instruction
  typedef enum logic [1:0] {C_SEQ = 2'd0, C_END = 2'd1, C_LDC = 2'd2, C_DJNZ = 2'd3} cop_e;

  typedef struct packed {
    cop_e       op;
    logic       cnt;     // loop counter 0 or 1
    logic [4:0] sreg;    // C_LDC: counter <= SRF[sreg]
    logic [8:0] target;  // C_DJNZ branch target
  } uctrl_t;

  typedef enum logic [3:0] {
    L_NOP     = 4'd0,
    L_LD_MMEM = 4'd1,  // VRF <- MMEM vector
    L_LD_NMEM = 4'd2,  // VRF <- NMEM, unit stride
    L_LDS     = 4'd3,  // VRF <- NMEM, strided (16-bit elements)
    L_LDX     = 4'd4,  // VRF <- NMEM, indexed (16-bit elements)
    L_ST_NMEM = 4'd5,  // NMEM <- VRF, unit stride
    L_STS     = 4'd6,  // NMEM <- VRF, strided
    L_STX     = 4'd7,  // NMEM <- VRF, indexed
    L_ST_ACT  = 4'd8,  // MIB activation buffer <- VRF
    L_ST_W    = 4'd9   // MIB weight banks <- VRF
  } lop_e;

  typedef struct packed {
    lop_e        op;
    logic [4:0]  vreg;    // data register
    logic [4:0]  base;    // SRF register holding the base address
    logic [4:0]  stride;  // SRF register holding the stride
    logic [4:0]  idx;     // vector register holding indices
    logic [15:0] offs;    // added to the base address
  } ulsu_t;

  typedef enum logic [4:0] {
    V_NOP   = 5'd0,
    // ALU / shift slot
    V_ADD   = 5'd1,  V_SUB  = 5'd2,  V_MIN  = 5'd3,  V_MAX  = 5'd4,
    V_AND   = 5'd5,  V_OR   = 5'd6,  V_XOR  = 5'd7,
    V_SLT   = 5'd8,  V_SGE  = 5'd9,  V_SEQ  = 5'd10,
    V_SLL   = 5'd11, V_SRA  = 5'd12, V_SRL  = 5'd13, V_MOV = 5'd14,
    V_WIDL  = 5'd15, V_WIDH = 5'd16, V_NARW = 5'd17,
    // multiply slot
    V_MUL   = 5'd18,
    // nonlinear / reduce slot
    V_PWL   = 5'd19, V_PWLK = 5'd20, V_PWLV = 5'd21, V_PWLS = 5'd22,
    V_RSUM  = 5'd23, V_RMAX = 5'd24, V_RMIN = 5'd25, V_DOT  = 5'd26,
    V_PERM  = 5'd27
  } vop_e;

  typedef struct packed {
    vop_e       op;
    ew_e        ew;
    logic [4:0] dst;    // VRF register, or SRF register for reductions
    logic [4:0] src1;
    logic [4:0] src2;
    logic       scal;   // second operand is SRF[sreg] broadcast
    logic [4:0] sreg;
    logic [5:0] imm;    // product shift (V_MUL, V_DOT) or fraction bits (V_PWL)
  } uvcu_t;

  typedef enum logic [3:0] {
    S_NOP = 4'd0, S_ADD = 4'd1, S_SUB = 4'd2, S_MUL = 4'd3,
    S_SLL = 4'd4, S_SRA = 4'd5, S_SRL = 4'd6, S_MIN = 4'd7,
    S_MAX = 4'd8, S_MOV = 4'd9, S_LI  = 4'd10, S_CLZ = 4'd11,
    S_PWL = 4'd12
  } sop_e;

  typedef struct packed {
    sop_e        op;
    ew_e         ew;
    logic [4:0]  dst;
    logic [4:0]  src1;
    logic [4:0]  src2;
    logic        use_imm;  // second operand is the sign-extended immediate
    logic [31:0] imm;
  } uscu_t;

  typedef struct packed {
    uctrl_t ctrl;
    ulsu_t  lsu;
    uvcu_t  va;   // ALU / shift slot
    uvcu_t  vm;   // multiply slot
    uvcu_t  vn;   // nonlinear / reduce slot
    uscu_t  scu;
  } ubundle_t;

  localparam int UBUNDLE_W = $bits(ubundle_t);

  // Piecewise-linear table size (segments).
  localparam int PWL_SEG = 16;

endpackage
