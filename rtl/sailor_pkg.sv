// sailor_pkg: types and constants shared by the SAILOR core blocks.
//
// The core is a serialized RV32I processor with the scalar cryptography
// extensions Zkn (Zbkb, Zbkc, Zbkx, Zkne, Zknd, Zknh) and Zkt. This package
// holds the decoded control word that the decoder hands to the sequencer,
// the enumerations that select operand sources, ALU functions, operand masks
// and single-cycle helper functions, and the request/response structs of the
// two 32-bit memory ports.
//
// Memory port protocol (this design's choice; the paper only says that the
// memory interfaces are 32 bits wide and not serialized): the core raises
// req.valid with a stable address and data until it sees rsp.ready in the same
// cycle. Every accepted request is answered by exactly one rsp.rvalid pulse,
// one or more cycles later, carrying rsp.rdata for reads. One request is
// outstanding per port at a time.
package sailor_pkg;

  // Instruction classes; each class has its own fixed phase sequence.
  typedef enum logic [4:0] {
    CLS_ALU,      // register/immediate arithmetic and logic, lui, auipc, slt
    CLS_SHIFT,    // sll/srl/sra(i), ror/rol/rori (serializer 1)
    CLS_BRANCH,
    CLS_JAL,
    CLS_JALR,
    CLS_LOAD,
    CLS_STORE,
    CLS_CLMUL,    // clmul / clmulh (Zbkc)
    CLS_XPERM,    // xperm4 / xperm8 (Zbkx)
    CLS_AES,      // aes32esi/esmi/dsi/dsmi (Zkne/Zknd)
    CLS_SHA,      // sha256*/sha512* (Zknh)
    CLS_BITMANIP, // zip/unzip/brev8/rev8/pack/packh (Zbkb)
    CLS_CSR,
    CLS_FENCE,    // fence, fence.i, wfi: no operation
    CLS_ECALL,
    CLS_EBREAK,
    CLS_MRET,
    CLS_ILLEGAL
  } cls_e;

  typedef enum logic [2:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_ANDN, ALU_ORN, ALU_XNOR
  } alu_op_e;

  // Serializer 1 load source (Fig. 2: pc, rs1/rs2, SHA-2 output, AES output)
  typedef enum logic [1:0] {S1_RS1, S1_RS2, S1_PC, S1_SHA} s1_sel_e;
  // Serializer 2 load source (Fig. 2: imm., rs2/rs1)
  typedef enum logic [1:0] {S2_RS2, S2_IMM, S2_RS1} s2_sel_e;

  // Write-back source (Fig. 2 rd multiplexer and this design's extra inputs)
  typedef enum logic [2:0] {
    RES_SER2,   // ALU result collected in serializer 2
    RES_LT,     // slt/sltu flag
    RES_SER1,   // shift result
    RES_LINK,   // pc + 4
    RES_LOAD,   // load value from the load/store unit
    RES_BM,     // bitmanip output
    RES_CSR     // old CSR value
  } res_sel_e;

  typedef enum logic [1:0] {FILL_ZERO, FILL_SIGN, FILL_ROT} fill_e;

  // Serializer 1 commands
  typedef enum logic [1:0] {
    S1_HOLD,      // keep value
    S1_ROTCHUNK,  // rotate right by one chunk (ALU pass)
    S1_STEP,      // shift by SHIFT_STEP bits
    S1_BIT        // shift by one bit
  } s1_cmd_e;

  // ALU operand mask selection (Fig. 3, op_crypto)
  typedef enum logic [2:0] {
    MASK_NONE, MASK_CLMUL, MASK_AES_ENC, MASK_AES_DEC, MASK_XPERM
  } mask_op_e;

  typedef enum logic [3:0] {
    SHA256_SIG0, SHA256_SIG1, SHA256_SUM0, SHA256_SUM1,
    SHA512_SIG0L, SHA512_SIG0H, SHA512_SIG1L, SHA512_SIG1H,
    SHA512_SUM0R, SHA512_SUM1R
  } sha_op_e;

  typedef enum logic [2:0] {BM_ZIP, BM_UNZIP, BM_BREV8, BM_REV8, BM_PACK, BM_PACKH} bm_op_e;

  // GF(2^8) constants the xt2 unit multiplies by
  typedef enum logic [2:0] {XT_2, XT_3, XT_9, XT_B, XT_D, XT_E} xt_sel_e;

  // Number of XOR terms every Zknh instruction is given (constant time, Zkt)
  localparam int unsigned SHA_TERMS = 6;
  // AES byte-assembly pushes per instruction (constant time, Zkt)
  localparam int unsigned AES_PUSHES = 8;

  // Exception / interrupt cause codes (RISC-V privileged spec)
  localparam logic [4:0] CAUSE_INSTR_MISALIGNED = 5'd0;
  localparam logic [4:0] CAUSE_ILLEGAL          = 5'd2;
  localparam logic [4:0] CAUSE_BREAKPOINT       = 5'd3;
  localparam logic [4:0] CAUSE_LOAD_MISALIGNED  = 5'd4;
  localparam logic [4:0] CAUSE_STORE_MISALIGNED = 5'd6;
  localparam logic [4:0] CAUSE_ECALL_M          = 5'd11;
  localparam logic [4:0] IRQ_SOFT               = 5'd3;
  localparam logic [4:0] IRQ_TIMER              = 5'd7;
  localparam logic [4:0] IRQ_EXT                = 5'd11;

  typedef struct packed {
    cls_e       cls;
    alu_op_e    alu_op;
    s1_sel_e    s1_sel;
    s2_sel_e    s2_sel;
    res_sel_e   res_sel;
    logic       rd_we;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic [31:0] imm;
    logic [2:0] funct3;      // branch condition, memory size, CSR operation
    logic       shift_left;
    fill_e      shift_fill;
    logic       shamt_imm;   // shift amount from the immediate, else rs2[4:0]
    logic       slt_unsigned;
    logic       aes_dec;
    logic       aes_final;   // aes32esi / aes32dsi
    logic [1:0] bs;          // AES byte select
    sha_op_e    sha_op;
    bm_op_e     bm_op;
    logic       clmul_high;
    logic       xperm_byte;  // xperm8 (else xperm4)
    logic [11:0] csr_addr;
  } ctrl_t;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        ready;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

endpackage
