// sailor_decoder: instruction decoder of the fetch & decode stage.
//
// Translates one 32-bit instruction into the control word ctrl_t: the
// instruction class (which selects the sequencer's phase list), ALU function,
// serializer load sources, write-back source, register indices, the
// immediate, and the fields the cryptographic units need (AES byte select,
// SHA function, bitmanip function, xperm element size, clmul half).
//
// Covered: RV32I, Zicsr with mret/ecall/ebreak/wfi, and the Zkn suite:
// Zbkb (ror, rol, rori, andn, orn, xnor, pack, packh, brev8, rev8, zip,
// unzip), Zbkc (clmul, clmulh), Zbkx (xperm4, xperm8), Zkne/Zknd (aes32es(m)i,
// aes32ds(m)i) and Zknh (sha256sig0/1, sha256sum0/1, sha512sig0l/h,
// sha512sig1l/h, sha512sum0r/1r). Each subset can be switched off with its
// parameter; its instructions then decode as illegal. Anything else is
// CLS_ILLEGAL. Purely combinational.
//
// The paper names the decode stage only; the control-word layout is this
// design's. LUI is decoded as x0 + imm so it uses the ordinary ALU pass.
module sailor_decoder
  import sailor_pkg::*;
#(
  parameter bit EN_ZBKB = 1'b1,
  parameter bit EN_ZBKC = 1'b1,
  parameter bit EN_ZBKX = 1'b1,
  parameter bit EN_ZKNE = 1'b1,
  parameter bit EN_ZKND = 1'b1,
  parameter bit EN_ZKNH = 1'b1,
  parameter bit EN_CSR  = 1'b1
) (
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opcode, f7;
  logic [2:0] f3;
  logic [4:0] rs2f;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opcode = instr[6:0];
    f3     = instr[14:12];
    f7     = instr[31:25];
    rs2f   = instr[24:20];
    imm_i  = {{20{instr[31]}}, instr[31:20]};
    imm_s  = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b  = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u  = {instr[31:12], 12'd0};
    imm_j  = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    ctrl              = '0;
    ctrl.cls          = CLS_ILLEGAL;
    ctrl.alu_op       = ALU_ADD;
    ctrl.s1_sel       = S1_RS1;
    ctrl.s2_sel       = S2_RS2;
    ctrl.res_sel      = RES_SER2;
    ctrl.shift_fill   = FILL_ZERO;
    ctrl.sha_op       = SHA256_SIG0;
    ctrl.bm_op        = BM_ZIP;
    ctrl.rd           = instr[11:7];
    ctrl.rs1          = instr[19:15];
    ctrl.rs2          = instr[24:20];
    ctrl.funct3       = f3;
    ctrl.csr_addr     = instr[31:20];
    ctrl.bs           = instr[31:30];

    case (opcode)
      7'b0110111: begin // LUI = x0 + imm
        ctrl.cls = CLS_ALU; ctrl.rs1 = 5'd0; ctrl.s2_sel = S2_IMM; ctrl.imm = imm_u; ctrl.rd_we = 1'b1;
      end
      7'b0010111: begin // AUIPC
        ctrl.cls = CLS_ALU; ctrl.s1_sel = S1_PC; ctrl.s2_sel = S2_IMM; ctrl.imm = imm_u; ctrl.rd_we = 1'b1;
      end
      7'b1101111: begin
        ctrl.cls = CLS_JAL; ctrl.imm = imm_j; ctrl.res_sel = RES_LINK; ctrl.rd_we = 1'b1;
      end
      7'b1100111: if (f3 == 3'b000) begin
        ctrl.cls = CLS_JALR; ctrl.imm = imm_i; ctrl.s2_sel = S2_IMM; ctrl.res_sel = RES_LINK; ctrl.rd_we = 1'b1;
      end
      7'b1100011: if (f3 != 3'b010 && f3 != 3'b011) begin
        ctrl.cls = CLS_BRANCH; ctrl.imm = imm_b; ctrl.alu_op = ALU_SUB;
      end
      7'b0000011: if (f3 != 3'b011 && f3 != 3'b110 && f3 != 3'b111) begin
        ctrl.cls = CLS_LOAD; ctrl.imm = imm_i; ctrl.s2_sel = S2_IMM; ctrl.res_sel = RES_LOAD; ctrl.rd_we = 1'b1;
      end
      7'b0100011: if (f3 <= 3'b010) begin
        ctrl.cls = CLS_STORE; ctrl.imm = imm_s; ctrl.s2_sel = S2_IMM;
      end
      7'b0010011: begin // OP-IMM
        ctrl.imm = imm_i; ctrl.s2_sel = S2_IMM; ctrl.rd_we = 1'b1;
        case (f3)
          3'b000: ctrl.cls = CLS_ALU;
          3'b010: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_SUB; ctrl.res_sel = RES_LT; end
          3'b011: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_SUB; ctrl.res_sel = RES_LT; ctrl.slt_unsigned = 1'b1; end
          3'b100: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_XOR; end
          3'b110: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_OR; end
          3'b111: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_AND; end
          3'b001: begin
            if (f7 == 7'b0000000) begin
              ctrl.cls = CLS_SHIFT; ctrl.shift_left = 1'b1; ctrl.shamt_imm = 1'b1; ctrl.res_sel = RES_SER1;
            end else if (f7 == 7'b0001000 && rs2f[4:2] == 3'b000 && EN_ZKNH) begin
              ctrl.cls = CLS_SHA; ctrl.s1_sel = S1_SHA; ctrl.imm = '0;
              case (rs2f[1:0])
                2'b00:   ctrl.sha_op = SHA256_SUM0;
                2'b01:   ctrl.sha_op = SHA256_SUM1;
                2'b10:   ctrl.sha_op = SHA256_SIG0;
                default: ctrl.sha_op = SHA256_SIG1;
              endcase
            end else if (f7 == 7'b0000100 && rs2f == 5'b01111 && EN_ZBKB) begin
              ctrl.cls = CLS_BITMANIP; ctrl.bm_op = BM_ZIP; ctrl.res_sel = RES_BM;
            end
          end
          default: begin // 3'b101
            if (f7 == 7'b0000000 || f7 == 7'b0100000) begin
              ctrl.cls = CLS_SHIFT; ctrl.shamt_imm = 1'b1; ctrl.res_sel = RES_SER1;
              ctrl.shift_fill = f7[5] ? FILL_SIGN : FILL_ZERO;
            end else if (f7 == 7'b0110000 && EN_ZBKB) begin // rori
              ctrl.cls = CLS_SHIFT; ctrl.shamt_imm = 1'b1; ctrl.res_sel = RES_SER1; ctrl.shift_fill = FILL_ROT;
            end else if (instr[31:20] == 12'h687 && EN_ZBKB) begin
              ctrl.cls = CLS_BITMANIP; ctrl.bm_op = BM_BREV8; ctrl.res_sel = RES_BM;
            end else if (instr[31:20] == 12'h698 && EN_ZBKB) begin
              ctrl.cls = CLS_BITMANIP; ctrl.bm_op = BM_REV8; ctrl.res_sel = RES_BM;
            end else if (instr[31:20] == 12'h08f && EN_ZBKB) begin
              ctrl.cls = CLS_BITMANIP; ctrl.bm_op = BM_UNZIP; ctrl.res_sel = RES_BM;
            end
          end
        endcase
        if (ctrl.cls == CLS_ILLEGAL) ctrl.rd_we = 1'b0;
      end
      7'b0110011: begin // OP
        ctrl.rd_we = 1'b1;
        case ({f7, f3})
          {7'b0000000, 3'b000}: ctrl.cls = CLS_ALU;
          {7'b0100000, 3'b000}: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_SUB; end
          {7'b0000000, 3'b010}: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_SUB; ctrl.res_sel = RES_LT; end
          {7'b0000000, 3'b011}: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_SUB; ctrl.res_sel = RES_LT; ctrl.slt_unsigned = 1'b1; end
          {7'b0000000, 3'b100}: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_XOR; end
          {7'b0000000, 3'b110}: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_OR; end
          {7'b0000000, 3'b111}: begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_AND; end
          {7'b0000000, 3'b001}: begin ctrl.cls = CLS_SHIFT; ctrl.shift_left = 1'b1; ctrl.res_sel = RES_SER1; end
          {7'b0000000, 3'b101}: begin ctrl.cls = CLS_SHIFT; ctrl.res_sel = RES_SER1; end
          {7'b0100000, 3'b101}: begin ctrl.cls = CLS_SHIFT; ctrl.res_sel = RES_SER1; ctrl.shift_fill = FILL_SIGN; end
          {7'b0100000, 3'b111}: if (EN_ZBKB) begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_ANDN; end
          {7'b0100000, 3'b110}: if (EN_ZBKB) begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_ORN; end
          {7'b0100000, 3'b100}: if (EN_ZBKB) begin ctrl.cls = CLS_ALU; ctrl.alu_op = ALU_XNOR; end
          {7'b0110000, 3'b101}: if (EN_ZBKB) begin ctrl.cls = CLS_SHIFT; ctrl.res_sel = RES_SER1; ctrl.shift_fill = FILL_ROT; end
          {7'b0110000, 3'b001}: if (EN_ZBKB) begin ctrl.cls = CLS_SHIFT; ctrl.res_sel = RES_SER1; ctrl.shift_fill = FILL_ROT; ctrl.shift_left = 1'b1; end
          {7'b0000100, 3'b100}: if (EN_ZBKB && rs2f != 5'd0) begin ctrl.cls = CLS_BITMANIP; ctrl.bm_op = BM_PACK; ctrl.res_sel = RES_BM; end
          {7'b0000100, 3'b111}: if (EN_ZBKB) begin ctrl.cls = CLS_BITMANIP; ctrl.bm_op = BM_PACKH; ctrl.res_sel = RES_BM; end
          {7'b0000101, 3'b001}: if (EN_ZBKC) begin ctrl.cls = CLS_CLMUL; ctrl.alu_op = ALU_XOR; ctrl.s2_sel = S2_IMM; ctrl.imm = '0; end
          {7'b0000101, 3'b011}: if (EN_ZBKC) begin ctrl.cls = CLS_CLMUL; ctrl.alu_op = ALU_XOR; ctrl.s2_sel = S2_IMM; ctrl.imm = '0; ctrl.clmul_high = 1'b1; end
          {7'b0010100, 3'b010}: if (EN_ZBKX) begin ctrl.cls = CLS_XPERM; ctrl.alu_op = ALU_OR; end
          {7'b0010100, 3'b100}: if (EN_ZBKX) begin ctrl.cls = CLS_XPERM; ctrl.alu_op = ALU_OR; ctrl.xperm_byte = 1'b1; end
          {7'b0101000, 3'b000}: if (EN_ZKNH) begin ctrl.cls = CLS_SHA; ctrl.sha_op = SHA512_SUM0R; end
          {7'b0101001, 3'b000}: if (EN_ZKNH) begin ctrl.cls = CLS_SHA; ctrl.sha_op = SHA512_SUM1R; end
          {7'b0101010, 3'b000}: if (EN_ZKNH) begin ctrl.cls = CLS_SHA; ctrl.sha_op = SHA512_SIG0L; end
          {7'b0101011, 3'b000}: if (EN_ZKNH) begin ctrl.cls = CLS_SHA; ctrl.sha_op = SHA512_SIG1L; end
          {7'b0101110, 3'b000}: if (EN_ZKNH) begin ctrl.cls = CLS_SHA; ctrl.sha_op = SHA512_SIG0H; end
          {7'b0101111, 3'b000}: if (EN_ZKNH) begin ctrl.cls = CLS_SHA; ctrl.sha_op = SHA512_SIG1H; end
          default: begin
            // AES: bs in [31:30], function in [29:25], funct3 000
            if (f3 == 3'b000 && instr[29:25] inside {5'b10001, 5'b10011} && EN_ZKNE) begin
              ctrl.cls = CLS_AES; ctrl.aes_final = !instr[26];
            end else if (f3 == 3'b000 && instr[29:25] inside {5'b10101, 5'b10111} && EN_ZKND) begin
              ctrl.cls = CLS_AES; ctrl.aes_final = !instr[26]; ctrl.aes_dec = 1'b1;
            end
          end
        endcase
        if (ctrl.cls == CLS_SHA) begin
          ctrl.s1_sel = S1_SHA; ctrl.s2_sel = S2_IMM; ctrl.imm = '0; ctrl.alu_op = ALU_XOR;
        end
        if (ctrl.cls == CLS_AES) begin
          ctrl.s1_sel = S1_RS2; ctrl.s2_sel = S2_RS1; ctrl.alu_op = ALU_XOR;
        end
        if (ctrl.cls == CLS_ILLEGAL) ctrl.rd_we = 1'b0;
      end
      7'b0001111: ctrl.cls = CLS_FENCE;   // fence, fence.i
      7'b1110011: begin
        if (f3 == 3'b000) begin
          case (instr[31:7])
            25'h0000000:                ctrl.cls = CLS_ECALL;
            {12'h001, 13'h0}:           ctrl.cls = CLS_EBREAK;
            {12'h302, 13'h0}:           ctrl.cls = EN_CSR ? CLS_MRET : CLS_ILLEGAL;
            {12'h105, 13'h0}:           ctrl.cls = CLS_FENCE;   // wfi
            default:                    ctrl.cls = CLS_ILLEGAL;
          endcase
        end else if (f3 != 3'b100 && EN_CSR) begin
          ctrl.cls = CLS_CSR; ctrl.res_sel = RES_CSR; ctrl.rd_we = 1'b1;
          ctrl.imm = {27'd0, instr[19:15]};   // zimm
        end
      end
      default: ;
    endcase
    if (ctrl.cls == CLS_SHA && opcode == 7'b0010011) begin
      ctrl.s2_sel = S2_IMM; ctrl.alu_op = ALU_XOR;
    end
  end
endmodule
