// tb_sailor_decoder: check of the instruction decoder.
//
// Every instruction the core implements is encoded with random register
// fields and immediates (the encoders live in the reference package) and the
// decoded class, register addresses, write enable, immediate and
// class-specific fields (ALU operation, shift fill, SHA-2 / bit-manipulation
// function, AES byte select and round type, clmul high half, xperm element
// size, CSR address) are compared with the values the encoding defines.
// Words with unused major opcodes must decode as illegal, and an instance
// built without Zknh must reject the SHA-2 instructions. Combinational.
module tb_sailor_decoder;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  ctrl_t       ctrl, ctrl_nosha;

  sailor_decoder dut (.instr, .ctrl);
  sailor_decoder #(.EN_ZKNH(1'b0)) dut_nosha (.instr, .ctrl(ctrl_nosha));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++; $display("MISMATCH %s (instr %h): got %h expected %h", what, instr, got, exp);
    end
  endtask

  task automatic chk_cls(input string name, input cls_e c, input bit we);
    #1;
    check({name, " class"}, 32'(ctrl.cls), 32'(c));
    check({name, " rd_we"}, {31'd0, ctrl.rd_we}, {31'd0, we});
  endtask

  initial begin
    for (int v = 0; v < 200; v++) begin
      int rd, r1, r2, imm;
      logic [1:0] bs;
      rd = 1 + $urandom % 31; r1 = $urandom % 32; r2 = $urandom % 32;
      imm = int'($urandom % 4096) - 2048; bs = 2'($urandom);
      // register-register
      instr = enc_r(7'h00, r2, r1, 3'b000, rd, OP); chk_cls("add", CLS_ALU, 1);
      check("add rd", 32'(ctrl.rd), rd); check("add rs1", 32'(ctrl.rs1), r1); check("add rs2", 32'(ctrl.rs2), r2);
      check("add op", 32'(ctrl.alu_op), 32'(ALU_ADD));
      instr = enc_r(7'h20, r2, r1, 3'b000, rd, OP); chk_cls("sub", CLS_ALU, 1); check("sub op", 32'(ctrl.alu_op), 32'(ALU_SUB));
      instr = enc_r(7'h00, r2, r1, 3'b011, rd, OP); chk_cls("sltu", CLS_ALU, 1);
      check("sltu res", 32'(ctrl.res_sel), 32'(RES_LT)); check("sltu uns", 32'(ctrl.slt_unsigned), 1);
      instr = enc_r(7'h20, r2, r1, 3'b101, rd, OP); chk_cls("sra", CLS_SHIFT, 1); check("sra fill", 32'(ctrl.shift_fill), 32'(FILL_SIGN));
      instr = enc_r(7'h20, r2, r1, 3'b111, rd, OP); chk_cls("andn", CLS_ALU, 1); check("andn op", 32'(ctrl.alu_op), 32'(ALU_ANDN));
      instr = enc_r(7'h20, r2, r1, 3'b100, rd, OP); chk_cls("xnor", CLS_ALU, 1); check("xnor op", 32'(ctrl.alu_op), 32'(ALU_XNOR));
      instr = enc_r(7'h30, r2, r1, 3'b001, rd, OP); chk_cls("rol", CLS_SHIFT, 1);
      check("rol fill", 32'(ctrl.shift_fill), 32'(FILL_ROT)); check("rol left", 32'(ctrl.shift_left), 1);
      instr = enc_r(7'h04, r2 | 1, r1, 3'b100, rd, OP); chk_cls("pack", CLS_BITMANIP, 1); check("pack op", 32'(ctrl.bm_op), 32'(BM_PACK));
      instr = enc_r(7'h04, r2, r1, 3'b111, rd, OP); chk_cls("packh", CLS_BITMANIP, 1);
      instr = enc_r(7'h05, r2, r1, 3'b011, rd, OP); chk_cls("clmulh", CLS_CLMUL, 1); check("clmulh high", 32'(ctrl.clmul_high), 1);
      instr = enc_r(7'h14, r2, r1, 3'b100, rd, OP); chk_cls("xperm8", CLS_XPERM, 1); check("xperm8 byte", 32'(ctrl.xperm_byte), 1);
      instr = enc_r(7'h14, r2, r1, 3'b010, rd, OP); chk_cls("xperm4", CLS_XPERM, 1); check("xperm4 byte", 32'(ctrl.xperm_byte), 0);
      instr = enc_r({bs, 5'b10001}, r2, r1, 3'b000, rd, OP); chk_cls("aes32esi", CLS_AES, 1);
      check("esi bs", 32'(ctrl.bs), 32'(bs)); check("esi final", 32'(ctrl.aes_final), 1); check("esi dec", 32'(ctrl.aes_dec), 0);
      instr = enc_r({bs, 5'b10111}, r2, r1, 3'b000, rd, OP); chk_cls("aes32dsmi", CLS_AES, 1);
      check("dsmi final", 32'(ctrl.aes_final), 0); check("dsmi dec", 32'(ctrl.aes_dec), 1);
      instr = enc_r(7'h2e, r2, r1, 3'b000, rd, OP); chk_cls("sha512sig0h", CLS_SHA, 1); check("sig0h op", 32'(ctrl.sha_op), 32'(SHA512_SIG0H));
      check("sig0h rejected without Zknh", 32'(ctrl_nosha.cls), 32'(CLS_ILLEGAL));
      instr = enc_r(7'h29, r2, r1, 3'b000, rd, OP); chk_cls("sha512sum1r", CLS_SHA, 1); check("sum1r op", 32'(ctrl.sha_op), 32'(SHA512_SUM1R));
      instr = enc_r(7'h01, r2, r1, 3'b000, rd, OP); chk_cls("mul (not implemented)", CLS_ILLEGAL, 0);
      // immediates
      instr = enc_i(imm, r1, 3'b000, rd, OPI); chk_cls("addi", CLS_ALU, 1); check("addi imm", ctrl.imm, 32'(imm));
      check("addi s2", 32'(ctrl.s2_sel), 32'(S2_IMM));
      instr = enc_i(12'h400 | (imm & 31), r1, 3'b101, rd, OPI); chk_cls("srai", CLS_SHIFT, 1); check("srai imm", 32'(ctrl.shamt_imm), 1);
      instr = enc_i(12'h102, r1, 3'b001, rd, OPI); chk_cls("sha256sig0", CLS_SHA, 1); check("sig0 op", 32'(ctrl.sha_op), 32'(SHA256_SIG0));
      check("sig0 rejected without Zknh", 32'(ctrl_nosha.cls), 32'(CLS_ILLEGAL));
      instr = enc_i(12'h101, r1, 3'b001, rd, OPI); chk_cls("sha256sum1", CLS_SHA, 1); check("sum1 op", 32'(ctrl.sha_op), 32'(SHA256_SUM1));
      instr = enc_i(12'h08f, r1, 3'b101, rd, OPI); chk_cls("unzip", CLS_BITMANIP, 1); check("unzip op", 32'(ctrl.bm_op), 32'(BM_UNZIP));
      instr = enc_i(12'h698, r1, 3'b101, rd, OPI); chk_cls("rev8", CLS_BITMANIP, 1); check("rev8 op", 32'(ctrl.bm_op), 32'(BM_REV8));
      instr = enc_i(12'h687, r1, 3'b101, rd, OPI); chk_cls("brev8", CLS_BITMANIP, 1); check("brev8 op", 32'(ctrl.bm_op), 32'(BM_BREV8));
      instr = enc_i(imm, r1, 3'b100, rd, LD); chk_cls("lbu", CLS_LOAD, 1); check("lbu imm", ctrl.imm, 32'(imm));
      instr = enc_i(imm, r1, 3'b111, rd, LD); chk_cls("bad load", CLS_ILLEGAL, 0);
      instr = enc_s(imm, r2, r1, 3'b001); chk_cls("sh", CLS_STORE, 0); check("sh imm", ctrl.imm, 32'(imm));
      instr = enc_b(imm * 2, r2, r1, 3'b110); chk_cls("bltu", CLS_BRANCH, 0); check("bltu imm", ctrl.imm, 32'(imm * 2));
      instr = enc_j(imm * 512, rd); chk_cls("jal", CLS_JAL, 1); check("jal imm", ctrl.imm, 32'(imm * 512));
      instr = enc_i(imm, r1, 3'b000, rd, 7'b1100111); chk_cls("jalr", CLS_JALR, 1); check("jalr imm", ctrl.imm, 32'(imm));
      instr = enc_u(32'(imm) << 12, rd, 7'b0110111); chk_cls("lui", CLS_ALU, 1);
      check("lui imm", ctrl.imm, 32'(imm) << 12); check("lui rs1", 32'(ctrl.rs1), 0);
      instr = enc_u(32'(imm) << 12, rd, 7'b0010111); chk_cls("auipc", CLS_ALU, 1); check("auipc s1", 32'(ctrl.s1_sel), 32'(S1_PC));
      instr = enc_i(12'h341, r1, 3'b011, rd, SYS); chk_cls("csrrc", CLS_CSR, 1); check("csr addr", 32'(ctrl.csr_addr), 32'h341);
      instr = 32'h3020_0073; chk_cls("mret", CLS_MRET, 0);
      instr = 32'h0000_0073; chk_cls("ecall", CLS_ECALL, 0);
      instr = 32'h0010_0073; chk_cls("ebreak", CLS_EBREAK, 0);
      // unused major opcodes (e.g. AMO, FP loads, OP-32)
      instr = {$urandom} & 32'hFFFF_FF80 | 32'h0000_002F; chk_cls("AMO", CLS_ILLEGAL, 0);
      instr = {$urandom} & 32'hFFFF_FF80 | 32'h0000_0007; chk_cls("FLW", CLS_ILLEGAL, 0);
      instr = {$urandom} & 32'hFFFF_FF80 | 32'h0000_003B; chk_cls("OP-32", CLS_ILLEGAL, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
