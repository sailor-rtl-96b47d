// sailor_branch_unit: next-pc computation.
//
// For the current instruction at pc it computes the link address pc + 4, the
// jump or branch target (pc + imm for jal and branches; for jalr the sum
// rs1 + imm already formed by the serial ALU, with bit 0 cleared), whether
// control transfers (jumps always; branches from the ALU's eq / lt_s / lt_u
// flags and funct3) and next_pc. A transfer to a
// target that is not word aligned is flagged as misaligned, since the core
// assumes word-aligned instructions. Purely combinational; it has its own
// 32-bit adders, so branch targets do not occupy the serialized ALU, which
// only compares the operands.
//
// The paper says that a dedicated branch unit updates the pc; its contents
// are this design's choice.
module sailor_branch_unit
  import sailor_pkg::*;
(
  input  cls_e        cls,
  input  logic [2:0]  funct3,
  input  logic [31:0] pc,
  input  logic [31:0] jalr_sum,   // rs1 + imm, summed by the serial ALU
  input  logic [31:0] imm,
  input  logic        eq,
  input  logic        lt_s,
  input  logic        lt_u,
  output logic [31:0] link,
  output logic [31:0] target,
  output logic        taken,
  output logic [31:0] next_pc,
  output logic        misaligned
);
  logic cond;
  always_comb begin
    link   = pc + 32'd4;
    target = (cls == CLS_JALR) ? (jalr_sum & ~32'd1) : (pc + imm);
    case (funct3)
      3'b000:  cond = eq;
      3'b001:  cond = !eq;
      3'b100:  cond = lt_s;
      3'b101:  cond = !lt_s;
      3'b110:  cond = lt_u;
      default: cond = !lt_u;   // 3'b111
    endcase
    taken      = (cls == CLS_JAL) || (cls == CLS_JALR) || (cls == CLS_BRANCH && cond);
    next_pc    = taken ? target : link;
    misaligned = taken && (target[1:0] != 2'b00);
  end
endmodule
