// tb_sailor_branch_unit: check of the next-pc computation.
//
// For random pcs, immediates, operand pairs and all six branch conditions
// the ALU flags are derived from the operands, and link, taken, next_pc and
// the misaligned-target flag are compared with the RV32I definitions; jal
// and jalr (whose target is the already formed sum rs1 + imm, bit 0
// cleared) must always be taken. Combinational; sampled 1 ns after input.
module tb_sailor_branch_unit;
  import sailor_pkg::*;
  int checks = 0, failures = 0;
  cls_e        cls;
  logic [2:0]  funct3;
  logic [31:0] pc, jalr_sum, imm, link, target, next_pc;
  logic        eq, lt_s, lt_u, taken, misaligned;

  sailor_branch_unit dut (.cls, .funct3, .pc, .jalr_sum, .imm, .eq, .lt_s, .lt_u,
                          .link, .target, .taken, .next_pc, .misaligned);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    const logic [2:0] F3 [6] = '{3'b000, 3'b001, 3'b100, 3'b101, 3'b110, 3'b111};
    for (int v = 0; v < 2000; v++) begin
      logic [31:0] a, b, exp_t;
      bit t;
      a = $urandom; b = (v % 4 == 0) ? a : $urandom;
      if (v % 7 == 0) b = a ^ 32'h8000_0000;
      pc = $urandom & ~32'd3; imm = {{19{1'b0}}, 13'($urandom)} & ~32'd1;
      if (v % 3 == 0) imm = imm | 32'hFFFF_E000;
      if (v % 5 != 0) imm = imm & ~32'd3;
      jalr_sum = $urandom;
      eq = (a == b); lt_s = $signed(a) < $signed(b); lt_u = a < b;
      // conditional branches
      funct3 = F3[v % 6]; cls = CLS_BRANCH; #1;
      case (funct3)
        3'b000: t = a == b;  3'b001: t = a != b;
        3'b100: t = $signed(a) < $signed(b); 3'b101: t = $signed(a) >= $signed(b);
        3'b110: t = a < b;   default: t = a >= b;
      endcase
      check("branch taken", {31'd0, taken}, {31'd0, t});
      check("link", link, pc + 4);
      check("branch next_pc", next_pc, t ? pc + imm : pc + 4);
      check("branch misaligned", {31'd0, misaligned}, {31'd0, t && (imm[1:0] != 0)});
      cls = CLS_JAL; #1;
      check("jal taken", {31'd0, taken}, 1); check("jal next_pc", next_pc, pc + imm);
      cls = CLS_JALR; #1;
      exp_t = jalr_sum & ~32'd1;
      check("jalr next_pc", next_pc, exp_t);
      check("jalr misaligned", {31'd0, misaligned}, {31'd0, exp_t[1]});
      cls = CLS_ALU; #1;
      check("no transfer", {31'd0, taken}, 0); check("sequential", next_pc, pc + 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
