// tb_sailor_alu_mask: check of the ALU operand mask (clmul, AES, xperm).
//
// The mask is combinational, so the testbench plays the core's role: it
// walks the 32 one-bit chunks of a word and forms a | b per chunk.
//  - xperm4/xperm8: E passes (E = 8 or 4); in pass k operand 1 is rs1
//    rotated right by k elements and operand 2 the result so far. After the
//    last pass the word must equal the xperm definition (out-of-range indices
//    give 0).
//  - clmul: with clmul_bit = 0 operand 1 is all zeros, with 1 it is s1.
//  - AES final round: only byte bs of operand 1 passes; middle round: all.
// Operand 2 is unmasked for every op other than xperm.
module tb_sailor_alu_mask;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;

  mask_op_e    op;
  logic [5:0]  chunk_idx;
  logic        clmul_bit, aes_final, xperm_byte;
  logic [1:0]  aes_bs;
  logic [2:0]  xperm_k;
  logic [31:0] xperm_idx;
  logic [0:0]  s1_chunk, s2_chunk, a, b, mask_a, mask_b;

  sailor_alu_mask dut (.op, .chunk_idx, .clmul_bit, .aes_final, .aes_bs, .xperm_byte, .xperm_k,
                       .xperm_idx, .s1_chunk, .s2_chunk, .a, .b, .mask_a, .mask_b);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  // one pass over all chunks; returns {a,b} words
  task automatic pass(input logic [31:0] s1, input logic [31:0] s2, output logic [31:0] wa, output logic [31:0] wb);
    for (int c = 0; c < 32; c++) begin
      chunk_idx = 6'(c); s1_chunk = s1[c]; s2_chunk = s2[c]; #1;
      wa[c] = a; wb[c] = b;
    end
  endtask

  initial begin
    logic [31:0] rs1, rs2, acc, wa, wb;
    clmul_bit = 0; aes_final = 0; aes_bs = 0; xperm_byte = 0; xperm_k = 0; xperm_idx = 0;
    s1_chunk = 0; s2_chunk = 0; chunk_idx = 0;
    for (int v = 0; v < 100; v++) begin
      rs1 = $urandom; rs2 = $urandom;
      // xperm4 and xperm8
      for (int by = 0; by < 2; by++) begin
        logic [31:0] idx;
        int e, es;
        idx = by ? (rs2 & ((v % 2) ? 32'hFFFF_FFFF : 32'h0303_0303)) : rs2;
        e = by ? 4 : 8; es = by ? 8 : 4;
        op = MASK_XPERM; xperm_byte = by[0]; xperm_idx = idx;
        acc = '0;
        for (int k = 0; k < e; k++) begin
          xperm_k = 3'(k);
          pass(ror32(rs1, es * k), acc, wa, wb);
          acc = wa | wb;
        end
        check($sformatf("xperm%0d(%h,%h)", es, rs1, idx), acc, ref_xperm(rs1, idx, by[0]));
      end
      // clmul
      op = MASK_CLMUL; clmul_bit = 1'b0; pass(rs1, rs2, wa, wb);
      check("clmul bit 0 a", wa, 32'h0); check("clmul b", wb, rs2);
      clmul_bit = 1'b1; pass(rs1, rs2, wa, wb);
      check("clmul bit 1 a", wa, rs1);
      // AES
      op = (v % 2) ? MASK_AES_DEC : MASK_AES_ENC;
      aes_bs = 2'(v); aes_final = 1'b1; pass(rs1, rs2, wa, wb);
      check("aes final a", wa, rs1 & (32'hFF << (8 * (v % 4))));
      check("aes final b", wb, rs2);
      aes_final = 1'b0; pass(rs1, rs2, wa, wb);
      check("aes middle a", wa, rs1);
      op = MASK_NONE; pass(rs1, rs2, wa, wb);
      check("none a", wa, rs1); check("none b", wb, rs2);
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
