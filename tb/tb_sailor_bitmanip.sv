// tb_sailor_bitmanip: check of the single-cycle Zbkb permutations.
//
// zip, unzip, brev8, rev8, pack and packh are applied to edge and random
// operands and compared with bit-loop reference functions; zip followed by
// unzip must also return the operand. Combinational; sampled 1 ns after input.
module tb_sailor_bitmanip;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  bm_op_e      op;
  logic [31:0] rs1, rs2, y, exp;

  sailor_bitmanip dut (.op, .rs1, .rs2, .y);

  initial begin
    for (int v = 0; v < 300; v++) begin
      rs1 = (v == 0) ? 32'h0000_0001 : (v == 1) ? 32'h8000_0000 : (v == 2) ? 32'hFFFF_0000 : $urandom;
      rs2 = $urandom;
      for (int o = 0; o < 6; o++) begin
        op = bm_op_e'(o); #1;
        case (op)
          BM_ZIP:   exp = ref_zip(rs1);
          BM_UNZIP: exp = ref_unzip(rs1);
          BM_BREV8: exp = ref_brev8(rs1);
          BM_REV8:  exp = {rs1[7:0], rs1[15:8], rs1[23:16], rs1[31:24]};
          BM_PACK:  exp = {rs2[15:0], rs1[15:0]};
          default:  exp = {16'd0, rs2[7:0], rs1[7:0]};
        endcase
        checks++;
        if (y !== exp) begin
          failures++; $display("MISMATCH %s(%h,%h): got %h expected %h", op.name(), rs1, rs2, y, exp);
        end
      end
      checks++;
      if (ref_unzip(ref_zip(rs1)) !== rs1) begin failures++; $display("zip/unzip not inverse"); end
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
