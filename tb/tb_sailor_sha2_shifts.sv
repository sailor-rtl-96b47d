// tb_sailor_sha2_shifts: check of the Zknh fixed shift/rotate terms.
//
// For each of the ten SHA-256 / SHA-512 (RV32) operations and random plus
// edge operands, the six terms the unit delivers (term 0..5) are XORed, as
// the core's serialized ALU does, and the sum is compared with the
// instruction's definition in the reference package. A missing, extra or
// wrong term shows up as a mismatch. Combinational; sampled 1 ns after input.
module tb_sailor_sha2_shifts;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  sha_op_e     op;
  logic [2:0]  term;
  logic [31:0] rs1, rs2, y, acc;

  sailor_sha2_shifts dut (.op, .term, .rs1, .rs2, .y);

  initial begin
    for (int v = 0; v < 200; v++) begin
      case (v)
        0: begin rs1 = 32'h0000_0001; rs2 = 32'h0; end
        1: begin rs1 = 32'h0; rs2 = 32'h0000_0001; end
        2: begin rs1 = 32'h8000_0000; rs2 = 32'h8000_0000; end
        default: begin rs1 = $urandom; rs2 = $urandom; end
      endcase
      for (int f = 0; f < 10; f++) begin
        op = sha_op_e'(f);
        acc = '0;
        for (int t = 0; t < SHA_TERMS; t++) begin term = 3'(t); #1; acc ^= y; end
        checks++;
        if (acc !== ref_sha(f, rs1, rs2)) begin
          failures++;
          $display("MISMATCH %s(%h,%h): got %h expected %h", op.name(), rs1, rs2, acc, ref_sha(f, rs1, rs2));
        end
      end
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
