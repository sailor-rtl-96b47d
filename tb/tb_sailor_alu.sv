// tb_sailor_alu: check of the chunk-serial ALU.
//
// Instances with 1-, 8- and 32-bit chunks get the same random operand pairs
// (plus edge values) for every operation. Each word is fed LSB chunk first
// over N = 32/W enabled cycles with `first` on chunk 0 and `last` on chunk
// N-1; the result chunks are collected and compared with the 32-bit result,
// and one cycle after the last chunk the eq / lt_s / lt_u flags of a
// subtraction must match the comparison of the two words. The carry must
// not leak from one word into the next, which the back-to-back words check.
module tb_sailor_alu;
  import sailor_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  alu_op_e op;

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  function automatic logic [31:0] ref_op(input alu_op_e o, input logic [31:0] a, input logic [31:0] b);
    case (o)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_AND:  return a & b;
      ALU_OR:   return a | b;
      ALU_XOR:  return a ^ b;
      ALU_ANDN: return a & ~b;
      ALU_ORN:  return a | ~b;
      default:  return ~(a ^ b);
    endcase
  endfunction

  logic [31:0] opa [3], opb [3], res [3];
  logic        done [3];

  for (genvar g = 0; g < 3; g++) begin : g_w
    localparam int W = (g == 0) ? 1 : (g == 1) ? 8 : 32;
    localparam int N = 32 / W;
    logic         en, first, last, eq, lt_s, lt_u;
    logic [W-1:0] a, b, y;
    sailor_alu #(.SERIAL_WIDTH(W)) u_alu (.clk, .rst_n, .en, .first, .last, .op, .a, .b, .y, .eq, .lt_s, .lt_u);

    task automatic run_word();
      for (int c = 0; c < N; c++) begin
        en = 1; first = (c == 0); last = (c == N - 1);
        a = opa[g][W*c +: W]; b = opb[g][W*c +: W];
        #1 res[g][W*c +: W] = y;
        @(negedge clk);
      end
      en = 0; first = 0; last = 0;
    endtask

    initial begin
      en = 0; first = 0; last = 0; a = '0; b = '0;
      wait (rst_n);
      @(negedge clk);
      for (int v = 0; v < 300; v++) begin
        wait (done[g] == 1'b0);
        run_word();
        if (op == ALU_SUB) begin
          check($sformatf("W=%0d eq", W), {31'd0, eq}, {31'd0, opa[g] == opb[g]});
          check($sformatf("W=%0d lt_u", W), {31'd0, lt_u}, {31'd0, opa[g] < opb[g]});
          check($sformatf("W=%0d lt_s", W), {31'd0, lt_s}, {31'd0, $signed(opa[g]) < $signed(opb[g])});
        end
        check($sformatf("W=%0d %s(%h,%h)", W, op.name(), opa[g], opb[g]), res[g], ref_op(op, opa[g], opb[g]));
        done[g] = 1'b1;
      end
    end
  end

  initial begin
    logic [31:0] ea [6] = '{32'h0, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'h1, 32'h8000_0001};
    foreach (done[i]) done[i] = 1'b1;
    op = ALU_ADD;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < 300; v++) begin
      logic [31:0] a, b;
      a = (v < 36) ? ea[v % 6] : $urandom;
      b = (v < 36) ? ea[v / 6] : ((v % 5 == 0) ? a : $urandom);
      op = alu_op_e'((v % 3 == 0) ? 1 : v % 8);
      foreach (opa[i]) begin opa[i] = a; opb[i] = b; end
      foreach (done[i]) done[i] = 1'b0;
      wait (done[0] && done[1] && done[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
