// sailor_alu: chunk-wise arithmetic-logic unit of the serialized data path.
//
// Processes one SERIAL_WIDTH-bit chunk of each operand per cycle (en = 1),
// least significant chunk first. The carry of add/sub is kept in a flip-flop
// between chunks; the first chunk (first = 1) starts with carry-in 0 for add
// and 1 for sub (two's complement). Logic functions include the Zbkb
// negated forms andn, orn and xnor (a op ~b).
//
// Flags for slt/sltu and branches are accumulated alongside: eq is set when
// all chunks of a and b were equal; at the last chunk (last = 1) lt_s and
// lt_u are taken from the sign bits and the final carry of a - b. The flags
// are registered and valid from the cycle after the last chunk until the
// next pass starts.
//
// The paper gives the ALU's role and width, not its insides; the flag logic
// and the negated-operand encoding are this design's choices.
module sailor_alu
  import sailor_pkg::*;
#(
  parameter int unsigned SERIAL_WIDTH = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  logic                    last,
  input  alu_op_e                 op,
  input  logic [SERIAL_WIDTH-1:0] a,
  input  logic [SERIAL_WIDTH-1:0] b,
  output logic [SERIAL_WIDTH-1:0] y,
  output logic                    eq,
  output logic                    lt_s,
  output logic                    lt_u
);
  localparam int unsigned W = SERIAL_WIDTH;

  logic          carry_q, eq_q, lts_q, ltu_q;
  logic          cin, cout;
  logic [W-1:0]  bb, sum;

  always_comb begin
    bb  = (op == ALU_SUB) ? ~b : b;
    cin = first ? (op == ALU_SUB) : carry_q;
    {cout, sum} = {1'b0, a} + {1'b0, bb} + (W+1)'(cin);
    case (op)
      ALU_ADD, ALU_SUB: y = sum;
      ALU_AND:          y = a & b;
      ALU_OR:           y = a | b;
      ALU_XOR:          y = a ^ b;
      ALU_ANDN:         y = a & ~b;
      ALU_ORN:          y = a | ~b;
      default:          y = ~(a ^ b);   // ALU_XNOR
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry_q <= 1'b0; eq_q <= 1'b0; lts_q <= 1'b0; ltu_q <= 1'b0;
    end else if (en) begin
      carry_q <= cout;
      eq_q    <= (first ? 1'b1 : eq_q) & (a == b);
      if (last) begin
        // a - b computed as a + ~b + 1: no carry out means a < b (unsigned)
        ltu_q <= ~cout;
        lts_q <= (a[W-1] != b[W-1]) ? a[W-1] : sum[W-1];
      end
    end
  end

  assign eq   = eq_q;
  assign lt_s = lts_q;
  assign lt_u = ltu_q;
endmodule
