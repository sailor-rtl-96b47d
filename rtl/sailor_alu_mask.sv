// sailor_alu_mask: the ALU operand mask of the cryptography extensions.
//
// Sits between the two serializers and the ALU (Fig. 3 of the paper) and
// ANDs each operand chunk with a mask: a = s1_chunk & mask_a,
// b = s2_chunk & mask_b. mask_a is chosen by op:
//   MASK_NONE     all ones
//   MASK_CLMUL    the current multiplier bit of rs2, copied to every bit:
//                 the shifted multiplicand is accumulated only if it is set
//   MASK_AES_ENC/ all ones for the middle-round instructions; for the final
//   MASK_AES_DEC  round only the byte bs, so that a single S-box byte is
//                 XORed into rs1
//   MASK_XPERM    xPermMask AND NOT xPermOutOfBounds
// mask_b is NOT xPermMask for xperm and all ones otherwise.
//
// xperm works in E passes k = 0..E-1 (E = 8 nibbles for xperm4, 4 bytes for
// xperm8) while serializer 1 holds rs1 rotated right by k elements, so that
// at element position j it presents rs1 element (j+k) mod E. xPermMask marks
// the positions j whose index rs2[j] selects that element (index mod E equal
// to (j+k) mod E); every position is marked in exactly one pass, where the
// ALU's OR writes either the selected element or, when the index is out of
// bounds, zero. Elsewhere mask_b keeps what serializer 2 already holds.
//
// chunk_idx is the position of the chunk in the 32-bit word (0 = bits
// SERIAL_WIDTH-1:0). Purely combinational.
//
// The mask structure follows Fig. 3; how the masks are generated per chunk
// (the pass scheme above and the final-round byte mask) is this design's own.
module sailor_alu_mask
  import sailor_pkg::*;
#(
  parameter int unsigned SERIAL_WIDTH = 1
) (
  input  mask_op_e                op,
  input  logic [5:0]              chunk_idx,
  input  logic                    clmul_bit,
  input  logic                    aes_final,
  input  logic [1:0]              aes_bs,
  input  logic                    xperm_byte,
  input  logic [2:0]              xperm_k,
  input  logic [31:0]             xperm_idx,   // rs2: the index vector
  input  logic [SERIAL_WIDTH-1:0] s1_chunk,
  input  logic [SERIAL_WIDTH-1:0] s2_chunk,
  output logic [SERIAL_WIDTH-1:0] a,
  output logic [SERIAL_WIDTH-1:0] b,
  output logic [SERIAL_WIDTH-1:0] mask_a,
  output logic [SERIAL_WIDTH-1:0] mask_b
);
  localparam int unsigned W = SERIAL_WIDTH;

  logic [W-1:0] clmul_mask, aes_mask, xperm_mask, xperm_oob;

  always_comb begin
    for (int t = 0; t < W; t++) begin
      int unsigned pos, j;
      logic [7:0] idx;
      pos = int'(chunk_idx) * W + t;
      clmul_mask[t] = clmul_bit;
      aes_mask[t]   = !aes_final || (pos / 8 == int'(aes_bs));
      if (xperm_byte) begin
        j   = (pos / 8) % 4;
        idx = xperm_idx[8*j +: 8];
        xperm_mask[t] = (idx[1:0] == 2'((j + int'(xperm_k)) % 4));
        xperm_oob[t]  = (idx[7:2] != 6'd0);
      end else begin
        j   = (pos / 4) % 8;
        idx = {4'd0, xperm_idx[4*j +: 4]};
        xperm_mask[t] = (idx[2:0] == 3'((j + int'(xperm_k)) % 8));
        xperm_oob[t]  = idx[3];
      end
    end
    case (op)
      MASK_CLMUL:                 mask_a = clmul_mask;
      MASK_AES_ENC, MASK_AES_DEC: mask_a = aes_mask;
      MASK_XPERM:                 mask_a = xperm_mask & ~xperm_oob;
      default:                    mask_a = '1;
    endcase
    mask_b = (op == MASK_XPERM) ? ~xperm_mask : '1;
    a = s1_chunk & mask_a;
    b = s2_chunk & mask_b;
  end
endmodule
