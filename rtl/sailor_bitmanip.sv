// sailor_bitmanip: single-cycle fixed permutations of Zbkb.
//
// zip   rd[2i] = rs1[i], rd[2i+1] = rs1[i+16]      (i = 0..15)
// unzip rd[i] = rs1[2i], rd[i+16] = rs1[2i+1]      (inverse of zip)
// brev8 reverses the bit order inside each byte
// rev8  reverses the byte order of the word
// pack  {rs2[15:0], rs1[15:0]};  packh  {16'b0, rs2[7:0], rs1[7:0]}
//
// Because every bit has a fixed destination these are pure wiring plus a
// multiplexer: the operand is taken from the register file and the result
// goes straight back, bypassing the serializers, as the paper describes for
// (un)zip and (b)rev8. That pack and packh are also done here is this
// design's choice. Purely combinational.
module sailor_bitmanip
  import sailor_pkg::*;
(
  input  bm_op_e      op,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic [31:0] y
);
  always_comb begin
    y = 32'd0;
    case (op)
      BM_ZIP:   for (int i = 0; i < 16; i++) begin y[2*i] = rs1[i]; y[2*i+1] = rs1[i+16]; end
      BM_UNZIP: for (int i = 0; i < 16; i++) begin y[i] = rs1[2*i]; y[i+16] = rs1[2*i+1]; end
      BM_BREV8: for (int i = 0; i < 32; i++) y[i] = rs1[(i/8)*8 + 7 - (i%8)];
      BM_REV8:  y = {rs1[7:0], rs1[15:8], rs1[23:16], rs1[31:24]};
      BM_PACK:  y = {rs2[15:0], rs1[15:0]};
      BM_PACKH: y = {16'd0, rs2[7:0], rs1[7:0]};
      default:  y = 32'd0;
    endcase
  end
endmodule
