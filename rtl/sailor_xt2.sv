// sailor_xt2: GF(2^8) multiplication by a MixColumns constant.
//
// Multiplies the byte x by 2, 3, 9, 0x0B, 0x0D or 0x0E in the AES field
// (polynomial x^8 + x^4 + x^3 + x + 1). The products are built from a chain
// of three xtime stages (x*2, x*4, x*8) and XORs: 3 = 2^1, 9 = 8^1,
// B = 8^2^1, D = 8^4^1, E = 8^4^2. Purely combinational, one cycle.
//
// The paper names an xtime unit (xt2) that performs the Galois-field
// multiplications of the AES middle-round instructions; that it also covers
// the decryption constants by an xtime chain is this design's choice.
module sailor_xt2
  import sailor_pkg::*;
(
  input  logic [7:0] x,
  input  xt_sel_e    sel,
  output logic [7:0] y
);
  function automatic logic [7:0] xtime(input logic [7:0] v);
    return {v[6:0], 1'b0} ^ (v[7] ? 8'h1b : 8'h00);
  endfunction

  logic [7:0] x2, x4, x8;
  always_comb begin
    x2 = xtime(x);
    x4 = xtime(x2);
    x8 = xtime(x4);
    case (sel)
      XT_2:    y = x2;
      XT_3:    y = x2 ^ x;
      XT_9:    y = x8 ^ x;
      XT_B:    y = x8 ^ x2 ^ x;
      XT_D:    y = x8 ^ x4 ^ x;
      default: y = x8 ^ x4 ^ x2;   // XT_E
    endcase
  end
endmodule
