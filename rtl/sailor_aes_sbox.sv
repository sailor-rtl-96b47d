// sailor_aes_sbox: combined AES S-box for encryption and decryption.
//
// dec = 0: forward S-box, affine(inverse(x)).
// dec = 1: inverse S-box, inverse(affine^-1(x)).
// The multiplicative inverse in GF(2^8) (0 maps to 0) is computed as x^254
// with a fixed square-and-multiply chain, so one circuit serves both
// directions and no table is stored. Purely combinational, one cycle.
//
// The paper uses a published minimal combined S-box circuit (about 253 GE);
// that gate-level circuit is not reproduced here. This module computes the
// same function with a straightforward field-inversion description.
module sailor_aes_sbox (
  input  logic       dec,
  input  logic [7:0] x,
  output logic [7:0] y
);
  function automatic logic [7:0] gmul(input logic [7:0] p, input logic [7:0] q);
    logic [7:0] r, aa;
    r  = 8'd0;
    aa = p;
    for (int i = 0; i < 8; i++) begin
      if (q[i]) r = r ^ aa;
      aa = {aa[6:0], 1'b0} ^ (aa[7] ? 8'h1b : 8'h00);
    end
    return r;
  endfunction

  // x^254 = x^-1 via x^2, x^3, x^6, x^12, x^15, x^30, x^60, x^120, x^127
  function automatic logic [7:0] ginv(input logic [7:0] v);
    logic [7:0] x2, x3, x6, x12, x15, x30, x60, x120, x127;
    x2   = gmul(v, v);
    x3   = gmul(x2, v);
    x6   = gmul(x3, x3);
    x12  = gmul(x6, x6);
    x15  = gmul(x12, x3);
    x30  = gmul(x15, x15);
    x60  = gmul(x30, x30);
    x120 = gmul(x60, x60);
    x127 = gmul(x120, gmul(x6, v));   // x^120 * x^7
    return gmul(x127, x127);
  endfunction

  function automatic logic [7:0] affine(input logic [7:0] v);
    logic [7:0] r;
    for (int i = 0; i < 8; i++)
      r[i] = v[i] ^ v[(i+4)%8] ^ v[(i+5)%8] ^ v[(i+6)%8] ^ v[(i+7)%8];
    return r ^ 8'h63;
  endfunction

  function automatic logic [7:0] inv_affine(input logic [7:0] v);
    logic [7:0] r;
    for (int i = 0; i < 8; i++)
      r[i] = v[(i+2)%8] ^ v[(i+5)%8] ^ v[(i+7)%8];
    return r ^ 8'h05;
  endfunction

  always_comb begin
    if (dec) y = ginv(inv_affine(x));
    else     y = affine(ginv(x));
  end
endmodule
