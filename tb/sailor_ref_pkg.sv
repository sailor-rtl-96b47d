// sailor_ref_pkg: reference models and an instruction encoder for the
// SAILOR testbenches.
//
// The reference functions compute the architectural result of each
// instruction directly from the RISC-V specification, independently of the
// RTL: the AES S-box tables are generated by the iterative
// multiply-by-3 / divide-by-3 method, GF multiplication by a generic loop,
// carry-less multiplication bit by bit over a 64-bit product. The encoder
// functions build 32-bit instruction words for hand-written test programs.
package sailor_ref_pkg;

  // ------------------------------------------------------------ AES tables
  logic [7:0] sbox_t [256];
  logic [7:0] isbox_t [256];

  function automatic logic [7:0] rotl8(input logic [7:0] v, input int k);
    return (v << k) | (v >> (8 - k));
  endfunction

  function automatic void build_tables();
    logic [7:0] p, q, x;
    p = 8'd1; q = 8'd1;
    do begin
      p = p ^ {p[6:0], 1'b0} ^ (p[7] ? 8'h1b : 8'h00);
      q = q ^ {q[6:0], 1'b0};
      q = q ^ {q[5:0], 2'b0};
      q = q ^ {q[3:0], 4'b0};
      if (q[7]) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      sbox_t[p] = x ^ 8'h63;
    end while (p != 8'd1);
    sbox_t[0] = 8'h63;
    for (int i = 0; i < 256; i++) isbox_t[sbox_t[i]] = 8'(i);
  endfunction

  function automatic logic [7:0] gm(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r;
    r = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= a;
      a = {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
    end
    return r;
  endfunction

  function automatic logic [31:0] rol32(input logic [31:0] v, input int k);
    k = k % 32;
    return (k == 0) ? v : ((v << k) | (v >> (32 - k)));
  endfunction
  function automatic logic [31:0] ror32(input logic [31:0] v, input int k);
    k = k % 32;
    return (k == 0) ? v : ((v >> k) | (v << (32 - k)));
  endfunction

  function automatic logic [31:0] ref_aes32(input logic [31:0] rs1, input logic [31:0] rs2,
                                            input logic [1:0] bs, input bit dec, input bit mid);
    logic [7:0] si, so;
    logic [31:0] mixed;
    si = 8'(rs2 >> (8 * bs));
    so = dec ? isbox_t[si] : sbox_t[si];
    if (!mid)     mixed = {24'd0, so};
    else if (!dec) mixed = {gm(so, 8'h03), so, so, gm(so, 8'h02)};
    else          mixed = {gm(so, 8'h0b), gm(so, 8'h0d), gm(so, 8'h09), gm(so, 8'h0e)};
    return rs1 ^ rol32(mixed, 8 * bs);
  endfunction

  // ------------------------------------------------------------ Zbkc / Zbkx / Zbkb
  function automatic logic [63:0] clmul64(input logic [31:0] a, input logic [31:0] b);
    logic [63:0] r;
    r = 0;
    for (int i = 0; i < 32; i++) if (b[i]) r ^= (64'(a) << i);
    return r;
  endfunction

  function automatic logic [31:0] ref_xperm(input logic [31:0] rs1, input logic [31:0] rs2, input bit byte8);
    logic [31:0] r;
    r = 0;
    if (byte8) begin
      for (int j = 0; j < 4; j++) begin
        int idx; idx = rs2[8*j +: 8];
        r[8*j +: 8] = (idx < 4) ? rs1[8*idx +: 8] : 8'd0;
      end
    end else begin
      for (int j = 0; j < 8; j++) begin
        int idx; idx = rs2[4*j +: 4];
        r[4*j +: 4] = (idx < 8) ? rs1[4*idx +: 4] : 4'd0;
      end
    end
    return r;
  endfunction

  function automatic logic [31:0] ref_zip(input logic [31:0] x);
    logic [31:0] r;
    for (int i = 0; i < 16; i++) begin r[2*i] = x[i]; r[2*i+1] = x[i+16]; end
    return r;
  endfunction
  function automatic logic [31:0] ref_unzip(input logic [31:0] x);
    logic [31:0] r;
    for (int i = 0; i < 16; i++) begin r[i] = x[2*i]; r[i+16] = x[2*i+1]; end
    return r;
  endfunction
  function automatic logic [31:0] ref_brev8(input logic [31:0] x);
    logic [31:0] r;
    for (int by = 0; by < 4; by++) for (int i = 0; i < 8; i++) r[8*by + i] = x[8*by + 7 - i];
    return r;
  endfunction

  // ------------------------------------------------------------ Zknh
  // names: 0 sig0 1 sig1 2 sum0 3 sum1 (SHA-256), 4 sig0l 5 sig0h 6 sig1l 7 sig1h 8 sum0r 9 sum1r
  function automatic logic [31:0] ref_sha(input int f, input logic [31:0] a, input logic [31:0] b);
    case (f)
      0: return ror32(a, 7) ^ ror32(a, 18) ^ (a >> 3);
      1: return ror32(a, 17) ^ ror32(a, 19) ^ (a >> 10);
      2: return ror32(a, 2) ^ ror32(a, 13) ^ ror32(a, 22);
      3: return ror32(a, 6) ^ ror32(a, 11) ^ ror32(a, 25);
      4: return (a >> 1) ^ (a >> 7) ^ (a >> 8) ^ (b << 31) ^ (b << 25) ^ (b << 24);
      5: return (a >> 1) ^ (a >> 7) ^ (a >> 8) ^ (b << 31) ^ (b << 24);
      6: return (a << 3) ^ (a >> 6) ^ (a >> 19) ^ (b >> 29) ^ (b << 26) ^ (b << 13);
      7: return (a << 3) ^ (a >> 6) ^ (a >> 19) ^ (b >> 29) ^ (b << 13);
      8: return (a << 25) ^ (a << 30) ^ (a >> 28) ^ (b >> 7) ^ (b >> 2) ^ (b << 4);
      default: return (a << 23) ^ (a >> 14) ^ (a >> 18) ^ (b >> 9) ^ (b << 18) ^ (b << 14);
    endcase
  endfunction

  // ------------------------------------------------------------ encoder
  localparam logic [6:0] OP = 7'b0110011, OPI = 7'b0010011, LD = 7'b0000011, ST = 7'b0100011,
                         BR = 7'b1100011, SYS = 7'b1110011;

  function automatic logic [31:0] enc_r(input logic [6:0] f7, input int rs2, input int rs1,
                                        input logic [2:0] f3, input int rd, input logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_i(input int imm, input int rs1, input logic [2:0] f3,
                                        input int rd, input logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_s(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], ST};
  endfunction
  function automatic logic [31:0] enc_b(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    logic [12:0] i; i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], BR};
  endfunction
  function automatic logic [31:0] enc_u(input logic [31:0] imm, input int rd, input logic [6:0] opc);
    return {imm[31:12], 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_j(input int imm, input int rd);
    logic [20:0] i; i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
endpackage
