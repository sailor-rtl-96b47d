// sailor_sha2_shifts: fixed shift/rotate terms of the Zknh instructions.
//
// Each SHA-256 and RV32 SHA-512 instruction of Zknh is an XOR of up to six
// terms, each a fixed shift or rotation of rs1 or rs2. This unit delivers
// term number `term` (0..5) of instruction `op` in a single cycle; the core
// loads it into serializer 1 and XORs it into serializer 2 with one ALU pass,
// so the ALU provides the XOR and no separate XOR tree is needed. Terms past
// an instruction's own count are zero, which keeps every Zknh instruction at
// the same number of passes (constant time, Zkt).
//
// Term lists (ror = rotate right):
//   sha256sig0  ror7, ror18, >>3       sha256sig1  ror17, ror19, >>10
//   sha256sum0  ror2, ror13, ror22     sha256sum1  ror6, ror11, ror25
//   sha512sig0l rs1>>1, rs1>>7, rs1>>8, rs2<<31, rs2<<25, rs2<<24
//   sha512sig0h rs1>>1, rs1>>7, rs1>>8, rs2<<31, rs2<<24
//   sha512sig1l rs1<<3, rs1>>6, rs1>>19, rs2>>29, rs2<<26, rs2<<13
//   sha512sig1h rs1<<3, rs1>>6, rs1>>19, rs2>>29, rs2<<13
//   sha512sum0r rs1<<25, rs1<<30, rs1>>28, rs2>>7, rs2>>2, rs2<<4
//   sha512sum1r rs1<<23, rs1>>14, rs1>>18, rs2>>9, rs2<<18, rs2<<14
//
// The paper gives the idea (single-cycle fixed shifts, XOR in the ALU); the
// term-by-term sequencing is this design's choice. Purely combinational.
module sailor_sha2_shifts
  import sailor_pkg::*;
(
  input  sha_op_e     op,
  input  logic [2:0]  term,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic [31:0] y
);
  function automatic logic [31:0] ror(input logic [31:0] v, input int unsigned k);
    return (v >> k) | (v << (32 - k));
  endfunction

  always_comb begin
    y = 32'd0;
    case (op)
      SHA256_SIG0: case (term) 0: y = ror(rs1, 7);  1: y = ror(rs1, 18); 2: y = rs1 >> 3;  default: ; endcase
      SHA256_SIG1: case (term) 0: y = ror(rs1, 17); 1: y = ror(rs1, 19); 2: y = rs1 >> 10; default: ; endcase
      SHA256_SUM0: case (term) 0: y = ror(rs1, 2);  1: y = ror(rs1, 13); 2: y = ror(rs1, 22); default: ; endcase
      SHA256_SUM1: case (term) 0: y = ror(rs1, 6);  1: y = ror(rs1, 11); 2: y = ror(rs1, 25); default: ; endcase
      SHA512_SIG0L: case (term)
        0: y = rs1 >> 1;  1: y = rs1 >> 7;  2: y = rs1 >> 8;
        3: y = rs2 << 31; 4: y = rs2 << 25; 5: y = rs2 << 24; default: ; endcase
      SHA512_SIG0H: case (term)
        0: y = rs1 >> 1;  1: y = rs1 >> 7;  2: y = rs1 >> 8;
        3: y = rs2 << 31; 4: y = rs2 << 24; default: ; endcase
      SHA512_SIG1L: case (term)
        0: y = rs1 << 3;  1: y = rs1 >> 6;  2: y = rs1 >> 19;
        3: y = rs2 >> 29; 4: y = rs2 << 26; 5: y = rs2 << 13; default: ; endcase
      SHA512_SIG1H: case (term)
        0: y = rs1 << 3;  1: y = rs1 >> 6;  2: y = rs1 >> 19;
        3: y = rs2 >> 29; 4: y = rs2 << 13; default: ; endcase
      SHA512_SUM0R: case (term)
        0: y = rs1 << 25; 1: y = rs1 << 30; 2: y = rs1 >> 28;
        3: y = rs2 >> 7;  4: y = rs2 >> 2;  5: y = rs2 << 4; default: ; endcase
      SHA512_SUM1R: case (term)
        0: y = rs1 << 23; 1: y = rs1 >> 14; 2: y = rs1 >> 18;
        3: y = rs2 >> 9;  4: y = rs2 << 18; 5: y = rs2 << 14; default: ; endcase
      default: y = 32'd0;
    endcase
  end
endmodule
