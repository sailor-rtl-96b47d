// sailor_serializer1: operand-1 serializer and bidirectional shift register.
//
// Holds a 32-bit operand. During an ALU pass it rotates right by one chunk of
// SERIAL_WIDTH bits per cycle, so its low chunk (data_o[SERIAL_WIDTH-1:0])
// feeds the ALU and after 32/SERIAL_WIDTH cycles the operand is back in place.
// For shift and rotate instructions it shifts by SHIFT_STEP bits per cycle
// (the chunk-wise step) or by one bit (the residual step), toward the LSB or,
// as the paper adds for left shifts, toward the MSB. The vacated bits are
// filled with zeros, with the sign bit (arithmetic right shift) or with the
// bits shifted out (rotation, used by ror/rol/rori and by the AES and xperm
// sequences).
//
// Interface: load has priority over cmd; cmd, dir_left and fill are sampled
// at the rising edge. The whole register is visible on data_o, which the AES
// S-box reads byte-wise (data_o[7:0]) and the write-back multiplexer reads
// as the shift result.
//
// Follows the paper: chunk shifts plus single-bit shifts, left-shift support,
// rotation support; for the 32-bit data path the shift step is 8 bits. The
// exact command set is this design's choice.
module sailor_serializer1
  import sailor_pkg::*;
#(
  parameter int unsigned SERIAL_WIDTH = 1,
  parameter int unsigned SHIFT_STEP   = (SERIAL_WIDTH == 32) ? 8 : SERIAL_WIDTH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] load_val,
  input  s1_cmd_e     cmd,
  input  logic        dir_left,
  input  fill_e       fill,
  output logic [31:0] data_o
);
  logic [31:0] q, nxt;

  function automatic logic [31:0] shr(input logic [31:0] v, input int unsigned k, input fill_e f);
    logic [63:0] ext;
    case (f)
      FILL_SIGN: ext = {{32{v[31]}}, v};
      FILL_ROT:  ext = {v, v};
      default:   ext = {32'd0, v};
    endcase
    return 32'(ext >> k);
  endfunction

  function automatic logic [31:0] shl(input logic [31:0] v, input int unsigned k, input fill_e f);
    logic [63:0] ext;
    ext = (f == FILL_ROT) ? {v, v} : {v, 32'd0};
    ext = ext << k;
    return ext[63:32];
  endfunction

  always_comb begin
    nxt = q;
    case (cmd)
      S1_ROTCHUNK: nxt = (SERIAL_WIDTH >= 32) ? q : shr(q, SERIAL_WIDTH % 32, FILL_ROT);
      S1_STEP:     nxt = dir_left ? shl(q, SHIFT_STEP, fill) : shr(q, SHIFT_STEP, fill);
      S1_BIT:      nxt = dir_left ? shl(q, 1, fill) : shr(q, 1, fill);
      default:     nxt = q;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (load)  q <= load_val;
    else            q <= nxt;
  end

  assign data_o = q;
endmodule
