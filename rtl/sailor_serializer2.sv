// sailor_serializer2: operand-2 serializer and result collector.
//
// Holds operand 2 (rs2, the immediate, or rs1 for AES). During an ALU pass it
// shifts right by one chunk of SERIAL_WIDTH bits per cycle: its low chunk is
// the ALU's second operand, and the ALU's result chunk enters at the top
// (bits 31 down to 32-SERIAL_WIDTH). After 32/SERIAL_WIDTH cycles the register
// holds the complete 32-bit result, ready to be written back. This is
// Algorithm 1 of the paper.
//
// Interface: load has priority over shift; both are sampled at the rising
// edge. With SERIAL_WIDTH = 32 a shift replaces the whole register.
module sailor_serializer2 #(
  parameter int unsigned SERIAL_WIDTH = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [31:0]             load_val,
  input  logic                    shift,
  input  logic [SERIAL_WIDTH-1:0] shift_in,
  output logic [31:0]             data_o
);
  logic [31:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (load)   q <= load_val;
    else if (shift) begin
      if (SERIAL_WIDTH >= 32) q <= 32'(shift_in);
      else                    q <= 32'({shift_in, q} >> SERIAL_WIDTH);
    end
  end

  assign data_o = q;
endmodule
