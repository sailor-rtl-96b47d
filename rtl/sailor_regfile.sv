// sailor_regfile: the RV32I integer register file, 32 registers of 32 bits.
//
// Two combinational read ports and one write port. x0 reads as zero and
// ignores writes. The register file interface is 32 bits wide and is not
// serialized, as the paper prescribes, so the serialized data path can be
// combined with any register file.
//
// Timing: a write takes effect at the rising clock edge. The core writes back
// the result of one instruction in the same cycle in which it loads the
// operands of the next one, so a read of the register being written returns
// the new value (write-to-read bypass). Reset clears all registers (this
// design's choice; the paper does not mention register reset).
module sailor_regfile (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  raddr1,
  output logic [31:0] rdata1,
  input  logic [4:0]  raddr2,
  output logic [31:0] rdata2,
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [31:0] wdata,
  output logic        bypass_hit   // a read port was served from the write port
);
  logic [31:0] regs [32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && waddr != 5'd0) begin
      regs[waddr] <= wdata;
    end
  end

  logic hit1, hit2;
  assign hit1 = we && waddr != 5'd0 && waddr == raddr1;
  assign hit2 = we && waddr != 5'd0 && waddr == raddr2;

  always_comb begin
    rdata1 = (raddr1 == 5'd0) ? 32'd0 : (hit1 ? wdata : regs[raddr1]);
    rdata2 = (raddr2 == 5'd0) ? 32'd0 : (hit2 ? wdata : regs[raddr2]);
  end

  assign bypass_hit = hit1 || hit2;
endmodule
