// tb_sailor_core_w8: end-to-end test of the SAILOR core with a 8-bit
// serialized data path (SERIAL_WIDTH = 8), all extensions enabled.
//
// Same program and checks as tb_sailor_core (see sailor_core_test.svh),
// including the per-instruction cycle counts, which scale with the width.
// Ends with the TB_RESULT line.
module tb_sailor_core_w8;
  localparam int W = 8;
  logic clk = 1'b0, rst_n;
  logic irq_ext, irq_timer, irq_soft, retire;
  logic [31:0] retire_pc;
  sailor_pkg::mem_req_t ireq, dreq;
  sailor_pkg::mem_rsp_t irsp, drsp;

  always #5 clk = ~clk;

  sailor_mem_model u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);

  sailor_core #(.SERIAL_WIDTH(W)) dut (
    .clk, .rst_n, .ireq, .irsp, .dreq, .drsp, .irq_ext, .irq_timer, .irq_soft,
    .retire, .retire_pc
  );

  `include "sailor_core_test.svh"

  task automatic finish_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
