// tb_sailor_core: end-to-end test of the SAILOR core at its default
// parameters (1-bit serialized data path, all Zkn subsets, CSRs).
//
// Runs the program built by sailor_core_test.svh on the core connected to a
// behavioural memory with random wait states, and checks every stored result,
// the trap log, per-instruction latencies and the occurrence of each
// mechanism. Ends with the TB_RESULT line.
module tb_sailor_core;
  localparam int W = 1;
  logic clk = 1'b0, rst_n;
  logic irq_ext, irq_timer, irq_soft, retire;
  logic [31:0] retire_pc;
  sailor_pkg::mem_req_t ireq, dreq;
  sailor_pkg::mem_rsp_t irsp, drsp;

  always #5 clk = ~clk;

  sailor_mem_model u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);

  sailor_core dut (
    .clk, .rst_n, .ireq, .irsp, .dreq, .drsp, .irq_ext, .irq_timer, .irq_soft,
    .retire, .retire_pc
  );

  `include "sailor_core_test.svh"

  task automatic finish_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
