// tb_sailor_csr: check of the machine-mode CSRs, traps and interrupts.
//
// Covers: read-only identification values; csrrw / csrrs / csrrc semantics
// including the "no write when the source is x0" rule; the write masks of
// mie, mtvec and mepc; illegal accesses (unknown address, write to a
// read-only register); the trap entry (mepc, mcause with the interrupt bit,
// mtval, MIE -> MPIE, MIE cleared) and mret (MIE restored); direct and
// vectored trap vectors; interrupt pending and priority (external over
// software over timer) gated by mie and mstatus.MIE; and that mcycle
// advances every cycle while minstret counts retirements, both inhibitable
// through mcountinhibit. Register writes take effect at the clock edge.
module tb_sailor_csr;
  import sailor_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic        csr_en, src_zero, illegal, trap_en, trap_irq, mret_en, instret;
  logic        irq_ext, irq_timer, irq_soft, irq_pending;
  logic [1:0]  op;
  logic [11:0] addr;
  logic [31:0] wdata, rdata, trap_epc, trap_tval, trap_pc, mepc_o;
  logic [4:0]  trap_cause, irq_cause;

  always #5 clk = ~clk;

  sailor_csr dut (.clk, .rst_n, .csr_en, .op, .addr, .wdata, .src_zero, .rdata, .illegal,
                  .trap_en, .trap_irq, .trap_cause, .trap_epc, .trap_tval, .trap_pc, .mret_en, .mepc_o,
                  .instret, .irq_ext, .irq_timer, .irq_soft, .irq_pending, .irq_cause);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] v);
    addr = a; #1; v = rdata;
  endtask

  task automatic csr(input logic [1:0] o, input logic [11:0] a, input logic [31:0] d, input bit z = 0);
    @(negedge clk); csr_en = 1; op = o; addr = a; wdata = d; src_zero = z;
    @(negedge clk); csr_en = 0;
  endtask

  initial begin
    logic [31:0] v, c0, c1;
    csr_en = 0; op = 2'b01; addr = 0; wdata = 0; src_zero = 0; trap_en = 0; trap_irq = 0; mret_en = 0;
    instret = 0; irq_ext = 0; irq_timer = 0; irq_soft = 0; trap_cause = 0; trap_epc = 0; trap_tval = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    rd(12'h301, v); check("misa", v, 32'h4000_0100);
    rd(12'hF14, v); check("mhartid", v, 0);
    rd(12'h300, v); check("mstatus reset", v, 32'h0000_1800);
    rd(12'h7C0, v); check("unknown illegal", {31'd0, illegal}, 1);
    addr = 12'hF11; op = 2'b01; src_zero = 0; #1; check("write to read-only illegal", {31'd0, illegal}, 1);
    op = 2'b10; src_zero = 1; #1; check("read of read-only legal", {31'd0, illegal}, 0);
    // csrrw / csrrs / csrrc on mscratch
    csr(2'b01, 12'h340, 32'hF0F0_1234); rd(12'h340, v); check("csrrw", v, 32'hF0F0_1234);
    csr(2'b10, 12'h340, 32'h0000_0F00); rd(12'h340, v); check("csrrs", v, 32'hF0F0_1F34);
    csr(2'b11, 12'h340, 32'hF000_0004); rd(12'h340, v); check("csrrc", v, 32'h00F0_1F30);
    csr(2'b11, 12'h340, 32'hFFFF_FFFF, 1); rd(12'h340, v); check("csrrc x0 no write", v, 32'h00F0_1F30);
    // write masks
    csr(2'b01, 12'h304, 32'hFFFF_FFFF); rd(12'h304, v); check("mie mask", v, 32'h0000_0888);
    csr(2'b01, 12'h341, 32'h1234_5677); rd(12'h341, v); check("mepc align", v, 32'h1234_5674);
    csr(2'b01, 12'h305, 32'h0000_4003); rd(12'h305, v); check("mtvec mode", v, 32'h0000_4001);
    // interrupts: enabled in mie, gated by mstatus.MIE
    @(negedge clk); irq_timer = 1; irq_soft = 1; #1;
    check("gated by MIE", {31'd0, irq_pending}, 0);
    csr(2'b10, 12'h300, 32'h8); #1;
    check("pending", {31'd0, irq_pending}, 1); check("soft over timer", 32'(irq_cause), 32'(IRQ_SOFT));
    irq_ext = 1; #1; check("ext first", 32'(irq_cause), 32'(IRQ_EXT));
    rd(12'h344, v); check("mip", v, 32'h0000_0888);
    // interrupt trap entry, vectored
    @(negedge clk); trap_en = 1; trap_irq = 1; trap_cause = IRQ_EXT; trap_epc = 32'h100; trap_tval = 0; #1;
    check("vectored pc", trap_pc, 32'h4000 + 4 * IRQ_EXT);
    @(negedge clk); trap_en = 0;
    rd(12'h342, v); check("mcause irq", v, 32'h8000_0000 | IRQ_EXT);
    rd(12'h341, v); check("mepc", v, 32'h100); check("mepc_o", mepc_o, 32'h100);
    rd(12'h300, v); check("MIE->MPIE", v, 32'h0000_1880);
    check("masked in handler", {31'd0, irq_pending}, 0);
    @(negedge clk); mret_en = 1; @(negedge clk); mret_en = 0;
    rd(12'h300, v); check("mret", v, 32'h0000_1888);
    irq_ext = 0; irq_timer = 0; irq_soft = 0;
    // exception entry: direct offset even in vectored mode
    @(negedge clk); trap_en = 1; trap_irq = 0; trap_cause = CAUSE_ILLEGAL; trap_epc = 32'h200; trap_tval = 32'hDEAD; #1;
    check("exception pc", trap_pc, 32'h4000);
    @(negedge clk); trap_en = 0;
    rd(12'h342, v); check("mcause exc", v, CAUSE_ILLEGAL);
    rd(12'h343, v); check("mtval", v, 32'hDEAD);
    // counters
    rd(12'hB00, c0); @(negedge clk); @(negedge clk); rd(12'hB00, c1); check("mcycle +2", c1 - c0, 2);
    rd(12'hB02, c0); instret = 1; repeat (3) @(negedge clk); instret = 0; rd(12'hB02, c1); check("minstret +3", c1 - c0, 3);
    csr(2'b01, 12'h320, 32'h5);
    rd(12'hB00, c0); repeat (3) @(negedge clk); rd(12'hB00, c1); check("mcycle inhibited", c1 - c0, 0);
    csr(2'b01, 12'hB80, 32'h7); rd(12'hB80, v); check("mcycleh write", v, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
