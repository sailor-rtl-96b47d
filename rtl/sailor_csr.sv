// sailor_csr: machine-mode control and status registers, traps, interrupts.
//
// Implements the machine-mode CSRs a bare-metal M-mode-only RV32 core needs:
// mstatus (MIE, MPIE; MPP reads as M), misa, mie, mip (MEIP, MTIP, MSIP
// mirror the irq inputs), mtvec (direct and vectored mode), mscratch, mepc,
// mcause, mtval, mcycle(h), minstret(h), mcountinhibit, and the read-only
// identification registers mvendorid, marchid, mimpid, mhartid and
// mconfigptr (all zero). Any other address is reported as illegal, as is a
// write to a read-only register.
//
// CSR instruction (csr_en): op = funct3[1:0] (01 rw, 10 set, 11 clear); the
// old value appears on rdata; csrrs/csrrc with a zero source do not write.
// Trap (trap_en): mepc <= epc, mcause <= {interrupt, cause}, mtval <= tval,
// MPIE <= MIE, MIE <= 0; trap_pc gives the handler address (vectored mode adds
// 4 * cause for interrupts). mret (mret_en): MIE <= MPIE, MPIE <= 1;
// mepc_o is the return address. irq_pending is high when an enabled
// interrupt is pending and mstatus.MIE is set; irq_cause picks external over
// software over timer. All updates happen at the rising clock edge.
//
// The paper states that external interrupts, exceptions and the machine-mode
// CSRs of Zicsr are supported and can be included independently; the exact
// register set and the priorities are this design's (taken from the RISC-V
// privileged specification).
module sailor_csr
  import sailor_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_en,
  input  logic [1:0]  op,
  input  logic [11:0] addr,
  input  logic [31:0] wdata,
  input  logic        src_zero,
  output logic [31:0] rdata,
  output logic        illegal,
  input  logic        trap_en,
  input  logic        trap_irq,
  input  logic [4:0]  trap_cause,
  input  logic [31:0] trap_epc,
  input  logic [31:0] trap_tval,
  output logic [31:0] trap_pc,
  input  logic        mret_en,
  output logic [31:0] mepc_o,
  input  logic        instret,
  input  logic        irq_ext,
  input  logic        irq_timer,
  input  logic        irq_soft,
  output logic        irq_pending,
  output logic [4:0]  irq_cause
);
  logic        mie_bit, mpie_bit;
  logic [31:0] mie_q, mtvec_q, mscratch_q, mepc_q, mcause_q, mtval_q;
  logic [63:0] mcycle_q, minstret_q;
  logic [2:0]  minhibit_q;   // bits 0 (CY) and 2 (IR) used
  logic [31:0] mip_w, mstatus_w, newv;
  logic        known, ro, do_write;

  assign mip_w     = {20'd0, irq_ext, 3'd0, irq_timer, 3'd0, irq_soft, 3'd0};
  assign mstatus_w = {19'd0, 2'b11, 3'd0, mpie_bit, 3'd0, mie_bit, 3'd0};

  always_comb begin
    known = 1'b1; ro = 1'b0; rdata = 32'd0;
    case (addr)
      12'h300: rdata = mstatus_w;
      12'h301: rdata = 32'h4000_0100;              // RV32I
      12'h304: rdata = mie_q;
      12'h305: rdata = mtvec_q;
      12'h320: rdata = {29'd0, minhibit_q};
      12'h340: rdata = mscratch_q;
      12'h341: rdata = mepc_q;
      12'h342: rdata = mcause_q;
      12'h343: rdata = mtval_q;
      12'h344: rdata = mip_w;
      12'hB00: rdata = mcycle_q[31:0];
      12'hB02: rdata = minstret_q[31:0];
      12'hB80: rdata = mcycle_q[63:32];
      12'hB82: rdata = minstret_q[63:32];
      12'hF11, 12'hF12, 12'hF13, 12'hF14, 12'hF15: begin rdata = 32'd0; ro = 1'b1; end
      default: known = 1'b0;
    endcase
    case (op)
      2'b01:   newv = wdata;
      2'b10:   newv = rdata | wdata;
      default: newv = rdata & ~wdata;
    endcase
    do_write = csr_en && known && !(op != 2'b01 && src_zero);
    illegal  = !known || (ro && !(op != 2'b01 && src_zero));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mie_bit <= 1'b0; mpie_bit <= 1'b0;
      mie_q <= '0; mtvec_q <= '0; mscratch_q <= '0; mepc_q <= '0; mcause_q <= '0; mtval_q <= '0;
      mcycle_q <= '0; minstret_q <= '0; minhibit_q <= '0;
    end else begin
      if (!minhibit_q[0]) mcycle_q <= mcycle_q + 64'd1;
      if (instret && !minhibit_q[2]) minstret_q <= minstret_q + 64'd1;
      if (do_write && !ro) begin
        case (addr)
          12'h300: begin mie_bit <= newv[3]; mpie_bit <= newv[7]; end
          12'h304: mie_q <= newv & 32'h0000_0888;
          12'h305: mtvec_q <= {newv[31:2], 1'b0, newv[0]};
          12'h320: minhibit_q <= {newv[2], 1'b0, newv[0]};
          12'h340: mscratch_q <= newv;
          12'h341: mepc_q <= {newv[31:2], 2'b00};
          12'h342: mcause_q <= newv;
          12'h343: mtval_q <= newv;
          12'hB00: mcycle_q[31:0] <= newv;
          12'hB02: minstret_q[31:0] <= newv;
          12'hB80: mcycle_q[63:32] <= newv;
          12'hB82: minstret_q[63:32] <= newv;
          default: ;
        endcase
      end
      if (trap_en) begin
        mepc_q   <= trap_epc;
        mcause_q <= {trap_irq, 26'd0, trap_cause};
        mtval_q  <= trap_tval;
        mpie_bit <= mie_bit;
        mie_bit  <= 1'b0;
      end else if (mret_en) begin
        mie_bit  <= mpie_bit;
        mpie_bit <= 1'b1;
      end
    end
  end

  always_comb begin
    logic [31:0] act;
    act = mie_q & mip_w;
    irq_pending = mie_bit && (act != 32'd0);
    if (act[11])     irq_cause = IRQ_EXT;
    else if (act[3]) irq_cause = IRQ_SOFT;
    else             irq_cause = IRQ_TIMER;
    trap_pc = (mtvec_q[0] && trap_irq) ? ({mtvec_q[31:2], 2'b00} + {25'd0, trap_cause, 2'b00})
                                       : {mtvec_q[31:2], 2'b00};
  end
  assign mepc_o = mepc_q;
endmodule
