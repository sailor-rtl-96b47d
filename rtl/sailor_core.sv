// sailor_core: SAILOR, a serialized RV32I core with the Zkn/Zkt scalar
// cryptography extensions (top level).
//
// Operands come from a 32-bit register file into two serializers and are
// processed SERIAL_WIDTH bits per cycle by a narrow ALU (Algorithm 1 of the
// paper): serializer 1 supplies operand-1 chunks and doubles as a
// bidirectional shift register, serializer 2 supplies operand-2 chunks and
// collects the result. Memory and register-file interfaces stay 32 bits wide.
// A one-entry fetch buffer prefetches the next instruction, and the
// last cycle of one instruction (write-back) is also the first cycle of the
// next (operand and control load), with a register-file bypass.
//
// Cryptography support reuses this data path: an ALU operand mask (clmul,
// xperm, AES byte select), rotation in serializer 1, an AES S-box and an xt2
// GF multiplier writing into the load/store unit's buffer register, single
// cycle SHA-2 fixed shifts whose terms are XORed by the ALU, and single-cycle
// bitmanip permutations. Every data-dependent operation (shifts, rotations,
// clmul, xperm, AES, SHA) takes a fixed number of cycles (Zkt).
//
// Per-instruction phase sequences (N = 32/SERIAL_WIDTH chunks, each PASS is
// N cycles, SHIFT is a constant 32/S-1 + S-1 cycles with S = SHIFT_STEP):
//   alu, slt, lui, auipc, branch, jalr : PASS, WB
//   shift/rotate                       : SHIFT, WB
//   load/store                         : PASS (address), MEM, WB
//   clmul  : 32 x (PASS, BIT)          clmulh : 32 x (BIT, PASS)
//   xperm4/8 : 8/4 PASSes with a SHIFT (rotate one element) between them
//   aes32* : SHIFT (byte to bit 0), AES (8 byte pushes), AESLD, SHIFT (back),
//            PASS (XOR into rs1), WB
//   sha*   : 6 x PASS with a SHALD (load next term) between them
//   jal, bitmanip, csr, system         : WB
// WB writes rd, updates the pc, takes traps and interrupts, and starts the
// next instruction when the fetch buffer holds it.
//
// Interfaces: ireq/irsp and dreq/drsp are 32-bit memory ports with the
// valid/ready request and rvalid response protocol of sailor_pkg; irq_*
// are level-sensitive interrupt requests (external, timer, software);
// retire pulses for one cycle when an instruction completes.
//
// Follows the paper: the block structure of Fig. 1 and Fig. 2, the
// serialized processing of Algorithm 1, the operand mask of Fig. 3, the AES
// path of Fig. 4, the fetch buffer with overlapped write-back, fall-through
// prediction, constant-time crypto operations, and the machine-mode CSR and
// interrupt support. This design's own choices: the phase sequences and
// their cycle counts, how clmul/xperm/AES/SHA are scheduled on the data path,
// the memory handshake, and that the 32-bit configuration keeps serializer 2
// (the paper removes it and feeds the ALU directly from the register file).
module sailor_core
  import sailor_pkg::*;
#(
  parameter int unsigned SERIAL_WIDTH = 1,
  parameter int unsigned SHIFT_STEP   = (SERIAL_WIDTH == 32) ? 8 : SERIAL_WIDTH,
  parameter logic [31:0] BOOT_ADDR    = 32'h0000_0000,
  parameter bit          EN_ZBKB      = 1'b1,
  parameter bit          EN_ZBKC      = 1'b1,
  parameter bit          EN_ZBKX      = 1'b1,
  parameter bit          EN_ZKNE      = 1'b1,
  parameter bit          EN_ZKND      = 1'b1,
  parameter bit          EN_ZKNH      = 1'b1,
  parameter bit          EN_CSR       = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  output mem_req_t    ireq,
  input  mem_rsp_t    irsp,
  output mem_req_t    dreq,
  input  mem_rsp_t    drsp,
  input  logic        irq_ext,
  input  logic        irq_timer,
  input  logic        irq_soft,
  output logic        retire,
  output logic [31:0] retire_pc
);
  localparam int unsigned W  = SERIAL_WIDTH;
  localparam int unsigned N  = 32 / W;
  localparam int unsigned S  = SHIFT_STEP;
  localparam int unsigned C1 = 32 / S - 1;        // chunk-step slots
  localparam int unsigned C2 = S - 1;             // single-bit slots
  localparam int unsigned SHIFT_CYCLES = C1 + C2;

  initial begin
    assert (W inside {1, 2, 4, 8, 16, 32}) else $error("SERIAL_WIDTH must be 1, 2, 4, 8, 16 or 32");
    assert (S inside {1, 2, 4, 8, 16})     else $error("SHIFT_STEP must be 1, 2, 4, 8 or 16");
  end

  typedef enum logic [3:0] {
    PH_FETCH, PH_PASS, PH_SHIFT, PH_BIT, PH_AES, PH_AESLD, PH_SHALD, PH_MEM, PH_WB
  } phase_e;

  // ---------------------------------------------------------------- state
  phase_e      ph;
  ctrl_t       ctrl_q;
  logic [31:0] pc_q;
  logic [5:0]  cnt;
  logic [5:0]  iter;
  logic [4:0]  sh_amt_q;
  logic        sh_left_q;
  fill_e       sh_fill_q;
  logic        exc_q;
  logic [4:0]  exc_cause_q;
  logic [31:0] exc_tval_q;

  // ---------------------------------------------------------------- fetch & decode
  logic        ibuf_valid, consume, redirect, drop_event;
  logic [31:0] ibuf_instr, ibuf_pc, redirect_pc;
  ctrl_t       dctrl;

  sailor_fetch #(.BOOT_ADDR(BOOT_ADDR)) u_fetch (
    .clk, .rst_n, .ireq, .irsp, .ibuf_valid, .ibuf_instr, .ibuf_pc,
    .consume, .redirect, .redirect_pc, .drop_event
  );

  sailor_decoder #(
    .EN_ZBKB(EN_ZBKB), .EN_ZBKC(EN_ZBKC), .EN_ZBKX(EN_ZBKX), .EN_ZKNE(EN_ZKNE),
    .EN_ZKND(EN_ZKND), .EN_ZKNH(EN_ZKNH), .EN_CSR(EN_CSR)
  ) u_dec (.instr(ibuf_instr), .ctrl(dctrl));

  // ---------------------------------------------------------------- register file
  logic        boundary;   // write-back / fetch cycle: read ports serve the next instruction
  logic [4:0]  ra1, ra2;
  logic [31:0] rdata1, rdata2, wb_data;
  logic        rf_we, bypass_hit;

  assign boundary = (ph == PH_WB) || (ph == PH_FETCH);
  assign ra1 = boundary ? dctrl.rs1 : ctrl_q.rs1;
  assign ra2 = boundary ? dctrl.rs2 : ctrl_q.rs2;

  sailor_regfile u_rf (
    .clk, .rst_n, .raddr1(ra1), .rdata1, .raddr2(ra2), .rdata2,
    .we(rf_we), .waddr(ctrl_q.rd), .wdata(wb_data), .bypass_hit
  );

  // ---------------------------------------------------------------- data path
  logic          start;
  logic          s1_load, s2_load, s2_shift;
  logic [31:0]   s1_val, s2_val, ser1, ser2;
  s1_cmd_e       s1_cmd;
  logic          s1_left;
  fill_e         s1_fill;
  logic [W-1:0]  alu_a, alu_b, alu_y, mask_a, mask_b;
  logic          alu_en, alu_first, alu_last, eq, lt_s, lt_u;
  alu_op_e       alu_op;
  mask_op_e      mask_op;
  logic          clmul_bit;
  sha_op_e       sha_op;
  logic [2:0]    sha_term_idx;
  logic [31:0]   sha_term;
  logic [7:0]    sbox_y, xt_y;
  xt_sel_e       xt_sel;
  logic          aes_push;
  logic [7:0]    aes_byte;
  logic [31:0]   lsu_buf, load_val, bm_y;
  logic          lsu_start, lsu_done, lsu_busy, lsu_mis;

  sailor_serializer1 #(.SERIAL_WIDTH(W), .SHIFT_STEP(S)) u_ser1 (
    .clk, .rst_n, .load(s1_load), .load_val(s1_val), .cmd(s1_cmd),
    .dir_left(s1_left), .fill(s1_fill), .data_o(ser1)
  );

  sailor_serializer2 #(.SERIAL_WIDTH(W)) u_ser2 (
    .clk, .rst_n, .load(s2_load), .load_val(s2_val), .shift(s2_shift),
    .shift_in(alu_y), .data_o(ser2)
  );

  sailor_alu_mask #(.SERIAL_WIDTH(W)) u_mask (
    .op(mask_op), .chunk_idx(cnt), .clmul_bit, .aes_final(ctrl_q.aes_final),
    .aes_bs(ctrl_q.bs), .xperm_byte(ctrl_q.xperm_byte), .xperm_k(iter[2:0]),
    .xperm_idx(rdata2), .s1_chunk(ser1[W-1:0]), .s2_chunk(ser2[W-1:0]),
    .a(alu_a), .b(alu_b), .mask_a, .mask_b
  );

  sailor_alu #(.SERIAL_WIDTH(W)) u_alu (
    .clk, .rst_n, .en(alu_en), .first(alu_first), .last(alu_last), .op(alu_op),
    .a(alu_a), .b(alu_b), .y(alu_y), .eq, .lt_s, .lt_u
  );

  sailor_sha2_shifts u_sha (
    .op(sha_op), .term(sha_term_idx), .rs1(rdata1), .rs2(rdata2), .y(sha_term)
  );

  sailor_aes_sbox u_sbox (.dec(ctrl_q.aes_dec), .x(ser1[7:0]), .y(sbox_y));
  sailor_xt2      u_xt2  (.x(lsu_buf[7:0]), .sel(xt_sel), .y(xt_y));

  sailor_bitmanip u_bm (.op(ctrl_q.bm_op), .rs1(ser1), .rs2(ser2), .y(bm_y));

  sailor_lsu u_lsu (
    .clk, .rst_n, .start(lsu_start), .we(ctrl_q.cls == CLS_STORE),
    .size(ctrl_q.funct3[1:0]), .uns(ctrl_q.funct3[2]), .addr(ser2), .wdata(rdata2),
    .busy(lsu_busy), .done(lsu_done), .load_val, .misaligned(lsu_mis),
    .dreq, .drsp, .aes_push, .aes_byte, .buf_o(lsu_buf)
  );

  // ---------------------------------------------------------------- branch unit, CSR
  logic [31:0] link, target, bu_next_pc, trap_pc, mepc;
  logic        taken, br_mis;
  logic [31:0] csr_rdata;
  logic        csr_illegal, csr_en, trap_en, trap_irq, mret_en, instret, irq_pending;
  logic [4:0]  irq_cause, trap_cause;
  logic [31:0] trap_epc, trap_tval;

  sailor_branch_unit u_bu (
    .cls(ctrl_q.cls), .funct3(ctrl_q.funct3), .pc(pc_q), .jalr_sum(ser2), .imm(ctrl_q.imm),
    .eq, .lt_s, .lt_u, .link, .target, .taken, .next_pc(bu_next_pc), .misaligned(br_mis)
  );

  sailor_csr u_csr (
    .clk, .rst_n, .csr_en, .op(ctrl_q.funct3[1:0]), .addr(ctrl_q.csr_addr),
    .wdata(ctrl_q.funct3[2] ? ctrl_q.imm : ser1), .src_zero(ctrl_q.rs1 == 5'd0),
    .rdata(csr_rdata), .illegal(csr_illegal),
    .trap_en, .trap_irq, .trap_cause, .trap_epc, .trap_tval, .trap_pc,
    .mret_en, .mepc_o(mepc), .instret,
    .irq_ext(EN_CSR && irq_ext), .irq_timer(EN_CSR && irq_timer), .irq_soft(EN_CSR && irq_soft),
    .irq_pending, .irq_cause
  );

  // ---------------------------------------------------------------- write-back decisions
  logic        wb, exc, do_trap;
  logic [4:0]  exc_cause;
  logic [31:0] exc_tval, next_pc;

  always_comb begin
    wb        = (ph == PH_WB);
    exc       = 1'b0;
    exc_cause = CAUSE_ILLEGAL;
    exc_tval  = 32'd0;
    if (exc_q) begin
      exc = 1'b1; exc_cause = exc_cause_q; exc_tval = exc_tval_q;
    end else case (ctrl_q.cls)
      CLS_ILLEGAL: begin exc = 1'b1; exc_cause = CAUSE_ILLEGAL; end
      CLS_ECALL:   begin exc = 1'b1; exc_cause = CAUSE_ECALL_M; end
      CLS_EBREAK:  begin exc = 1'b1; exc_cause = CAUSE_BREAKPOINT; exc_tval = pc_q; end
      CLS_CSR:     if (csr_illegal) begin exc = 1'b1; exc_cause = CAUSE_ILLEGAL; end
      default:     if (br_mis) begin exc = 1'b1; exc_cause = CAUSE_INSTR_MISALIGNED; exc_tval = target; end
    endcase
    do_trap    = wb && (exc || irq_pending);
    trap_en    = do_trap;
    trap_irq   = !exc;
    trap_cause = exc ? exc_cause : irq_cause;
    // an interrupt arriving at an mret resumes at the mret's target
    trap_epc   = exc ? pc_q : ((ctrl_q.cls == CLS_MRET) ? mepc : bu_next_pc);
    trap_tval  = exc ? exc_tval : 32'd0;
    mret_en    = wb && !exc && !irq_pending && ctrl_q.cls == CLS_MRET;
    csr_en     = wb && !exc && ctrl_q.cls == CLS_CSR;
    instret    = wb && !exc;
    rf_we      = wb && !exc && ctrl_q.rd_we;
    next_pc    = do_trap ? trap_pc : (mret_en ? mepc : bu_next_pc);
    redirect   = wb && (do_trap || mret_en || taken);
    redirect_pc = next_pc;
    retire     = instret;
    retire_pc  = pc_q;

    case (ctrl_q.res_sel)
      RES_SER2: wb_data = ser2;
      RES_LT:   wb_data = {31'd0, ctrl_q.slt_unsigned ? lt_u : lt_s};
      RES_SER1: wb_data = ser1;
      RES_LINK: wb_data = link;
      RES_LOAD: wb_data = load_val;
      RES_BM:   wb_data = bm_y;
      default:  wb_data = csr_rdata;   // RES_CSR
    endcase

    start   = ibuf_valid && ((ph == PH_FETCH) || (wb && !redirect));
    consume = start;
  end

  // ---------------------------------------------------------------- sequencing helpers
  logic pass_end, shift_end;
  assign pass_end  = (ph == PH_PASS)  && (cnt == 6'(N - 1));
  assign shift_end = (ph == PH_SHIFT) && (cnt == 6'(SHIFT_CYCLES - 1));

  function automatic phase_e first_phase(input ctrl_t c);
    case (c.cls)
      CLS_ALU, CLS_BRANCH, CLS_JALR, CLS_LOAD, CLS_STORE, CLS_XPERM, CLS_SHA: return PH_PASS;
      CLS_CLMUL: return c.clmul_high ? PH_BIT : PH_PASS;
      CLS_SHIFT, CLS_AES: return PH_SHIFT;
      default: return PH_WB;
    endcase
  endfunction

  // ---------------------------------------------------------------- data-path control
  always_comb begin
    // serializer 1 / 2 loads
    s1_load = start || (ph == PH_AESLD) || (ph == PH_SHALD);
    s2_load = start;
    case (dctrl.s1_sel)
      S1_RS2:  s1_val = rdata2;
      S1_PC:   s1_val = ibuf_pc;
      S1_SHA:  s1_val = sha_term;
      default: s1_val = rdata1;
    endcase
    if (ph == PH_AESLD)      s1_val = lsu_buf;
    else if (ph == PH_SHALD) s1_val = sha_term;
    case (dctrl.s2_sel)
      S2_IMM:  s2_val = dctrl.imm;
      S2_RS1:  s2_val = rdata1;
      default: s2_val = rdata2;
    endcase
    sha_op       = boundary ? dctrl.sha_op : ctrl_q.sha_op;
    sha_term_idx = boundary ? 3'd0 : iter[2:0];

    // serializer 1 command
    s1_cmd  = S1_HOLD;
    s1_left = sh_left_q;
    s1_fill = sh_fill_q;
    if (ph == PH_PASS) begin
      s1_cmd = S1_ROTCHUNK;
    end else if (ph == PH_SHIFT) begin
      if (int'(cnt) < int'(C1)) s1_cmd = (int'(cnt) < int'(sh_amt_q) / int'(S)) ? S1_STEP : S1_HOLD;
      else                      s1_cmd = (int'(cnt) - int'(C1) < int'(sh_amt_q) % int'(S)) ? S1_BIT : S1_HOLD;
    end else if (ph == PH_BIT) begin
      s1_cmd  = S1_BIT;
      s1_left = !ctrl_q.clmul_high;
      s1_fill = FILL_ZERO;
    end

    // ALU pass
    alu_en    = (ph == PH_PASS);
    alu_first = (cnt == 6'd0);
    alu_last  = (cnt == 6'(N - 1));
    s2_shift  = (ph == PH_PASS);
    case (ctrl_q.cls)
      CLS_LOAD, CLS_STORE, CLS_JALR: alu_op = ALU_ADD;
      CLS_BRANCH:                    alu_op = ALU_SUB;
      default:                       alu_op = ctrl_q.alu_op;
    endcase
    case (ctrl_q.cls)
      CLS_CLMUL: mask_op = MASK_CLMUL;
      CLS_XPERM: mask_op = MASK_XPERM;
      CLS_AES:   mask_op = ctrl_q.aes_dec ? MASK_AES_DEC : MASK_AES_ENC;
      default:   mask_op = MASK_NONE;
    endcase
    clmul_bit = rdata2[ctrl_q.clmul_high ? 5'(31 - iter[4:0]) : iter[4:0]];

    // AES byte assembly: 4 S-box pushes, then the MixColumns products (final
    // round: S-box bytes only, of which the mask keeps byte bs)
    aes_push = (ph == PH_AES);
    xt_sel   = XT_2;
    aes_byte = sbox_y;
    if (cnt >= 6'd4 && !ctrl_q.aes_final) begin
      if (ctrl_q.aes_dec) begin
        case (cnt[1:0])
          2'd0:    xt_sel = XT_E;
          2'd1:    xt_sel = XT_9;
          2'd2:    xt_sel = XT_D;
          default: xt_sel = XT_B;
        endcase
        aes_byte = xt_y;
      end else begin
        case (cnt[1:0])
          2'd0:    begin xt_sel = XT_2; aes_byte = xt_y; end
          2'd3:    begin xt_sel = XT_3; aes_byte = xt_y; end
          default: aes_byte = sbox_y;
        endcase
      end
    end

    lsu_start = (ph == PH_MEM) && (cnt == 6'd0) && !lsu_mis;
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_FETCH; ctrl_q <= '0; pc_q <= '0; cnt <= '0; iter <= '0;
      sh_amt_q <= '0; sh_left_q <= 1'b0; sh_fill_q <= FILL_ZERO;
      exc_q <= 1'b0; exc_cause_q <= '0; exc_tval_q <= '0;
    end else if (start) begin
      ctrl_q    <= dctrl;
      pc_q      <= ibuf_pc;
      ph        <= first_phase(dctrl);
      cnt       <= '0;
      iter      <= '0;
      exc_q     <= 1'b0;
      sh_left_q <= dctrl.shift_left;
      sh_fill_q <= dctrl.shift_fill;
      sh_amt_q  <= dctrl.shamt_imm ? dctrl.imm[4:0] : rdata2[4:0];
      if (dctrl.cls == CLS_AES) begin
        sh_amt_q  <= {dctrl.bs, 3'b000};
        sh_left_q <= 1'b0;
        sh_fill_q <= FILL_ROT;
      end else if (dctrl.cls == CLS_XPERM) begin
        sh_amt_q  <= dctrl.xperm_byte ? 5'd8 : 5'd4;
        sh_left_q <= 1'b0;
        sh_fill_q <= FILL_ROT;
      end
    end else begin
      cnt <= cnt + 6'd1;
      case (ph)
        PH_WB: ph <= PH_FETCH;   // next instruction not yet fetched
        PH_PASS: if (pass_end) begin
          cnt <= '0;
          case (ctrl_q.cls)
            CLS_LOAD, CLS_STORE: ph <= PH_MEM;
            CLS_CLMUL: begin
              if (ctrl_q.clmul_high) begin
                iter <= iter + 6'd1;
                ph   <= (iter == 6'd31) ? PH_WB : PH_BIT;
              end else begin
                ph <= PH_BIT;
              end
            end
            CLS_XPERM: begin
              iter <= iter + 6'd1;
              ph   <= (iter == (ctrl_q.xperm_byte ? 6'd3 : 6'd7)) ? PH_WB : PH_SHIFT;
            end
            CLS_SHA: begin
              iter <= iter + 6'd1;
              ph   <= (iter == 6'(SHA_TERMS - 1)) ? PH_WB : PH_SHALD;
            end
            default: ph <= PH_WB;
          endcase
        end
        PH_BIT: begin
          cnt <= '0;
          if (ctrl_q.clmul_high) ph <= PH_PASS;
          else begin
            iter <= iter + 6'd1;
            ph   <= (iter == 6'd31) ? PH_WB : PH_PASS;
          end
        end
        PH_SHIFT: if (shift_end) begin
          cnt <= '0;
          case (ctrl_q.cls)
            CLS_XPERM: ph <= PH_PASS;
            CLS_AES:   ph <= (iter == 6'd0) ? PH_AES : PH_PASS;
            default:   ph <= PH_WB;
          endcase
        end
        PH_AES: if (cnt == 6'(AES_PUSHES - 1)) begin
          cnt <= '0;
          ph  <= PH_AESLD;
        end
        PH_AESLD: begin
          cnt       <= '0;
          iter      <= 6'd1;
          sh_left_q <= 1'b1;   // rotate the assembled word back to byte bs
          ph        <= PH_SHIFT;
        end
        PH_SHALD: begin
          cnt <= '0;
          ph  <= PH_PASS;
        end
        PH_MEM: begin
          if (cnt == 6'd0 && lsu_mis) begin
            exc_q       <= 1'b1;
            exc_cause_q <= (ctrl_q.cls == CLS_STORE) ? CAUSE_STORE_MISALIGNED : CAUSE_LOAD_MISALIGNED;
            exc_tval_q  <= ser2;
            ph          <= PH_WB;
          end else if (lsu_done) begin
            ph <= PH_WB;
          end
        end
        default: ;   // PH_FETCH: wait for the fetch buffer
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  // the instruction taken from the fetch buffer is the one the pc expects
  a_seq_pc: assert property (@(posedge clk) disable iff (!rst_n)
    (wb && start) |-> (ibuf_pc == next_pc));
  a_no_lsu_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    lsu_start |-> !lsu_busy);
endmodule
