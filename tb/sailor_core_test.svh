// sailor_core_test.svh: end-to-end test body shared by the core testbenches.
//
// Included inside a testbench module that declares `localparam int W`, the
// clock/reset, the memory model `u_mem`, the core `dut` and a task finish_test()
// that prints the TB_RESULT line and ends the simulation. It assembles a
// program into memory that runs every instruction group of the core on
// directed and random operands and stores each result, then compares the
// stored results with the reference model in sailor_ref_pkg. It also checks
// the trap log written by the trap handler (misaligned load, ecall, illegal
// instruction, external interrupt), the constant per-instruction latency
// of every non-memory instruction (Zkt), and that each mechanism of the core
// occurred at least once.
import sailor_pkg::*;
import sailor_ref_pkg::*;

localparam int N  = 32 / W;
localparam int S  = (W == 32) ? 8 : W;
localparam int SC = (32 / S - 1) + (S - 1);

localparam logic [31:0] HANDLER = 32'h40;
localparam logic [31:0] MAIN    = 32'h100;
localparam logic [31:0] RESULTS = 32'h8000;
localparam logic [31:0] TRAPLOG = 32'hC000;
localparam logic [31:0] SCRATCH = 32'hE000;

int checks = 0, failures = 0;
logic [31:0] prog [$];
logic [31:0] expv [$];
int          exp_lat [int];     // pc -> expected start-to-write-back cycles
string       kind_at [int];
int          irq_lo, irq_hi;    // window of pcs where the interrupt may hit
logic [31:0] end_pc;

function automatic logic [31:0] cur_pc();
  return 32'(prog.size() * 4);
endfunction

function automatic void emit(input logic [31:0] w);
  prog.push_back(w);
endfunction

function automatic void emit_timed(input logic [31:0] w, input int lat, input string kind);
  exp_lat[int'(cur_pc())] = lat;
  kind_at[int'(cur_pc())] = kind;
  prog.push_back(w);
endfunction

function automatic void li(input int rd, input logic [31:0] v);
  logic [31:0] hi;
  hi = v + 32'h800;
  emit(enc_u(hi, rd, 7'b0110111));
  emit(enc_i(int'({{20{v[11]}}, v[11:0]}), rd, 3'b000, rd, OPI));
endfunction

function automatic void store_result(input logic [31:0] v);
  emit(enc_s(0, 3, 10, 3'b010));                 // sw x3, 0(x10)
  emit(enc_i(4, 10, 3'b000, 10, OPI));            // addi x10, x10, 4
  expv.push_back(v);
endfunction

logic [31:0] vec_a [$], vec_b [$];

function automatic void make_vectors();
  logic [31:0] edges [6] = '{32'h0, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'h1, 32'h0F0F_1234};
  for (int i = 0; i < 6; i++) begin vec_a.push_back(edges[i]); vec_b.push_back(edges[5 - i]); end
  for (int i = 0; i < 4; i++) begin vec_a.push_back($urandom); vec_b.push_back($urandom); end
endfunction

// R-type test: x3 = op(x1, x2)
function automatic void rtest(input logic [6:0] f7, input logic [2:0] f3, input int lat,
                              input string kind, input logic [31:0] a, input logic [31:0] b,
                              input logic [31:0] r);
  li(1, a); li(2, b);
  emit_timed(enc_r(f7, 2, 1, f3, 3, OP), lat, kind);
  store_result(r);
endfunction

// I-type test: x3 = op(x1, imm)
function automatic void itest(input int imm, input logic [2:0] f3, input int lat, input string kind,
                              input logic [31:0] a, input logic [31:0] r);
  li(1, a);
  emit_timed(enc_i(imm, 1, f3, 3, OPI), lat, kind);
  store_result(r);
endfunction

function automatic void build_program();
  logic [31:0] a, b, r;
  int sh;
  // reset vector
  emit(enc_j(int'(MAIN), 0));
  while (cur_pc() < HANDLER) emit(32'h0000_0013);
  // trap handler: log mcause and mepc, skip the faulting instruction
  emit(enc_i(12'h342, 0, 3'b010, 20, SYS));       // csrrs x20, mcause, x0
  emit(enc_i(12'h341, 0, 3'b010, 21, SYS));       // csrrs x21, mepc, x0
  emit(enc_s(0, 20, 11, 3'b010));
  emit(enc_s(4, 21, 11, 3'b010));
  emit(enc_i(8, 11, 3'b000, 11, OPI));
  emit(enc_b(12, 0, 20, 3'b100));                 // blt x20, x0, +12 (interrupt)
  emit(enc_i(4, 21, 3'b000, 21, OPI));
  emit(enc_i(12'h341, 21, 3'b001, 0, SYS));       // csrrw x0, mepc, x21
  emit(32'h3020_0073);                            // mret
  while (cur_pc() < MAIN) emit(32'h0000_0013);

  li(10, RESULTS); li(11, TRAPLOG); li(12, SCRATCH);
  emit(enc_i(int'(HANDLER), 0, 3'b000, 5, OPI));
  emit(enc_i(12'h305, 5, 3'b001, 0, SYS));        // csrrw x0, mtvec, x5
  emit(enc_i(1, 0, 3'b000, 5, OPI));
  emit(enc_i(11, 5, 3'b001, 5, OPI));             // slli x5, x5, 11
  emit(enc_i(12'h304, 5, 3'b001, 0, SYS));        // csrrw x0, mie, x5
  emit(enc_i(12'h300, 8, 3'b110, 0, SYS));        // csrrsi x0, mstatus, 8

  for (int v = 0; v < vec_a.size(); v++) begin
    a = vec_a[v]; b = vec_b[v]; sh = b[4:0];
    // RV32I register-register
    rtest(7'h00, 3'b000, N + 1, "add",  a, b, a + b);
    rtest(7'h20, 3'b000, N + 1, "sub",  a, b, a - b);
    rtest(7'h00, 3'b010, N + 1, "slt",  a, b, {31'd0, $signed(a) < $signed(b)});
    rtest(7'h00, 3'b011, N + 1, "sltu", a, b, {31'd0, a < b});
    rtest(7'h00, 3'b100, N + 1, "xor",  a, b, a ^ b);
    rtest(7'h00, 3'b110, N + 1, "or",   a, b, a | b);
    rtest(7'h00, 3'b111, N + 1, "and",  a, b, a & b);
    rtest(7'h00, 3'b001, SC + 1, "sll", a, b, a << sh);
    rtest(7'h00, 3'b101, SC + 1, "srl", a, b, a >> sh);
    rtest(7'h20, 3'b101, SC + 1, "sra", a, b, 32'($signed(a) >>> sh));
    // immediates
    itest(int'(b[11:0]), 3'b000, N + 1, "addi", a, a + {{20{b[11]}}, b[11:0]});
    itest(int'(b[11:0]), 3'b011, N + 1, "sltiu", a, {31'd0, a < {{20{b[11]}}, b[11:0]}});
    itest(sh, 3'b001, SC + 1, "slli", a, a << sh);
    itest(12'h400 | sh, 3'b101, SC + 1, "srai", a, 32'($signed(a) >>> sh));
    // Zbkb
    rtest(7'h20, 3'b111, N + 1, "andn", a, b, a & ~b);
    rtest(7'h20, 3'b110, N + 1, "orn",  a, b, a | ~b);
    rtest(7'h20, 3'b100, N + 1, "xnor", a, b, ~(a ^ b));
    rtest(7'h30, 3'b101, SC + 1, "ror", a, b, ror32(a, sh));
    rtest(7'h30, 3'b001, SC + 1, "rol", a, b, rol32(a, sh));
    itest(12'h600 | sh, 3'b101, SC + 1, "rori", a, ror32(a, sh));
    rtest(7'h04, 3'b100, 1, "pack",  a, b, {b[15:0], a[15:0]});
    rtest(7'h04, 3'b111, 1, "packh", a, b, {16'd0, b[7:0], a[7:0]});
    itest(12'h08f, 3'b001, 1, "zip",   a, ref_zip(a));
    itest(12'h08f, 3'b101, 1, "unzip", a, ref_unzip(a));
    itest(12'h687, 3'b101, 1, "brev8", a, ref_brev8(a));
    itest(12'h698, 3'b101, 1, "rev8",  a, {a[7:0], a[15:8], a[23:16], a[31:24]});
    // Zbkc
    begin
      logic [63:0] p; p = clmul64(a, b);
      rtest(7'h05, 3'b001, 32 * (N + 1) + 1, "clmul",  a, b, p[31:0]);
      rtest(7'h05, 3'b011, 32 * (N + 1) + 1, "clmulh", a, b, p[63:32]);
    end
    // Zbkx (indices: random, partly out of range)
    rtest(7'h14, 3'b010, 8 * N + 7 * SC + 1, "xperm4", a, b, ref_xperm(a, b, 1'b0));
    rtest(7'h14, 3'b100, 4 * N + 3 * SC + 1, "xperm8", a, b & 32'h0703_0502, ref_xperm(a, b & 32'h0703_0502, 1'b1));
    // Zkne / Zknd, byte select v % 4
    begin
      logic [1:0] bs; bs = 2'(v);
      rtest({bs, 5'b10001}, 3'b000, 2 * SC + N + 10, "aes32esi",  a, b, ref_aes32(a, b, bs, 1'b0, 1'b0));
      rtest({bs, 5'b10011}, 3'b000, 2 * SC + N + 10, "aes32esmi", a, b, ref_aes32(a, b, bs, 1'b0, 1'b1));
      rtest({bs, 5'b10101}, 3'b000, 2 * SC + N + 10, "aes32dsi",  a, b, ref_aes32(a, b, bs, 1'b1, 1'b0));
      rtest({bs, 5'b10111}, 3'b000, 2 * SC + N + 10, "aes32dsmi", a, b, ref_aes32(a, b, bs, 1'b1, 1'b1));
    end
    // Zknh
    itest(12'h102, 3'b001, 6 * N + 6, "sha256sig0", a, ref_sha(0, a, 0));
    itest(12'h103, 3'b001, 6 * N + 6, "sha256sig1", a, ref_sha(1, a, 0));
    itest(12'h100, 3'b001, 6 * N + 6, "sha256sum0", a, ref_sha(2, a, 0));
    itest(12'h101, 3'b001, 6 * N + 6, "sha256sum1", a, ref_sha(3, a, 0));
    rtest(7'h2a, 3'b000, 6 * N + 6, "sha512sig0l", a, b, ref_sha(4, a, b));
    rtest(7'h2e, 3'b000, 6 * N + 6, "sha512sig0h", a, b, ref_sha(5, a, b));
    rtest(7'h2b, 3'b000, 6 * N + 6, "sha512sig1l", a, b, ref_sha(6, a, b));
    rtest(7'h2f, 3'b000, 6 * N + 6, "sha512sig1h", a, b, ref_sha(7, a, b));
    rtest(7'h28, 3'b000, 6 * N + 6, "sha512sum0r", a, b, ref_sha(8, a, b));
    rtest(7'h29, 3'b000, 6 * N + 6, "sha512sum1r", a, b, ref_sha(9, a, b));
    // branches: x3 = 1 if not taken, 0 if taken
    for (int f = 0; f < 8; f++) begin
      logic t;
      if (f == 2 || f == 3) continue;
      case (f)
        0: t = (a == b); 1: t = (a != b);
        4: t = ($signed(a) < $signed(b)); 5: t = ($signed(a) >= $signed(b));
        6: t = (a < b); default: t = (a >= b);
      endcase
      li(1, a); li(2, (v % 3 == 0) ? a : b);
      if (v % 3 == 0) begin
        case (f) 0, 5, 7: t = 1'b1; default: t = 1'b0; endcase
      end
      emit(enc_i(0, 0, 3'b000, 3, OPI));
      emit_timed(enc_b(8, 2, 1, 3'(f)), N + 1, "branch");
      emit(enc_i(1, 0, 3'b000, 3, OPI));
      store_result({31'd0, !t});
    end
  end
  // lui / auipc / jal / jalr
  emit(enc_u(32'hABCDE000, 3, 7'b0110111)); store_result(32'hABCDE000);
  r = cur_pc() + 32'h12345000;
  emit_timed(enc_u(32'h12345000, 3, 7'b0010111), N + 1, "auipc"); store_result(r);
  r = cur_pc() + 4;
  emit_timed(enc_j(8, 3), 1, "jal"); emit(32'h0000_0000); store_result(r);   // skips an illegal word
  // jumps that redirect while the next fetch is still in flight
  for (int i = 0; i < 20; i++) emit_timed(enc_j(4, 0), 1, "jal");
  li(1, cur_pc() + 24);
  r = cur_pc() + 4;
  emit_timed(enc_i(4, 1, 3'b000, 3, 7'b1100111), N + 1, "jalr");            // to (x1 + 4) = after the hole
  emit(32'h0000_0000); emit(32'h0000_0000); emit(32'h0000_0000); emit(32'h0000_0000);
  store_result(r);
  // loads and stores
  li(1, 32'h8899_AABB); emit(enc_s(0, 1, 12, 3'b010));   // sw
  li(2, 32'h0000_00C7); emit(enc_s(1, 2, 12, 3'b000));   // sb at +1
  li(2, 32'h0000_D00D); emit(enc_s(6, 2, 12, 3'b001));   // sh at +6
  emit(enc_i(0, 12, 3'b010, 3, LD)); store_result(32'h8899_C7BB);
  emit(enc_i(1, 12, 3'b000, 3, LD)); store_result(32'hFFFF_FFC7);
  emit(enc_i(1, 12, 3'b100, 3, LD)); store_result(32'h0000_00C7);
  emit(enc_i(2, 12, 3'b001, 3, LD)); store_result(32'hFFFF_8899);
  emit(enc_i(2, 12, 3'b101, 3, LD)); store_result(32'h0000_8899);
  emit(enc_i(6, 12, 3'b101, 3, LD)); store_result(32'h0000_D00D);
  // CSRs
  li(1, 32'h5A5A_1234);
  emit(enc_i(12'h340, 1, 3'b001, 0, SYS));                 // csrrw x0, mscratch, x1
  emit(enc_i(12'h340, 0, 3'b010, 3, SYS)); store_result(32'h5A5A_1234);
  emit(enc_i(12'h301, 0, 3'b010, 3, SYS)); store_result(32'h4000_0100);  // misa
  // exceptions: misaligned load, ecall, illegal instruction, ebreak
  emit(enc_i(1, 12, 3'b010, 3, LD));
  emit(32'h0000_0073);
  emit(32'hFFFF_FFFF);
  emit(32'h0010_0073);
  // window for the external interrupt
  irq_lo = int'(cur_pc());
  for (int i = 0; i < 40; i++) emit(enc_i(1, 4, 3'b000, 4, OPI));   // addi x4, x4, 1
  irq_hi = int'(cur_pc());
  emit(enc_i(0, 4, 3'b000, 3, OPI)); store_result(32'd40);           // all 40 executed once
  end_pc = cur_pc();
  emit(enc_j(0, 0));
endfunction

// ------------------------------------------------------------ run
int unsigned cyc = 0;
int          start_at [int];
int unsigned n_bypass = 0, n_drop = 0, n_taken = 0, n_nottaken = 0, n_buffered = 0, n_refetch = 0,
             n_trap = 0, n_irq = 0, n_mret = 0, n_memwait = 0, n_lat = 0;
bit          irq_done = 0;
bit          finished = 0;

always @(posedge clk) begin
  cyc <= cyc + 1;
  if (rst_n) begin
    if (dut.start) start_at[int'(dut.ibuf_pc)] = int'(cyc);
    if (dut.start && dut.u_rf.bypass_hit) n_bypass++;
    if (dut.drop_event) n_drop++;
    if (dut.start && dut.wb) n_buffered++;
    if (dut.start && !dut.wb) n_refetch++;
    if (dut.wb && dut.ctrl_q.cls == CLS_BRANCH) begin
      if (dut.taken) n_taken++; else n_nottaken++;
    end
    if (dut.trap_en && !dut.trap_irq) n_trap++;
    if (dut.trap_en && dut.trap_irq) n_irq++;
    if (dut.mret_en) n_mret++;
    if (dut.dreq.valid && !dut.drsp.ready) n_memwait++;
    if (retire) begin
      int p; p = int'(retire_pc);
      if (exp_lat.exists(p)) begin
        n_lat++;
        checks++;
        if (int'(cyc) - start_at[p] != exp_lat[p]) begin
          failures++;
          $display("LATENCY %s at %h: %0d cycles, expected %0d", kind_at[p], p,
                   int'(cyc) - start_at[p], exp_lat[p]);
        end
      end
      if (retire_pc == end_pc) finished = 1;
      if (retire_pc == HANDLER) irq_ext <= 1'b0;
      if (!irq_done && p >= irq_lo + 40 && p < irq_hi) begin irq_ext <= 1'b1; irq_done = 1; end
    end
  end
end

task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
  checks++;
  if (got !== exp) begin
    failures++;
    $display("MISMATCH %s: got %h expected %h", what, got, exp);
  end
endtask

task automatic count_check(input string what, input int unsigned n);
  checks++;
  if (n == 0) begin failures++; $display("MECHANISM %s never happened", what); end
  else $display("mechanism %-22s %0d", what, n);
endtask

initial begin
  irq_ext = 1'b0; irq_timer = 1'b0; irq_soft = 1'b0;
  rst_n = 1'b0;
  build_tables();
  make_vectors();
  build_program();
  for (int i = 0; i < u_mem.WORDS; i++) u_mem.mem[i] = 32'h0;
  foreach (prog[i]) u_mem.mem[i] = prog[i];
  repeat (5) @(posedge clk);
  rst_n = 1'b1;
  wait (finished);
  repeat (20) @(posedge clk);
  foreach (expv[i]) check($sformatf("result %0d", i), u_mem.mem[(RESULTS >> 2) + i], expv[i]);
  // trap log: misaligned load, ecall, illegal, ebreak, then the interrupt
  begin
    int t; t = TRAPLOG >> 2;
    check("trap0 cause", u_mem.mem[t + 0], 32'd4);
    check("trap1 cause", u_mem.mem[t + 2], 32'd11);
    check("trap2 cause", u_mem.mem[t + 4], 32'd2);
    check("trap3 cause", u_mem.mem[t + 6], 32'd3);
    check("trap1 epc",   u_mem.mem[t + 3], u_mem.mem[t + 1] + 4);
    check("irq cause",   u_mem.mem[t + 8], 32'h8000_000B);
    checks++;
    if (int'(u_mem.mem[t + 9]) < irq_lo || int'(u_mem.mem[t + 9]) > irq_hi) begin
      failures++; $display("irq epc %h outside window", u_mem.mem[t + 9]);
    end
  end
  count_check("register bypass", n_bypass);
  count_check("fetch buffer hit", n_buffered);
  count_check("refetch after redirect", n_refetch);
  count_check("dropped stale fetch", n_drop);
  count_check("branch taken", n_taken);
  count_check("branch not taken", n_nottaken);
  count_check("exception", n_trap);
  count_check("interrupt", n_irq);
  count_check("mret", n_mret);
  count_check("data memory wait", n_memwait);
  count_check("latency checks", n_lat);
  $display("SERIAL_WIDTH=%0d program=%0d words cycles=%0d", W, prog.size(), cyc);
  finish_test();
end

initial begin
  #(64'd20_000_000_000);
  failures++;
  $display("WATCHDOG timeout");
  finish_test();
end
