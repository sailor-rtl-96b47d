// tb_sailor_core_rv32i: the RV32I baseline configuration of the SAILOR core.
//
// Each extension of the core can be left out at design time. This bench
// builds two cores side by side: one with every scalar-cryptography
// extension disabled (Zbkb, Zbkc, Zbkx, Zkne, Zknd and Zknh off, CSRs and
// traps kept), and one at the defaults with all of them on. Both run the
// same program from their own memory: a trap handler that records mcause
// and resumes after the trapping instruction, one instruction of every
// crypto kind (all four AES forms, the ten SHA-2 functions, clmul/clmulh,
// xperm4/xperm8 and the Zbkb set), each writing x5, and a few RV32I
// instructions around them.
//
// The baseline core must take an illegal-instruction trap (mcause 2) on
// every crypto instruction, leave x5 unchanged and still compute the RV32I
// results; the full core must take no trap. Watchdog and TB_RESULT as in
// every bench here.
module tb_sailor_core_rv32i;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic irq_ext = 1'b0, irq_timer = 1'b0, irq_soft = 1'b0;
  logic retire_b, retire_f;
  logic [31:0] retire_pc_b, retire_pc_f;
  mem_req_t ireq_b, dreq_b, ireq_f, dreq_f;
  mem_rsp_t irsp_b, drsp_b, irsp_f, drsp_f;
  logic [31:0] prog [$];
  logic [31:0] end_pc;
  int n_crypto = 0;
  bit done_b = 0, done_f = 0;

  localparam logic [31:0] OUT_BASE = 32'h2000, LOG_BASE = 32'h2100;

  always #5 clk = ~clk;

  sailor_mem_model #(.WORDS(4096)) u_mem_b (.clk, .rst_n, .ireq(ireq_b), .irsp(irsp_b), .dreq(dreq_b), .drsp(drsp_b));
  sailor_core #(.EN_ZBKB(1'b0), .EN_ZBKC(1'b0), .EN_ZBKX(1'b0), .EN_ZKNE(1'b0), .EN_ZKND(1'b0),
                .EN_ZKNH(1'b0)) dut_base (
    .clk, .rst_n, .ireq(ireq_b), .irsp(irsp_b), .dreq(dreq_b), .drsp(drsp_b),
    .irq_ext, .irq_timer, .irq_soft, .retire(retire_b), .retire_pc(retire_pc_b));

  sailor_mem_model #(.WORDS(4096)) u_mem_f (.clk, .rst_n, .ireq(ireq_f), .irsp(irsp_f), .dreq(dreq_f), .drsp(drsp_f));
  sailor_core dut_full (
    .clk, .rst_n, .ireq(ireq_f), .irsp(irsp_f), .dreq(dreq_f), .drsp(drsp_f),
    .irq_ext, .irq_timer, .irq_soft, .retire(retire_f), .retire_pc(retire_pc_f));

  // ---------------------------------------------------------------- assembler
  localparam logic [6:0] LUI = 7'b0110111;
  function automatic void li(input int rd, input logic [31:0] v);
    prog.push_back(enc_u(v + 32'h800, rd, LUI));
    prog.push_back(enc_i(int'({{20{v[11]}}, v[11:0]}), rd, 3'b000, rd, OPI));
  endfunction
  function automatic void addi(input int rd, input int rs, input int imm);
    prog.push_back(enc_i(imm, rs, 3'b000, rd, OPI));
  endfunction
  function automatic void csr(input logic [2:0] f3, input int rd, input int addr, input int rs);
    prog.push_back(enc_i(addr, rs, f3, rd, SYS));
  endfunction
  function automatic void crypto_r(input logic [6:0] f7, input logic [2:0] f3);
    prog.push_back(enc_r(f7, 2, 1, f3, 5, OP));
    n_crypto++;
  endfunction
  function automatic void crypto_i(input logic [11:0] imm, input logic [2:0] f3);
    prog.push_back(enc_i(int'(imm), 1, f3, 5, OPI));
    n_crypto++;
  endfunction

  // x1/x2 operands, x5 crypto destination, x7 trap count, x16 trap log pointer
  function automatic void build();
    int handler_at, skip_at;
    li(16, LOG_BASE); li(15, OUT_BASE); addi(7, 0, 0);
    li(10, 0); handler_at = prog.size(); prog.push_back('0);   // patched: addi x10, x10, handler
    csr(3'b001, 0, 12'h305, 10);                                 // csrw mtvec, x10
    skip_at = prog.size(); prog.push_back('0);                   // patched: jal x0, main
    // handler: log mcause, step over the trapping instruction, return
    prog[handler_at] = enc_i(4 * int'(prog.size()), 10, 3'b000, 10, OPI);
    csr(3'b010, 8, 12'h342, 0);                                  // csrr x8, mcause
    prog.push_back(enc_s(0, 8, 16, 3'b010));                     // sw x8, 0(x16)
    addi(16, 16, 4); addi(7, 7, 1);
    csr(3'b010, 6, 12'h341, 0); addi(6, 6, 4); csr(3'b001, 0, 12'h341, 6);
    prog.push_back(32'h3020_0073);                               // mret
    prog[skip_at] = enc_j(4 * (int'(prog.size()) - skip_at), 0);
    // main
    li(1, 32'h1234_5678); li(2, 32'h0F0F_00F3); li(5, 32'h5555_AAAA);
    for (int k = 0; k < 4; k++) crypto_r({2'(k), 5'b10001 | 5'(2 * (k & 1)) | 5'(4 * (k >> 1))}, 3'b000);  // aes32*
    for (int f = 0; f < 4; f++) crypto_i(12'h100 | 12'(f), 3'b001);                                        // sha256*
    foreach (SHA512_F7[i]) crypto_r(SHA512_F7[i], 3'b000);                                                  // sha512*
    crypto_r(7'b0000101, 3'b001); crypto_r(7'b0000101, 3'b011);                                             // clmul, clmulh
    crypto_r(7'b0010100, 3'b010); crypto_r(7'b0010100, 3'b100);                                             // xperm4, xperm8
    crypto_r(7'b0110000, 3'b101); crypto_r(7'b0110000, 3'b001);                                             // ror, rol
    crypto_i(12'h605, 3'b101);                                                                              // rori
    crypto_r(7'b0100000, 3'b111); crypto_r(7'b0100000, 3'b110); crypto_r(7'b0100000, 3'b100);              // andn, orn, xnor
    crypto_r(7'b0000100, 3'b100); crypto_r(7'b0000100, 3'b111);                                             // pack, packh
    crypto_i(12'h687, 3'b101); crypto_i(12'h698, 3'b101);                                                   // brev8, rev8
    crypto_i(12'h08F, 3'b001); crypto_i(12'h08F, 3'b101);                                                   // zip, unzip
    // RV32I results next to them
    prog.push_back(enc_r(7'h00, 2, 1, 3'b000, 3, OP));           // add x3, x1, x2
    prog.push_back(enc_r(7'h20, 2, 1, 3'b000, 4, OP));           // sub x4, x1, x2
    prog.push_back(enc_s(0, 3, 15, 3'b010));
    prog.push_back(enc_s(4, 4, 15, 3'b010));
    prog.push_back(enc_s(8, 7, 15, 3'b010));
    prog.push_back(enc_s(12, 5, 15, 3'b010));
    end_pc = 32'(prog.size() * 4);
    prog.push_back(enc_j(0, 0));
  endfunction

  localparam logic [6:0] SHA512_F7 [6] = '{7'b0101000, 7'b0101001, 7'b0101010,
                                            7'b0101011, 7'b0101110, 7'b0101111};

  always @(posedge clk) begin
    if (rst_n && retire_b && retire_pc_b == end_pc) done_b <= 1'b1;
    if (rst_n && retire_f && retire_pc_f == end_pc) done_f <= 1'b1;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    build();
    for (int i = 0; i < 4096; i++) begin u_mem_b.mem[i] = '0; u_mem_f.mem[i] = '0; end
    foreach (prog[i]) begin u_mem_b.mem[i] = prog[i]; u_mem_f.mem[i] = prog[i]; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_b && done_f);
    repeat (10) @(posedge clk);
    // baseline: every crypto instruction trapped as illegal and wrote nothing
    check("baseline add", u_mem_b.mem[(OUT_BASE >> 2)], 32'h1234_5678 + 32'h0F0F_00F3);
    check("baseline sub", u_mem_b.mem[(OUT_BASE >> 2) + 1], 32'h1234_5678 - 32'h0F0F_00F3);
    check("baseline trap count", u_mem_b.mem[(OUT_BASE >> 2) + 2], 32'(n_crypto));
    check("baseline x5 untouched", u_mem_b.mem[(OUT_BASE >> 2) + 3], 32'h5555_AAAA);
    for (int i = 0; i < n_crypto; i++)
      check($sformatf("baseline mcause %0d", i), u_mem_b.mem[(LOG_BASE >> 2) + i], 32'd2);
    // full core: the same words are legal
    check("full add", u_mem_f.mem[(OUT_BASE >> 2)], 32'h1234_5678 + 32'h0F0F_00F3);
    check("full sub", u_mem_f.mem[(OUT_BASE >> 2) + 1], 32'h1234_5678 - 32'h0F0F_00F3);
    check("full trap count", u_mem_f.mem[(OUT_BASE >> 2) + 2], 32'd0);
    $display("%0d crypto instructions tried on both configurations", n_crypto);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20_000_000);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
