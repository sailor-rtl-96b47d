// tb_sailor_core_sha512: one SHA-512 compression on the SAILOR core.
//
// A straight-line program, assembled here from the reference package's
// encoders, hashes the one-block message "abc" with the RV32 Zknh
// instructions. Every 64-bit value lives in a register pair (low, high):
// sha512sig0l/sig0h and sha512sig1l/sig1h give the two halves of the
// schedule functions, sha512sum0r/sum1r the two halves of the round
// functions (called once with the operands as (low, high) and once as
// (high, low)), and 64-bit additions are add, sltu, add, add. The program
// expands the schedule W[16..79], runs the 80 rounds with the working
// variables renamed in the assembler, adds the chaining value and stores
// the digest.
//
// Data memory holds the padded block (the schedule grows there), the round
// constants K and the chaining value, 64-bit words stored low word first.
// K and the initial hash value are generated here from their definition,
// the first 64 fraction bits of the cube and square roots of the first
// primes, by integer root search, and spot-checked against FIPS 180-4. The
// core runs at its default parameters against a memory that answers every
// request in one cycle, so the reported cycle count is the core's own. The
// schedule and digest are checked against a behavioural SHA-512 in this
// file, and the digest against the FIPS 180-4 example value
// ddaf35a1 ... a54ca49f.
module tb_sailor_core_sha512;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic irq_ext = 1'b0, irq_timer = 1'b0, irq_soft = 1'b0, retire;
  logic [31:0] retire_pc;
  mem_req_t ireq, dreq;
  mem_rsp_t irsp, drsp;
  logic [31:0] prog [$];
  logic [31:0] end_pc;
  logic [63:0] K [80];
  logic [63:0] H0 [8];
  logic [63:0] blk [16];
  logic [63:0] w [80];
  int unsigned cyc = 0, t_start = 0, t_end = 0, n_retired = 0;
  bit finished = 0;

  localparam int MEM_WORDS = 16384;
  localparam logic [31:0] W_BASE = 32'h8000, K_BASE = 32'h8400, H_BASE = 32'h8800;

  always #5 clk = ~clk;

  sailor_mem_model #(.WORDS(MEM_WORDS), .MAX_LAT(1), .STALL(1'b0)) u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);
  sailor_core dut (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp, .irq_ext, .irq_timer, .irq_soft, .retire, .retire_pc);

  // ---------------------------------------------------------------- constants
  // largest x with x^k <= p * 2^(64k), k = 2 or 3; its low 64 bits are the
  // first 64 fraction bits of the k-th root of p (p < 512)
  function automatic logic [63:0] root_frac(input int p, input int k);
    logic [255:0] x, lim, pw;
    lim = 256'(p) << (64 * k);
    x = '0;
    for (int b = 67; b >= 0; b--) begin
      logic [255:0] c;
      c = x | (256'(1) << b);
      pw = (k == 3) ? c * c * c : c * c;
      if (pw <= lim) x = c;
    end
    return x[63:0];
  endfunction

  function automatic void make_constants();
    int p = 2, n = 0;
    while (n < 80) begin
      bit prime = 1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) prime = 0;
      if (prime) begin
        K[n] = root_frac(p, 3);
        if (n < 8) H0[n] = root_frac(p, 2);
        n++;
      end
      p++;
    end
  endfunction

  // ---------------------------------------------------------------- reference
  function automatic logic [63:0] ror(input logic [63:0] x, input int k);
    return (x >> k) | (x << (64 - k));
  endfunction

  function automatic void ref_sha512(output logic [63:0] dig [8]);
    logic [63:0] a, b, c, d, e, f, g, h, t1, t2;
    for (int t = 0; t < 80; t++) begin
      if (t < 16) w[t] = blk[t];
      else w[t] = (ror(w[t-2], 19) ^ ror(w[t-2], 61) ^ (w[t-2] >> 6)) + w[t-7]
                + (ror(w[t-15], 1) ^ ror(w[t-15], 8) ^ (w[t-15] >> 7)) + w[t-16];
    end
    {a, b, c, d, e, f, g, h} = {H0[0], H0[1], H0[2], H0[3], H0[4], H0[5], H0[6], H0[7]};
    for (int t = 0; t < 80; t++) begin
      t1 = h + (ror(e, 14) ^ ror(e, 18) ^ ror(e, 41)) + ((e & f) ^ (~e & g)) + K[t] + w[t];
      t2 = (ror(a, 28) ^ ror(a, 34) ^ ror(a, 39)) + ((a & b) ^ (a & c) ^ (b & c));
      {h, g, f, e, d, c, b, a} = {g, f, e, d + t1, c, b, a, t1 + t2};
    end
    dig[0] = H0[0] + a; dig[1] = H0[1] + b; dig[2] = H0[2] + c; dig[3] = H0[3] + d;
    dig[4] = H0[4] + e; dig[5] = H0[5] + f; dig[6] = H0[6] + g; dig[7] = H0[7] + h;
  endfunction

  // ---------------------------------------------------------------- assembler
  localparam logic [6:0] LUI = 7'b0110111;
  function automatic void li(input int rd, input logic [31:0] v);
    prog.push_back(enc_u(v + 32'h800, rd, LUI));
    prog.push_back(enc_i(int'({{20{v[11]}}, v[11:0]}), rd, 3'b000, rd, OPI));
  endfunction
  function automatic void r_op(input logic [6:0] f7, input logic [2:0] f3,
                               input int rd, input int a, input int b);
    prog.push_back(enc_r(f7, b, a, f3, rd, OP));
  endfunction
  function automatic void lw(input int rd, input int off, input int base);
    prog.push_back(enc_i(off, base, 3'b010, rd, LD));
  endfunction
  function automatic void sw(input int rs, input int off, input int base);
    prog.push_back(enc_s(off, rs, base, 3'b010));
  endfunction
  // {dlo, dhi} += {blo, bhi}; x23 holds the carry
  function automatic void add64(input int dlo, input int dhi, input int blo, input int bhi);
    r_op(7'h00, 3'b000, dlo, dlo, blo);
    r_op(7'h00, 3'b011, 23, dlo, blo);     // sltu
    r_op(7'h00, 3'b000, dhi, dhi, bhi);
    r_op(7'h00, 3'b000, dhi, dhi, 23);
  endfunction
  // load 64-bit word t of a table at base register rb into x17 (low), x18 (high)
  function automatic void ld64(input int t, input int rb);
    lw(17, 8 * t, rb); lw(18, 8 * t + 4, rb);
  endfunction

  localparam logic [6:0] SUM0R = 7'b0101000, SUM1R = 7'b0101001, SIG0L = 7'b0101010,
                         SIG1L = 7'b0101011, SIG0H = 7'b0101110, SIG1H = 7'b0101111;

  // registers: the working variables as pairs in x1-x16 (renamed every round),
  // x17-x23 temporaries, x24/x25/x26 the W, K and H base addresses
  function automatic void build();
    int lo [8], hi [8], nlo [8], nhi [8];
    for (int i = 0; i < 8; i++) begin lo[i] = 1 + 2 * i; hi[i] = 2 + 2 * i; end
    li(24, W_BASE); li(25, K_BASE); li(26, H_BASE);
    for (int t = 16; t < 80; t++) begin
      ld64(t - 2, 24);
      r_op(SIG1L, 3'b000, 19, 17, 18); r_op(SIG1H, 3'b000, 20, 18, 17);
      ld64(t - 7, 24); add64(19, 20, 17, 18);
      ld64(t - 15, 24);
      r_op(SIG0L, 3'b000, 21, 17, 18); r_op(SIG0H, 3'b000, 22, 18, 17);
      add64(19, 20, 21, 22);
      ld64(t - 16, 24); add64(19, 20, 17, 18);
      sw(19, 8 * t, 24); sw(20, 8 * t + 4, 24);
    end
    for (int i = 0; i < 8; i++) begin lw(lo[i], 8 * i, 26); lw(hi[i], 8 * i + 4, 26); end
    for (int t = 0; t < 80; t++) begin
      // index 0..7 = a..h
      ld64(t, 24); add64(lo[7], hi[7], 17, 18);
      ld64(t, 25); add64(lo[7], hi[7], 17, 18);
      r_op(SUM1R, 3'b000, 19, lo[4], hi[4]); r_op(SUM1R, 3'b000, 20, hi[4], lo[4]);
      add64(lo[7], hi[7], 19, 20);
      r_op(7'h00, 3'b111, 19, lo[4], lo[5]); r_op(7'h20, 3'b111, 21, lo[6], lo[4]); r_op(7'h00, 3'b100, 19, 19, 21);
      r_op(7'h00, 3'b111, 20, hi[4], hi[5]); r_op(7'h20, 3'b111, 21, hi[6], hi[4]); r_op(7'h00, 3'b100, 20, 20, 21);
      add64(lo[7], hi[7], 19, 20);                          // h = T1
      add64(lo[3], hi[3], lo[7], hi[7]);                    // d + T1
      r_op(SUM0R, 3'b000, 19, lo[0], hi[0]); r_op(SUM0R, 3'b000, 20, hi[0], lo[0]);
      add64(lo[7], hi[7], 19, 20);
      r_op(7'h00, 3'b111, 19, lo[0], lo[1]); r_op(7'h00, 3'b111, 21, lo[0], lo[2]); r_op(7'h00, 3'b100, 19, 19, 21);
      r_op(7'h00, 3'b111, 21, lo[1], lo[2]); r_op(7'h00, 3'b100, 19, 19, 21);
      r_op(7'h00, 3'b111, 20, hi[0], hi[1]); r_op(7'h00, 3'b111, 21, hi[0], hi[2]); r_op(7'h00, 3'b100, 20, 20, 21);
      r_op(7'h00, 3'b111, 21, hi[1], hi[2]); r_op(7'h00, 3'b100, 20, 20, 21);
      add64(lo[7], hi[7], 19, 20);                          // T1 + T2
      for (int i = 0; i < 8; i++) begin nlo[i] = lo[(i + 7) % 8]; nhi[i] = hi[(i + 7) % 8]; end
      lo = nlo; hi = nhi;
    end
    for (int i = 0; i < 8; i++) begin
      ld64(i, 26); add64(17, 18, lo[i], hi[i]);
      sw(17, 8 * i, 26); sw(18, 8 * i + 4, 26);
    end
    end_pc = 32'(prog.size() * 4);
    prog.push_back(enc_j(0, 0));
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && retire) begin
      n_retired++;
      if (retire_pc == end_pc && !finished) begin finished = 1; t_end = cyc; end
    end
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [63:0] mem64(input logic [31:0] addr);
    return {u_mem.mem[(addr >> 2) + 1], u_mem.mem[addr >> 2]};
  endfunction

  initial begin
    logic [63:0] fips [8] = '{64'hDDAF35A193617ABA, 64'hCC417349AE204131, 64'h12E6FA4E89A97EA2,
                              64'h0A9EEEE64B55D39A, 64'h2192992A274FC1A8, 64'h36BA3C23A3FEEBBD,
                              64'h454D4423643CE80E, 64'h2A9AC94FA54CA49F};
    logic [63:0] dig [8];
    make_constants();
    check("K[0]", K[0], 64'h428A2F98D728AE22);
    check("K[79]", K[79], 64'h6C44198C4A475817);
    check("H0[0]", H0[0], 64'h6A09E667F3BCC908);
    check("H0[7]", H0[7], 64'h5BE0CD19137E2179);
    foreach (blk[i]) blk[i] = '0;
    blk[0] = 64'h6162_6380_0000_0000;   // "abc" followed by the padding bit
    blk[15] = 64'd24;                   // message length in bits
    ref_sha512(dig);
    build();
    checks++;
    if (prog.size() * 4 > int'(W_BASE)) begin
      failures++;
      $display("program of %0d words overlaps the data", prog.size());
    end
    for (int i = 0; i < MEM_WORDS; i++) u_mem.mem[i] = '0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];
    for (int i = 0; i < 16; i++) {u_mem.mem[(W_BASE >> 2) + 2 * i + 1], u_mem.mem[(W_BASE >> 2) + 2 * i]} = blk[i];
    for (int i = 0; i < 80; i++) {u_mem.mem[(K_BASE >> 2) + 2 * i + 1], u_mem.mem[(K_BASE >> 2) + 2 * i]} = K[i];
    for (int i = 0; i < 8; i++) {u_mem.mem[(H_BASE >> 2) + 2 * i + 1], u_mem.mem[(H_BASE >> 2) + 2 * i]} = H0[i];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t_start = cyc;
    wait (finished);
    repeat (10) @(posedge clk);
    for (int t = 16; t < 80; t++) check($sformatf("schedule W[%0d]", t), mem64(W_BASE + 8 * t), w[t]);
    for (int i = 0; i < 8; i++) begin
      check($sformatf("digest word %0d (model)", i), mem64(H_BASE + 8 * i), dig[i]);
      check($sformatf("digest word %0d (FIPS 180-4)", i), mem64(H_BASE + 8 * i), fips[i]);
    end
    $display("SHA-512 block: %0d instructions, %0d cycles", n_retired, t_end - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd100_000_000);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
