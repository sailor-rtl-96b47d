// tb_sailor_core_sha256: one SHA-256 compression on the SAILOR core.
//
// A straight-line program, assembled here from the reference package's
// encoders, hashes the one-block message "abc" with the Zknh instructions:
// it expands the message schedule W[16..63] with sha256sig0/sha256sig1,
// runs the 64 rounds with sha256sum0/sha256sum1 (Ch uses andn from Zbkb),
// adds the chaining value and stores the digest. Working variables are
// renamed in the assembler instead of being moved, as a compiler would do.
//
// Data memory holds the padded block at 0x2000 (the schedule grows there),
// the round constants K at 0x2400 and the chaining value at 0x2600. K and
// the initial hash value are generated here from their definition, the
// first 32 fraction bits of the cube and square roots of the first primes,
// and spot-checked against FIPS 180-4. The core runs at its default
// parameters against a memory that answers every request in one cycle, so
// the reported cycle count is the core's own. The digest is checked against
// a behavioural SHA-256 in this file and against the FIPS 180-4 example
// value ba7816bf ... f20015ad.
module tb_sailor_core_sha256;
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
  logic [31:0] K [64];
  logic [31:0] H0 [8];
  logic [31:0] blk [16];
  int unsigned cyc = 0, t_start = 0, t_end = 0, n_retired = 0;
  bit finished = 0;

  localparam logic [31:0] W_BASE = 32'h2000, K_BASE = 32'h2400, H_BASE = 32'h2600;

  always #5 clk = ~clk;

  sailor_mem_model #(.WORDS(4096), .MAX_LAT(1), .STALL(1'b0)) u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);
  sailor_core dut (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp, .irq_ext, .irq_timer, .irq_soft, .retire, .retire_pc);

  // ---------------------------------------------------------------- constants
  function automatic logic [31:0] frac_bits(input real r);
    real f;
    f = r - $floor(r);
    return 32'(longint'($floor(f * 4294967296.0)));
  endfunction

  function automatic void make_constants();
    int p = 2, n = 0;
    while (n < 64) begin
      bit prime = 1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) prime = 0;
      if (prime) begin
        real c;
        c = $pow(real'(p), 1.0 / 3.0);
        // one Newton step polishes the cube root to full double precision
        c = c - (c * c * c - real'(p)) / (3.0 * c * c);
        K[n] = frac_bits(c);
        if (n < 8) H0[n] = frac_bits($sqrt(real'(p)));
        n++;
      end
      p++;
    end
  endfunction

  // ---------------------------------------------------------------- reference
  function automatic logic [31:0] ror(input logic [31:0] x, input int k);
    return (x >> k) | (x << (32 - k));
  endfunction

  logic [31:0] w [64];
  function automatic void ref_sha256(output logic [31:0] dig [8]);
    logic [31:0] a, b, c, d, e, f, g, h, t1, t2;
    for (int t = 0; t < 64; t++) begin
      if (t < 16) w[t] = blk[t];
      else w[t] = (ror(w[t-2], 17) ^ ror(w[t-2], 19) ^ (w[t-2] >> 10)) + w[t-7]
                + (ror(w[t-15], 7) ^ ror(w[t-15], 18) ^ (w[t-15] >> 3)) + w[t-16];
    end
    {a, b, c, d, e, f, g, h} = {H0[0], H0[1], H0[2], H0[3], H0[4], H0[5], H0[6], H0[7]};
    for (int t = 0; t < 64; t++) begin
      t1 = h + (ror(e, 6) ^ ror(e, 11) ^ ror(e, 25)) + ((e & f) ^ (~e & g)) + K[t] + w[t];
      t2 = (ror(a, 2) ^ ror(a, 13) ^ ror(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
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
  function automatic void add(input int rd, input int a, input int b);
    prog.push_back(enc_r(7'h00, b, a, 3'b000, rd, OP));
  endfunction
  function automatic void xor_(input int rd, input int a, input int b);
    prog.push_back(enc_r(7'h00, b, a, 3'b100, rd, OP));
  endfunction
  function automatic void and_(input int rd, input int a, input int b);
    prog.push_back(enc_r(7'h00, b, a, 3'b111, rd, OP));
  endfunction
  function automatic void andn(input int rd, input int a, input int b);  // a & ~b
    prog.push_back(enc_r(7'h20, b, a, 3'b111, rd, OP));
  endfunction
  function automatic void lw(input int rd, input int off, input int base);
    prog.push_back(enc_i(off, base, 3'b010, rd, LD));
  endfunction
  function automatic void sw(input int rs, input int off, input int base);
    prog.push_back(enc_s(off, rs, base, 3'b010));
  endfunction
  // 0 sum0, 1 sum1, 2 sig0, 3 sig1
  function automatic void sha(input int rd, input int rs, input int f);
    prog.push_back(enc_i(12'h100 | f, rs, 3'b001, rd, OPI));
  endfunction

  // registers: working variables in x1-x8 (renamed every round), x9-x11
  // temporaries, x15/x16/x17 the W, K and H base addresses
  function automatic void build();
    int r [8], rn [8];
    for (int i = 0; i < 8; i++) r[i] = 1 + i;
    li(15, W_BASE); li(16, K_BASE); li(17, H_BASE);
    for (int t = 16; t < 64; t++) begin
      lw(9, 4 * (t - 2), 15);  sha(9, 9, 3);
      lw(10, 4 * (t - 7), 15); add(9, 9, 10);
      lw(10, 4 * (t - 15), 15); sha(10, 10, 2); add(9, 9, 10);
      lw(10, 4 * (t - 16), 15); add(9, 9, 10);
      sw(9, 4 * t, 15);
    end
    for (int i = 0; i < 8; i++) lw(1 + i, 4 * i, 17);
    for (int t = 0; t < 64; t++) begin
      // r = {a, b, c, d, e, f, g, h}
      lw(9, 4 * t, 15);  add(r[7], r[7], 9);
      lw(10, 4 * t, 16); add(r[7], r[7], 10);
      sha(9, r[4], 1);   add(r[7], r[7], 9);
      and_(9, r[4], r[5]); andn(10, r[6], r[4]); xor_(9, 9, 10); add(r[7], r[7], 9);  // h = T1
      add(r[3], r[3], r[7]);                                                         // d + T1
      sha(9, r[0], 0);   add(r[7], r[7], 9);
      and_(10, r[0], r[1]); and_(11, r[0], r[2]); xor_(10, 10, 11);
      and_(11, r[1], r[2]); xor_(10, 10, 11); add(r[7], r[7], 10);                   // T1 + T2
      rn = '{r[7], r[0], r[1], r[2], r[3], r[4], r[5], r[6]};
      r = rn;
    end
    for (int i = 0; i < 8; i++) begin
      lw(9, 4 * i, 17); add(9, 9, r[i]); sw(9, 4 * i, 17);
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

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] fips [8] = '{32'hBA78_16BF, 32'h8F01_CFEA, 32'h4141_40DE, 32'h5DAE_2223,
                              32'hB003_61A3, 32'h9617_7A9C, 32'hB410_FF61, 32'hF200_15AD};
    logic [31:0] dig [8];
    make_constants();
    check("K[0]", K[0], 32'h428A_2F98);
    check("K[63]", K[63], 32'hC671_78F2);
    check("H0[0]", H0[0], 32'h6A09_E667);
    check("H0[7]", H0[7], 32'h5BE0_CD19);
    foreach (blk[i]) blk[i] = '0;
    blk[0] = 32'h6162_6380;   // "abc" followed by the padding bit
    blk[15] = 32'd24;         // message length in bits
    ref_sha256(dig);
    build();
    checks++;
    if (prog.size() * 4 > int'(W_BASE)) begin
      failures++;
      $display("program of %0d words overlaps the data", prog.size());
    end
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = '0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];
    foreach (blk[i]) u_mem.mem[(W_BASE >> 2) + i] = blk[i];
    foreach (K[i]) u_mem.mem[(K_BASE >> 2) + i] = K[i];
    foreach (H0[i]) u_mem.mem[(H_BASE >> 2) + i] = H0[i];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t_start = cyc;
    wait (finished);
    repeat (10) @(posedge clk);
    for (int t = 16; t < 64; t++)
      check($sformatf("schedule W[%0d]", t), u_mem.mem[(W_BASE >> 2) + t], w[t]);
    for (int i = 0; i < 8; i++) begin
      check($sformatf("digest word %0d (model)", i), u_mem.mem[(H_BASE >> 2) + i], dig[i]);
      check($sformatf("digest word %0d (FIPS 180-4)", i), u_mem.mem[(H_BASE >> 2) + i], fips[i]);
    end
    $display("SHA-256 block: %0d instructions, %0d cycles", n_retired, t_end - t_start);
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
