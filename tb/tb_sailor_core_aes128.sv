// tb_sailor_core_aes128: AES-128 block encryption and decryption on the
// SAILOR core.
//
// A straight-line program, assembled here from the reference package's
// encoders, expands the FIPS-197 example key on the fly, keeps each round
// key in memory and encrypts one block with the Zkne instructions
// (aes32esmi for rounds 1-9, aes32esi for the last round and for SubWord in
// the key schedule), then stores the ciphertext. It then decrypts the
// ciphertext with the Zknd instructions in the equivalent inverse cipher:
// each middle-round key is turned into InvMixColumns(key) by aes32esi
// (SubWord) followed by aes32dsmi, and the rounds use aes32dsmi and, for
// the last one, aes32dsi. The core runs at its default parameters against a
// memory that answers every request in one cycle, so the reported cycle
// counts are the core's own. Checks the ciphertext against the FIPS-197
// Appendix C.1 value 69c4e0d8 6a7b0430 d8cdb780 70b4c55a and the decrypted
// block against the plaintext 00112233 ... ccddeeff.
module tb_sailor_core_aes128;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic irq_ext = 1'b0, irq_timer = 1'b0, irq_soft = 1'b0, retire;
  logic [31:0] retire_pc;
  mem_req_t ireq, dreq;
  mem_rsp_t irsp, drsp;
  logic [31:0] prog [$];
  logic [31:0] end_pc, enc_pc;
  localparam int RK_OFS = 12'h100;   // round keys 0-10, 16 bytes each, at 0x2100
  int unsigned cyc = 0, t_start = 0, t_enc = 0, t_end = 0, n_retired = 0, n_enc = 0;
  bit finished = 0;

  always #5 clk = ~clk;

  sailor_mem_model #(.WORDS(4096), .MAX_LAT(1), .STALL(1'b0)) u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);
  sailor_core dut (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp, .irq_ext, .irq_timer, .irq_soft, .retire, .retire_pc);

  localparam logic [6:0] LUI = 7'b0110111;
  function automatic void li(input int rd, input logic [31:0] v);
    prog.push_back(enc_u(v + 32'h800, rd, LUI));
    prog.push_back(enc_i(int'({{20{v[11]}}, v[11:0]}), rd, 3'b000, rd, OPI));
  endfunction
  function automatic void xor_(input int rd, input int a, input int b);
    prog.push_back(enc_r(7'h00, b, a, 3'b100, rd, OP));
  endfunction
  function automatic void mv(input int rd, input int rs);
    prog.push_back(enc_i(0, rs, 3'b000, rd, OPI));
  endfunction
  // rd = rd ^ aes(rs2 byte bs); middle selects aes32esmi, otherwise aes32esi
  function automatic void aes(input int rd, input int rs2, input int bs, input bit middle);
    prog.push_back(enc_r({2'(bs), middle ? 5'b10011 : 5'b10001}, rs2, rd, 3'b000, rd, OP));
  endfunction
  // the same for decryption: aes32dsmi or aes32dsi
  function automatic void aesd(input int rd, input int rs2, input int bs, input bit middle);
    prog.push_back(enc_r({2'(bs), middle ? 5'b10111 : 5'b10101}, rs2, rd, 3'b000, rd, OP));
  endfunction
  function automatic void lw(input int rd, input int off, input int base);
    prog.push_back(enc_i(off, base, 3'b010, rd, LD));
  endfunction
  function automatic void sw(input int rs, input int off, input int base);
    prog.push_back(enc_s(off, rs, base, 3'b010));
  endfunction

  // registers: x1-x4 state, x5-x8 round key, x9 temp, x10-x13 new state, x14 rcon, x15 result pointer
  function automatic void build();
    const logic [7:0] RCON [10] = '{8'h01, 8'h02, 8'h04, 8'h08, 8'h10, 8'h20, 8'h40, 8'h80, 8'h1b, 8'h36};
    li(1, 32'h3322_1100); li(2, 32'h7766_5544); li(3, 32'hBBAA_9988); li(4, 32'hFFEE_DDCC);
    li(5, 32'h0302_0100); li(6, 32'h0706_0504); li(7, 32'h0B0A_0908); li(8, 32'h0F0E_0D0C);
    li(15, 32'h0000_2000);
    for (int i = 0; i < 4; i++) xor_(1 + i, 1 + i, 5 + i);
    for (int i = 0; i < 4; i++) sw(5 + i, RK_OFS + 4 * i, 15);
    for (int r = 0; r < 10; r++) begin
      // next round key: SubWord(RotWord(w3)) ^ rcon
      prog.push_back(enc_i(12'h600 | 8, 8, 3'b101, 9, OPI));   // rori x9, x8, 8
      li(14, {24'd0, RCON[r]});
      for (int bs = 0; bs < 4; bs++) aes(14, 9, bs, 1'b0);
      xor_(5, 5, 14); xor_(6, 6, 5); xor_(7, 7, 6); xor_(8, 8, 7);
      for (int i = 0; i < 4; i++) sw(5 + i, RK_OFS + 16 * (r + 1) + 4 * i, 15);
      // round: column c takes byte bs of state word (c + bs) mod 4
      for (int c = 0; c < 4; c++) begin
        mv(10 + c, 5 + c);
        for (int bs = 0; bs < 4; bs++) aes(10 + c, 1 + (c + bs) % 4, bs, r != 9);
      end
      for (int c = 0; c < 4; c++) mv(1 + c, 10 + c);
    end
    for (int i = 0; i < 4; i++) sw(1 + i, 4 * i, 15);
    enc_pc = 32'(prog.size() * 4 - 4);
    // decryption (equivalent inverse cipher): the state still holds the
    // ciphertext and x5-x8 the last round key. Middle rounds use
    // InvMixColumns(round key), computed as aes32dsmi over SubWord(key).
    for (int i = 0; i < 4; i++) xor_(1 + i, 1 + i, 5 + i);
    for (int r = 9; r >= 0; r--) begin
      for (int c = 0; c < 4; c++) begin
        lw(5 + c, RK_OFS + 16 * r + 4 * c, 15);
        if (r != 0) begin
          mv(9, 0);
          for (int bs = 0; bs < 4; bs++) aes(9, 5 + c, bs, 1'b0);
          mv(5 + c, 0);
          for (int bs = 0; bs < 4; bs++) aesd(5 + c, 9, bs, 1'b1);
        end
      end
      // column c takes byte bs of state word (c - bs) mod 4
      for (int c = 0; c < 4; c++) begin
        mv(10 + c, 5 + c);
        for (int bs = 0; bs < 4; bs++) aesd(10 + c, 1 + (c + 4 - bs) % 4, bs, r != 0);
      end
      for (int c = 0; c < 4; c++) mv(1 + c, 10 + c);
    end
    for (int i = 0; i < 4; i++) sw(1 + i, 16 + 4 * i, 15);
    end_pc = 32'(prog.size() * 4);
    prog.push_back(enc_j(0, 0));
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && retire) begin
      n_retired++;
      if (retire_pc == enc_pc && n_enc == 0) begin n_enc = n_retired; t_enc = cyc; end
      if (retire_pc == end_pc && !finished) begin finished = 1; t_end = cyc; end
    end
  end

  initial begin
    logic [31:0] exp [4] = '{32'hD8E0_C469, 32'h3004_7B6A, 32'h80B7_CDD8, 32'h5AC5_B470};
    build();
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = '0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t_start = cyc;
    wait (finished);
    repeat (10) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (u_mem.mem[(32'h2000 >> 2) + i] !== exp[i]) begin
        failures++;
        $display("MISMATCH ciphertext word %0d: got %h expected %h", i, u_mem.mem[(32'h2000 >> 2) + i], exp[i]);
      end
    end
    for (int i = 0; i < 4; i++) begin
      logic [31:0] pt;
      pt = {8'(16 * (4 * i + 3) + 4 * i + 3), 8'(16 * (4 * i + 2) + 4 * i + 2),
            8'(16 * (4 * i + 1) + 4 * i + 1), 8'(16 * (4 * i) + 4 * i)};
      checks++;
      if (u_mem.mem[(32'h2010 >> 2) + i] !== pt) begin
        failures++;
        $display("MISMATCH decrypted word %0d: got %h expected %h", i, u_mem.mem[(32'h2010 >> 2) + i], pt);
      end
    end
    $display("AES-128 key expansion + encryption: %0d instructions, %0d cycles", n_enc, t_enc - t_start);
    $display("AES-128 decryption (round keys from memory): %0d instructions, %0d cycles",
             n_retired - n_enc, t_end - t_enc);
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
