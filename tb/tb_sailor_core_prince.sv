// tb_sailor_core_prince: the PRINCE S-box layer computed by permutation
// instructions on the SAILOR core.
//
// A looped program, assembled here from the reference package's encoders,
// runs the 4-bit PRINCE S-box over 32 words (256 nibbles) of random data with
// the Zbkx instruction xperm4, and then runs the inverse S-box over the
// result. A 16-entry nibble table does not fit one 32-bit register, so each
// word takes two lookups: xperm4 with the table's first eight entries on the
// indices as they are, and xperm4 with the last eight entries on the indices
// XOR 0x88888888; out-of-range indices give 0, so the two results are ORed.
// The loop counter and a bne close each loop, so taken and not-taken
// branches, loads and stores are part of the workload.
//
// The core runs at its default parameters against a memory that answers
// every request in one cycle, so the reported cycle count is the core's own.
// The S-box output is checked against the PRINCE S-box applied in this file,
// and the inverse pass must give back the input.
module tb_sailor_core_prince;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic irq_ext = 1'b0, irq_timer = 1'b0, irq_soft = 1'b0, retire;
  logic [31:0] retire_pc;
  mem_req_t ireq, dreq;
  mem_rsp_t irsp, drsp;
  logic [31:0] prog [$];
  logic [31:0] end_pc, fwd_pc;
  int unsigned cyc = 0, t_start = 0, t_fwd = 0, t_end = 0, n_retired = 0, n_fwd = 0;
  bit finished = 0;

  localparam int WORDS = 32;
  localparam logic [31:0] IN_BASE = 32'h2000, SB_BASE = 32'h2100, INV_BASE = 32'h2200;
  localparam logic [3:0] SBOX [16] = '{4'hB, 4'hF, 4'h3, 4'h2, 4'hA, 4'hC, 4'h9, 4'h1,
                                        4'h6, 4'h7, 4'h8, 4'h0, 4'hE, 4'h5, 4'hD, 4'h4};
  logic [3:0] inv [16];

  always #5 clk = ~clk;

  sailor_mem_model #(.WORDS(4096), .MAX_LAT(1), .STALL(1'b0)) u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);
  sailor_core dut (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp, .irq_ext, .irq_timer, .irq_soft, .retire, .retire_pc);

  function automatic logic [31:0] sub_word(input logic [31:0] x, input bit inverse);
    logic [31:0] y;
    for (int i = 0; i < 8; i++) y[4*i +: 4] = inverse ? inv[x[4*i +: 4]] : SBOX[x[4*i +: 4]];
    return y;
  endfunction

  // half h (0: entries 0-7, 1: entries 8-15) of a nibble table as a word
  function automatic logic [31:0] table_word(input bit inverse, input int h);
    logic [31:0] t;
    for (int i = 0; i < 8; i++) t[4*i +: 4] = inverse ? inv[8*h + i] : SBOX[8*h + i];
    return t;
  endfunction

  // ---------------------------------------------------------------- assembler
  localparam logic [6:0] LUI = 7'b0110111;
  function automatic void li(input int rd, input logic [31:0] v);
    prog.push_back(enc_u(v + 32'h800, rd, LUI));
    prog.push_back(enc_i(int'({{20{v[11]}}, v[11:0]}), rd, 3'b000, rd, OPI));
  endfunction
  function automatic void addi(input int rd, input int rs, input int imm);
    prog.push_back(enc_i(imm, rs, 3'b000, rd, OPI));
  endfunction
  function automatic void alu(input logic [6:0] f7, input logic [2:0] f3,
                              input int rd, input int a, input int b);
    prog.push_back(enc_r(f7, b, a, f3, rd, OP));
  endfunction

  // one pass over WORDS words from src to dst with the given table
  function automatic void sbox_loop(input logic [31:0] src, input logic [31:0] dst, input bit inverse);
    int top;
    li(20, table_word(inverse, 0)); li(21, table_word(inverse, 1));
    li(15, src); li(16, dst); addi(17, 0, WORDS);
    top = prog.size();
    prog.push_back(enc_i(0, 15, 3'b010, 1, LD));   // lw   x1, 0(x15)
    alu(7'b0010100, 3'b010, 2, 20, 1);             // xperm4 x2, x20, x1
    alu(7'b0000000, 3'b100, 3, 1, 22);             // xor  x3, x1, x22
    alu(7'b0010100, 3'b010, 3, 21, 3);             // xperm4 x3, x21, x3
    alu(7'b0000000, 3'b110, 2, 2, 3);              // or   x2, x2, x3
    prog.push_back(enc_s(0, 2, 16, 3'b010));       // sw   x2, 0(x16)
    addi(15, 15, 4); addi(16, 16, 4); addi(17, 17, -1);
    prog.push_back(enc_b(4 * (top - int'(prog.size())), 0, 17, 3'b001));  // bne x17, x0, top
  endfunction

  function automatic void build();
    li(22, 32'h8888_8888);
    sbox_loop(IN_BASE, SB_BASE, 1'b0);
    fwd_pc = 32'(prog.size() * 4 - 4);
    sbox_loop(SB_BASE, INV_BASE, 1'b1);
    end_pc = 32'(prog.size() * 4);
    prog.push_back(enc_j(0, 0));
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && retire) begin
      n_retired++;
      if (retire_pc == fwd_pc) begin n_fwd = n_retired; t_fwd = cyc; end
      if (retire_pc == end_pc && !finished) begin finished = 1; t_end = cyc; end
    end
  end

  initial begin
    logic [31:0] data [WORDS];
    foreach (SBOX[i]) inv[SBOX[i]] = 4'(i);
    foreach (data[i]) data[i] = $urandom;
    data[0] = 32'h7654_3210;
    data[1] = 32'hFEDC_BA98;
    build();
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = '0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];
    foreach (data[i]) u_mem.mem[(IN_BASE >> 2) + i] = data[i];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t_start = cyc;
    wait (finished);
    repeat (10) @(posedge clk);
    for (int i = 0; i < WORDS; i++) begin
      checks += 2;
      if (u_mem.mem[(SB_BASE >> 2) + i] !== sub_word(data[i], 1'b0)) begin
        failures++;
        $display("MISMATCH S-box word %0d: got %h expected %h", i, u_mem.mem[(SB_BASE >> 2) + i],
                 sub_word(data[i], 1'b0));
      end
      if (u_mem.mem[(INV_BASE >> 2) + i] !== data[i]) begin
        failures++;
        $display("MISMATCH inverse S-box word %0d: got %h expected %h", i, u_mem.mem[(INV_BASE >> 2) + i], data[i]);
      end
    end
    $display("PRINCE S-box layer, %0d words: %0d instructions, %0d cycles", WORDS, n_fwd, t_fwd - t_start);
    $display("PRINCE inverse S-box layer, %0d words: %0d instructions, %0d cycles", WORDS,
             n_retired - n_fwd, t_end - t_fwd);
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
