// tb_sailor_lsu: check of the load/store unit and its byte buffer.
//
// The unit is connected to the behavioural memory with random wait states.
// A mix of random byte, halfword and word stores and loads (signed and
// unsigned) at random aligned addresses of a small region is run against a
// byte-array model; every load value is compared, misaligned halfword and
// word addresses must be flagged, and `done` must rise exactly one cycle
// after the memory's read-valid pulse. Finally eight AES byte pushes must
// shift through the buffer: the last four pushed bytes form the word, first
// pushed in the low byte.
module tb_sailor_lsu;
  import sailor_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic        start, we, uns, busy, done, misaligned, aes_push;
  logic [1:0]  size;
  logic [31:0] addr, wdata, load_val, buf_o;
  logic [7:0]  aes_byte;
  mem_req_t    dreq, ireq;
  mem_rsp_t    drsp, irsp;
  logic [7:0]  model [64];

  always #5 clk = ~clk;

  sailor_mem_model #(.WORDS(64)) u_mem (.clk, .rst_n, .ireq, .irsp, .dreq, .drsp);
  sailor_lsu dut (.clk, .rst_n, .start, .we, .size, .uns, .addr, .wdata, .busy, .done, .load_val,
                  .misaligned, .dreq, .drsp, .aes_push, .aes_byte, .buf_o);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  // one access; returns after done, checking done follows rvalid by one cycle
  task automatic access(input bit w, input logic [1:0] sz, input bit u, input logic [31:0] a, input logic [31:0] d);
    int rv_at, cyc;
    @(negedge clk);
    start = 1; we = w; size = sz; uns = u; addr = a; wdata = d;
    @(negedge clk);
    start = 0;
    cyc = 0; rv_at = -1;
    while (!done) begin
      if (drsp.rvalid) rv_at = cyc;
      @(negedge clk); cyc++;
    end
    check("done one cycle after rvalid", 32'(cyc - rv_at), 32'd1);
  endtask

  initial begin
    ireq = '0; start = 0; we = 0; size = 0; uns = 0; addr = 0; wdata = 0; aes_push = 0; aes_byte = 0;
    foreach (model[i]) model[i] = '0;
    for (int i = 0; i < 64; i++) u_mem.mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      logic [1:0]  sz;
      logic [31:0] a, d, exp;
      bit          w, u;
      sz = 2'($urandom % 3); w = $urandom % 2; u = $urandom % 2; d = $urandom;
      a = ($urandom % 64) & ~((32'd1 << sz) - 1);
      if (t % 40 == 0) begin
        // misaligned: flagged combinationally, no access started
        addr = a | ((sz == 2) ? 2 : 1); size = (sz == 0) ? 2'd1 : sz; #1;
        check("misaligned flag", {31'd0, misaligned}, 32'd1);
        continue;
      end
      addr = a; size = sz; #1;
      check("aligned flag", {31'd0, misaligned}, 32'd0);
      access(w, sz, u, a, d);
      if (w) begin
        for (int b = 0; b < (1 << sz); b++) model[a + b] = d[8*b +: 8];
      end else begin
        exp = {model[(a+3) % 64], model[(a+2) % 64], model[(a+1) % 64], model[a]};
        case (sz)
          2'd0: exp = u ? {24'd0, exp[7:0]} : {{24{exp[7]}}, exp[7:0]};
          2'd1: exp = u ? {16'd0, exp[15:0]} : {{16{exp[15]}}, exp[15:0]};
          default: ;
        endcase
        check($sformatf("load size %0d at %0d", sz, a), load_val, exp);
      end
    end
    // AES byte buffer
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); aes_push = 1; aes_byte = 8'(8'h10 + i);
    end
    @(negedge clk); aes_push = 0;
    check("aes buffer", buf_o, 32'h1716_1514);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
