// tb_sailor_fetch: check of the fetch unit and its one-entry buffer.
//
// The unit fetches from the behavioural memory (random wait states) whose
// word at address a holds a tag derived from a. The testbench consumes the
// buffered instruction at random times and sometimes redirects (as a taken
// branch would), also while a fetch is in flight. Checks: the buffered word
// always belongs to the buffered pc; consumed pcs follow each other by 4
// except after a redirect, where the next consumed pc is exactly the target
// (a response fetched for the old path must be dropped, and this must have
// happened at least once); the request stays stable until accepted (an
// assertion in the unit); and with a memory that answers in one cycle the
// next sequential instruction is requested right after the consuming cycle,
// without waiting for the consumed instruction to finish (prediction of the
// fall-through path), so it is buffered a fixed two cycles later.
module tb_sailor_fetch;
  import sailor_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  mem_req_t    ireq, dreq;
  mem_rsp_t    irsp, drsp;
  logic        ibuf_valid, consume, redirect, drop_event;
  logic [31:0] ibuf_instr, ibuf_pc, redirect_pc;
  logic        fast;
  mem_rsp_t    rsp_slow, rsp_fast;
  mem_req_t    ireq_fast;
  logic [31:0] fast_data;
  logic        fast_pend;
  int          drops = 0, redirects = 0;

  always #5 clk = ~clk;

  function automatic logic [31:0] tag(input logic [31:0] a);
    return (a * 32'h9E37_79B9) ^ 32'h5A5A_0000;
  endfunction

  sailor_mem_model #(.WORDS(256)) u_mem (.clk, .rst_n, .ireq, .irsp(rsp_slow), .dreq, .drsp);

  // one-cycle memory used in the second phase
  always_ff @(posedge clk) begin
    fast_pend <= rst_n && ireq.valid;
    fast_data <= tag({22'd0, ireq.addr[9:2], 2'b00});
  end
  always_comb begin
    rsp_fast = '0;
    rsp_fast.ready = 1'b1;
    rsp_fast.rvalid = fast_pend;
    rsp_fast.rdata = fast_data;
    irsp = fast ? rsp_fast : rsp_slow;
  end

  sailor_fetch dut (.clk, .rst_n, .ireq, .irsp, .ibuf_valid, .ibuf_instr, .ibuf_pc, .consume,
                    .redirect, .redirect_pc, .drop_event);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  always @(posedge clk) if (rst_n && drop_event) drops++;

  initial begin
    logic [31:0] expect_pc;
    dreq = '0; consume = 0; redirect = 0; redirect_pc = 0; fast = 0;
    for (int i = 0; i < 256; i++) u_mem.mem[i] = tag(32'(i * 4));
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    expect_pc = 32'h0;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      consume = 0; redirect = 0;
      if (ibuf_valid) check("word matches pc", ibuf_instr, tag({22'd0, ibuf_pc[9:2], 2'b00}));
      if (ibuf_valid && ($urandom % 3 != 0)) begin
        check("consumed pc", ibuf_pc, expect_pc);
        consume = 1;
        expect_pc = ibuf_pc + 4;
      end
      if ($urandom % 9 == 0) begin
        // redirect in the write-back cycle of a consumed instruction or on its own
        redirect = 1; redirect_pc = ($urandom % 200) * 4; expect_pc = redirect_pc; redirects++;
        consume = 0;
      end
      @(posedge clk); #1;
    end
    checks++;
    if (drops == 0) begin failures++; $display("no stale fetch was dropped"); end
    // back-to-back delivery with a one-cycle memory: after a consume the next
    // instruction is buffered three cycles after the consuming cycle: the
    // request goes out in the next cycle, the word returns one cycle later
    @(negedge clk); consume = 0; redirect = 0; fast = 1;
    repeat (4) @(negedge clk);
    for (int c = 0; c < 50; c++) begin
      int wait_c;
      wait_c = 0;
      while (!ibuf_valid) begin @(negedge clk); wait_c++; end
      if (c > 0) check("refill cycles", 32'(wait_c), 32'd2);
      consume = 1; @(negedge clk); consume = 0;
    end
    $display("redirects=%0d dropped=%0d", redirects, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
