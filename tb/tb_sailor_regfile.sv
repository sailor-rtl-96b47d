// tb_sailor_regfile: check of the 32 x 32-bit register file and its bypass.
//
// After reset every register must read 0. Then 2000 random cycles write
// random registers and read two random (often the written) addresses; the
// asynchronous read data is compared with a model that includes the
// same-cycle bypass from the write port and the hard-wired zero of x0, and
// bypass_hit must be set exactly when a read address equals the written,
// non-zero address. Writes take effect at the clock edge.
module tb_sailor_regfile;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0]  raddr1, raddr2, waddr;
  logic [31:0] rdata1, rdata2, wdata;
  logic        we, bypass_hit;
  logic [31:0] model [32];

  always #5 clk = ~clk;

  sailor_regfile dut (.clk, .rst_n, .raddr1, .rdata1, .raddr2, .rdata2, .we, .waddr, .wdata, .bypass_hit);

  function automatic logic [31:0] expect_rd(input logic [4:0] a);
    if (a == 5'd0) return 32'd0;
    if (we && waddr == a) return wdata;
    return model[a];
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr1 = 0; raddr2 = 0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 32; i++) begin raddr1 = 5'(i); #1; check("reset value", rdata1, 0); end
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      we = ($urandom % 4) != 0; waddr = 5'($urandom); wdata = $urandom;
      raddr1 = ($urandom % 2) ? waddr : 5'($urandom);
      raddr2 = ($urandom % 3 == 0) ? waddr : 5'($urandom);
      if (c % 50 == 0) begin waddr = 5'd0; raddr1 = 5'd0; end
      #1;
      check("rdata1", rdata1, expect_rd(raddr1));
      check("rdata2", rdata2, expect_rd(raddr2));
      check("bypass_hit", {31'd0, bypass_hit},
            {31'd0, we && waddr != 0 && (raddr1 == waddr || raddr2 == waddr)});
      @(posedge clk);
      if (we && waddr != 0) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
