// tb_sailor_serializer1: check of the bidirectional shift register.
//
// Two instances run side by side: the default one (1-bit chunks, 1-bit
// steps) and one with 32-bit chunks, whose chunk step is 8 bits. Both get
// the same random stream of load / hold / rotate-by-chunk / step / single-bit
// commands with random direction and fill (zero, sign, rotate); every cycle
// the registered value is compared with a model. A 32-bit shift by any amount
// must also be reachable in (32/step - 1) + (step - 1) cycles or fewer, which
// is checked by shifting by a random amount the way the core does.
module tb_sailor_serializer1;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic        load, dir_left;
  logic [31:0] load_val, q1, q32, m1, m32;
  s1_cmd_e     cmd;
  fill_e       fill;

  always #5 clk = ~clk;

  sailor_serializer1 u1 (.clk, .rst_n, .load, .load_val, .cmd, .dir_left, .fill, .data_o(q1));
  sailor_serializer1 #(.SERIAL_WIDTH(32)) u32 (.clk, .rst_n, .load, .load_val, .cmd, .dir_left, .fill, .data_o(q32));

  function automatic logic [31:0] mshift(input logic [31:0] v, input int k, input bit left, input fill_e f);
    if (k == 0) return v;
    if (f == FILL_ROT) return left ? rol32(v, k) : ror32(v, k);
    if (left) return v << k;
    if (f == FILL_SIGN) return 32'($signed(v) >>> k);
    return v >> k;
  endfunction

  function automatic logic [31:0] model(input logic [31:0] v, input int w, input int step);
    if (load) return load_val;
    case (cmd)
      S1_ROTCHUNK: return ror32(v, w % 32);
      S1_STEP:     return mshift(v, step, dir_left, fill);
      S1_BIT:      return mshift(v, 1, dir_left, fill);
      default:     return v;
    endcase
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    load = 0; load_val = 0; cmd = S1_HOLD; dir_left = 0; fill = FILL_ZERO;
    m1 = 0; m32 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    check("reset", q1, 0);
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      load = ($urandom % 8) == 0; load_val = $urandom;
      cmd = s1_cmd_e'($urandom % 4); dir_left = $urandom % 2; fill = fill_e'($urandom % 3);
      m1 = model(m1, 1, 1); m32 = model(m32, 32, 8);
      @(posedge clk); #1;
      check("W=1", q1, m1); check("W=32", q32, m32);
    end
    // shift by an arbitrary amount: chunk steps, then single bits
    for (int c = 0; c < 200; c++) begin
      int amt, n;
      logic [31:0] v;
      bit left;
      fill_e f;
      @(negedge clk);
      v = $urandom; amt = $urandom % 32; left = $urandom % 2; f = fill_e'($urandom % 3);
      load = 1; load_val = v; cmd = S1_HOLD;
      @(negedge clk);
      load = 0; dir_left = left; fill = f; n = 0;
      for (int s = 0; s < amt / 8; s++) begin cmd = S1_STEP; @(negedge clk); n++; end
      for (int s = 0; s < amt % 8; s++) begin cmd = S1_BIT; @(negedge clk); n++; end
      cmd = S1_HOLD;
      check($sformatf("shift %0d by steps", amt), q32, mshift(v, amt, left, f));
      checks++;
      if (n > (32 / 8 - 1) + (8 - 1)) begin failures++; $display("shift took %0d cycles", n); end
    end
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
