// tb_sailor_serializer2: check of the load / shift-in register.
//
// Instances with 1-, 4- and 32-bit chunks are loaded with a random word and
// then shifted N = 32/W times, each time taking a new random chunk in at the
// top. Every cycle the low chunk (the ALU operand) must be the right chunk of
// the loaded word, and after exactly N shifts the register must hold the
// chunks that were shifted in, first one in the least significant position.
module tb_sailor_serializer2;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic        load, shift;
  logic [31:0] load_val, in_word, q1, q4, q32;

  always #5 clk = ~clk;

  sailor_serializer2 #(.SERIAL_WIDTH(1))  u1  (.clk, .rst_n, .load, .load_val, .shift, .shift_in(in_word[0]), .data_o(q1));
  sailor_serializer2 #(.SERIAL_WIDTH(4))  u4  (.clk, .rst_n, .load, .load_val, .shift, .shift_in(in_word[3:0]), .data_o(q4));
  sailor_serializer2 #(.SERIAL_WIDTH(32)) u32 (.clk, .rst_n, .load, .load_val, .shift, .shift_in(in_word), .data_o(q32));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    load = 0; shift = 0; load_val = 0; in_word = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    check("reset", q4, 0);
    for (int v = 0; v < 100; v++) begin
      logic [31:0] w, ins;
      w = $urandom; ins = $urandom;
      @(negedge clk); load = 1; load_val = w;
      @(negedge clk); load = 0;
      check("loaded", q1, w);
      // W = 1 and W = 4 shift together, each with its own slice of `ins`
      for (int i = 0; i < 32; i++) begin
        check("W=1 operand bit", {31'd0, q1[0]}, {31'd0, w[i]});
        if (i < 8) check("W=4 operand chunk", {28'd0, q4[3:0]}, {28'd0, w[4*i +: 4]});
        shift = 1; in_word = ins ^ 32'(i);
        in_word[3:0] = ins[4*(i%8) +: 4];
        in_word[0] = (i < 8) ? ins[4*i] : ins[i];
        @(negedge clk);
        if (i == 7) begin
          check("W=4 after 8 shifts", q4, ins);
        end
        if (i == 0) check("W=32 after 1 shift", q32, in_word);
      end
      shift = 0;
      // W=1 got ins[i] for i >= 8 and ins[4i] for i < 8 in bit position i
      begin
        logic [31:0] e1;
        for (int i = 0; i < 32; i++) e1[i] = (i < 8) ? ins[4*i] : ins[i];
        check("W=1 after 32 shifts", q1, e1);
      end
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
