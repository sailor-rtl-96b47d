// tb_sailor_aes_sbox: exhaustive check of the forward and inverse AES S-box.
//
// All 256 inputs are applied in both directions and compared with tables the
// reference package builds independently (by the generator-walk method, not
// by field inversion), plus the FIPS-197 anchor values S(00)=63, S(53)=ED.
// The block is combinational: each result is sampled 1 ns after the input.
module tb_sailor_aes_sbox;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic       dec;
  logic [7:0] x, y;

  sailor_aes_sbox dut (.dec, .x, .y);

  task automatic check(input string what, input logic [7:0] got, input logic [7:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("MISMATCH %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    build_tables();
    for (int d = 0; d < 2; d++)
      for (int i = 0; i < 256; i++) begin
        dec = d[0]; x = 8'(i); #1;
        check($sformatf("%s(%02h)", d ? "isbox" : "sbox", i), y, d ? isbox_t[i] : sbox_t[i]);
      end
    dec = 1'b0; x = 8'h00; #1; check("S(00)", y, 8'h63);
    x = 8'h53; #1; check("S(53)", y, 8'hED);
    dec = 1'b1; x = 8'hED; #1; check("Si(ED)", y, 8'h53);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
