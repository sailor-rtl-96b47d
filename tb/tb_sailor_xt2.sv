// tb_sailor_xt2: exhaustive check of the GF(2^8) constant multiplier.
//
// For every byte and each of the six constants (2, 3, 9, B, D, E used by
// MixColumns and InvMixColumns) the product is compared with a shift-and-add
// GF(2^8) multiplication from the reference package. Combinational block,
// sampled 1 ns after each input change.
module tb_sailor_xt2;
  import sailor_pkg::*;
  import sailor_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] x, y;
  xt_sel_e    sel;
  const logic [7:0] K [6] = '{8'h02, 8'h03, 8'h09, 8'h0B, 8'h0D, 8'h0E};

  sailor_xt2 dut (.x, .sel, .y);

  initial begin
    for (int s = 0; s < 6; s++)
      for (int i = 0; i < 256; i++) begin
        sel = xt_sel_e'(s); x = 8'(i); #1;
        checks++;
        if (y !== gm(x, K[s])) begin
          failures++;
          $display("MISMATCH %02h * %02h: got %02h expected %02h", x, K[s], y, gm(x, K[s]));
        end
      end
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
