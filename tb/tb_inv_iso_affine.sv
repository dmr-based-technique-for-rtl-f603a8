// tb_inv_iso_affine: for every composite-field value s checks
// inv_iso_affine(s) = affine(delta^-1(s)), with delta rebuilt from beta = 0x5f and the
// affine map taken from the AES definition.
module tb_inv_iso_affine;
  import tb_ref_pkg::*;
  logic [7:0] a, y, exp_y;
  int checks = 0, failures = 0;
  inv_iso_affine dut (.a(a), .y(y));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      a = 8'(i); #1;
      exp_y = aes_affine(delta_inv(a));
      checks++;
      if (y !== exp_y) begin failures++; $display("a=%h got %h exp %h", a, y, exp_y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
