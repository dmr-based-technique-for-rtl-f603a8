// tb_gf4_sq: exhaustive check of gf4_sq over all 16 inputs against a schoolbook
// GF((2^2)^2) reference.
module tb_gf4_sq;
  import tb_ref_pkg::*;
  logic [3:0] a, q;
  int checks = 0, failures = 0;
  gf4_sq dut (.a(a), .q(q));
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 16; i++) begin
      a = 4'(i); #1;
      checks++;
      if (q !== r4_mul(a, a)) begin failures++; $display("a=%h got %h exp %h", a, q, r4_mul(a, a)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
