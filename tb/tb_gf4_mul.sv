// tb_gf4_mul: exhaustive check of gf4_mul over all 256 operand pairs against a schoolbook
// GF((2^2)^2) reference.
module tb_gf4_mul;
  import tb_ref_pkg::*;
  logic [3:0] a, b, q;
  int checks = 0, failures = 0;
  gf4_mul dut (.a(a), .b(b), .q(q));
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      {a, b} = 8'(i); #1;
      checks++;
      if (q !== r4_mul(a, b)) begin failures++; $display("a=%h b=%h got %h", a, b, q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
