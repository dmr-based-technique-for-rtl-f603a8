// tb_iso_map: checks iso_map against delta rebuilt from beta = 0x5f for all 256 inputs,
// and checks that it is a field isomorphism on a sample of products.
module tb_iso_map;
  import tb_ref_pkg::*;
  logic [7:0] x, y, x2, y2;
  int checks = 0, failures = 0;
  iso_map dut  (.x(x),  .y(y));
  iso_map dut2 (.x(x2), .y(y2));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      x = 8'(i); #1;
      checks++;
      if (y !== delta(x)) begin failures++; $display("x=%h got %h exp %h", x, y, delta(x)); end
    end
    // delta(a*b) = delta(a) * delta(b) in the composite field
    for (int i = 0; i < 200; i++) begin
      logic [7:0] a, b, ya, yb;
      a = 8'($urandom); b = 8'($urandom);
      x = a; x2 = b; #1; ya = y; yb = y2;
      x = aes_mul(a, b); #1;
      checks++;
      if (y !== r8_mul(ya, yb)) begin failures++; $display("hom a=%h b=%h", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
