// tb_dmr_cmp: equal words must give err = 0, words differing in any single bit (every bit
// position tried) or in random bits must give err = 1.
module tb_dmr_cmp;
  localparam int W = 17;
  logic [W-1:0] q1, q2;
  logic err;
  int checks = 0, failures = 0;
  dmr_cmp #(.WIDTH(W)) dut (.q1, .q2, .err);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 200; i++) begin
      q1 = W'($urandom); q2 = q1; #1;
      checks++; if (err !== 1'b0) failures++;
      for (int k = 0; k < W; k++) begin
        q2 = q1 ^ (W'(1) << k); #1;
        checks++; if (err !== 1'b1) begin failures++; $display("bit %0d missed", k); end
      end
      q2 = W'($urandom); #1;
      checks++; if (err !== (q1 != q2)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
