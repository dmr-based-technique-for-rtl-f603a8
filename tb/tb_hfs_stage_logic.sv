// tb_hfs_stage_logic: chains the five stage-logic instances combinationally (STAGE = 1..5)
// and checks, for all 256 bytes, the stage-1 outputs against delta, the stage-3 inverse
// against a brute-force GF((2^2)^2) inverse, and the stage-5 output against the AES S-box.
// The valid bit must pass through every stage.
module tb_hfs_stage_logic;
  import hfs_pkg::*;
  import tb_ref_pkg::*;
  stage_t s0, s1, s2, s3, s4, s5;
  int checks = 0, failures = 0;

  hfs_stage_logic #(.STAGE(1)) dut1 (.d_i(s0), .d_o(s1));
  hfs_stage_logic #(.STAGE(2)) dut2 (.d_i(s1), .d_o(s2));
  hfs_stage_logic #(.STAGE(3)) dut3 (.d_i(s2), .d_o(s3));
  hfs_stage_logic #(.STAGE(4)) dut4 (.d_i(s3), .d_o(s4));
  hfs_stage_logic #(.STAGE(5)) dut5 (.d_i(s4), .d_o(s5));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      logic [7:0] x, dx, e;
      logic [3:0] xh, xl, dd;
      x = 8'(i);
      s0.valid = i[8];
      s0.d     = {8'h00, x};
      #1;
      dx = delta(x); xh = dx[7:4]; xl = dx[3:0];
      // stage 1: {pad, xh, xl, xh^xl}
      checks++;
      if (s1.d !== {4'h0, xh, xl, xh ^ xl}) begin failures++; $display("s1 x=%h %h", x, s1.d); end
      // stage 3: d^-1 with d = (xh+xl) xl + xh^2 lambda
      dd = r4_mul(xh ^ xl, xl) ^ r4_mul(r4_mul(xh, xh), 4'b1100);
      checks++;
      if (s3.d[3:0] !== r4_inv(dd)) begin failures++; $display("s3 x=%h %h", x, s3.d); end
      // stage 5: S-box
      e = sbox(x);
      checks++;
      if (s5.d !== {8'h00, e} || s5.valid !== i[8]) begin
        failures++; $display("s5 x=%h got %h exp %h", x, s5.d, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
