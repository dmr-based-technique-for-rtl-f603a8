// tb_fcdmr_reg_stage: drives the register stage with a stream of words, occasionally corrupts
// one replica for one or more cycles and derives Err from the stage's own comparison, as the
// control unit would. Checks: the registers capture d1/d2 each cycle; both voters show the
// newest agreed word while Err is inactive and hold the last good word while it is active.
module tb_fcdmr_reg_stage;
  localparam int W = 17;
  logic clk = 0, rst_n = 0, err_n;
  logic [W-1:0] d1, d2, q1, q2, v1, v2, good, last_good;
  int checks = 0, failures = 0, stalls = 0;

  fcdmr_reg_stage #(.WIDTH(W)) dut (.clk, .rst_n, .d1, .d2, .err_n, .q1, .q2, .v1, .v2);

  always #5 clk = ~clk;
  always_comb err_n = (q1 == q2);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fault_left;
    d1 = '0; d2 = '0; last_good = '0; fault_left = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      good = W'($urandom);
      d1 = good; d2 = good;
      if (fault_left == 0 && $urandom_range(0, 9) == 0) fault_left = $urandom_range(1, 4);
      if (fault_left > 0) begin
        if ($urandom_range(0, 1) == 0) d1 = good ^ (W'(1) << $urandom_range(0, W-1));
        else                           d2 = good ^ (W'(1) << $urandom_range(0, W-1));
        fault_left--;
      end
      @(posedge clk); #1;
      checks++;
      if (q1 !== d1 || q2 !== d2) begin failures++; $display("capture"); end
      checks++;
      if (err_n) begin
        if (v1 !== good || v2 !== good) begin failures++; $display("pass %h %h %h", v1, v2, good); end
        last_good = good;
      end else begin
        stalls++;
        if (v1 !== last_good || v2 !== last_good) begin failures++; $display("hold"); end
      end
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
