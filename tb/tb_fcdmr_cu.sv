// tb_fcdmr_cu: all 64 combinations of six stage flags; Err (err_n) must be high only when no
// stage flags a mismatch.
module tb_fcdmr_cu;
  logic [5:0] err;
  logic err_n;
  int checks = 0, failures = 0;
  fcdmr_cu #(.N(6)) dut (.err, .err_n);
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 64; i++) begin
      err = 6'(i); #1;
      checks++;
      if (err_n !== (i == 0)) begin failures++; $display("err=%b err_n=%b", err, err_n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
