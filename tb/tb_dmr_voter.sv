// tb_dmr_voter: random stimulus against a per-bit model of the voter: with Err inactive a bit
// where both replicas agree takes their value, any other bit (and every bit while Err is
// active) keeps the previous output.
module tb_dmr_voter;
  localparam int W = 8;
  logic clk = 0, rst_n = 0, err_n;
  logic [W-1:0] a, b, c, model;
  int checks = 0, failures = 0, holds = 0, passes = 0;

  dmr_voter #(.WIDTH(W)) dut (.clk, .rst_n, .a, .b, .err_n, .c);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; err_n = 1'b1; model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (c !== '0) failures++;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      a     = W'($urandom);
      b     = ($urandom_range(0, 2) == 0) ? W'($urandom) : a;
      err_n = ($urandom_range(0, 3) != 0);
      #1;
      for (int k = 0; k < W; k++)
        if (err_n && a[k] == b[k]) model[k] = a[k];
      if (err_n && a == b) passes++; else holds++;
      checks++;
      if (c !== model) begin
        failures++; $display("a=%h b=%h err_n=%b got %h exp %h", a, b, err_n, c, model);
      end
    end
    if (holds == 0 || passes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
