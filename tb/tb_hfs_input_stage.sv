// tb_hfs_input_stage: the input register stage with a valid/ready source that inserts random
// bubbles and obeys in_ready, the control unit modelled as err_n = ~err, and transient faults
// of 1..5 cycles injected into either replica. Checks: every accepted byte appears exactly
// once, in order, on both voter outputs; in_ready follows Err; stalls equal faulty cycles.
module tb_hfs_input_stage;
  import hfs_pkg::*;
  logic   clk = 0, rst_n = 0, in_valid, in_ready, err, err_n;
  logic [7:0] in_data;
  stage_t fi1, fi2, v1_o, v2_o;
  int checks = 0, failures = 0, stalls = 0, fault_cycles = 0, fault_events = 0, got = 0;
  logic [7:0] exp_q [$];

  hfs_input_stage dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .err_n, .fi1, .fi2,
                       .err, .v1_o, .v2_o);

  always #5 clk = ~clk;
  always_comb err_n = ~err;
  logic took = 1'b0;   // the byte on offer was taken at the last rising edge

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard: accepted bytes at the rising edge, results while Err is inactive
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) exp_q.push_back(in_data);
    took = in_valid && in_ready;
    if (!err_n) stalls++;
    checks++;
    if (in_ready !== err_n) failures++;
    if (err_n && v1_o.valid) begin
      checks++;
      if (exp_q.size() == 0 || v1_o.d !== {8'h00, exp_q[0]} || v2_o !== v1_o) begin
        failures++; $display("out %h", v1_o.d);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      got++;
    end
  end

  initial begin
    int fault_left;
    in_valid = 0; in_data = '0; fi1 = '0; fi2 = '0; fault_left = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (got < 500) begin
      @(negedge clk);
      // a byte may change only after it was taken (or was not offered)
      if (!in_valid || took) begin
        in_valid = ($urandom_range(0, 4) != 0);
        in_data  = 8'($urandom);
      end
      fi1 = '0; fi2 = '0;
      if (fault_left == 0 && got < 450 && $urandom_range(0, 14) == 0) begin
        fault_left = $urandom_range(1, 5); fault_events++;
      end
      if (fault_left > 0) begin
        if (fault_events % 2 == 1) fi1 = STAGE_W'(1) << $urandom_range(0, 8);
        else                  fi2 = STAGE_W'(1) << $urandom_range(0, 8);
        fault_left--; fault_cycles++;
      end
    end
    @(negedge clk);
    checks++;
    if (stalls != fault_cycles || fault_events == 0) begin
      failures++; $display("stalls %0d faulty cycles %0d", stalls, fault_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
