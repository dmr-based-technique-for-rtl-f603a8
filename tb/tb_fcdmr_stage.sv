// tb_fcdmr_stage: one FC-DMR stage (STAGE = 5, delta^-1 + affine) in a closed loop: the
// testbench plays the previous stage's voters (it holds its word while Err is active) and the
// control unit (err_n = ~err). Transient faults of 1..6 cycles are injected into either
// replica. Checks: every word appears exactly once and in order on both voter outputs, equal
// to the S-box affine/inverse-mapping reference; the number of stalled cycles equals the
// number of faulty cycles; without faults one word passes per cycle.
module tb_fcdmr_stage;
  import hfs_pkg::*;
  import tb_ref_pkg::*;
  logic   clk = 0, rst_n = 0, err, err_n;
  stage_t v_i, fi1, fi2, v1_o, v2_o;
  int checks = 0, failures = 0, stalls = 0, fault_cycles = 0, fault_events = 0;
  logic [7:0] exp_q [$];

  fcdmr_stage #(.STAGE(5)) dut (.clk, .rst_n, .v1_i(v_i), .v2_i(v_i), .err_n, .fi1, .fi2,
                               .err, .v1_o, .v2_o);

  always #5 clk = ~clk;
  always_comb err_n = ~err;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fault_left, sent, got;
    logic [7:0] w;
    v_i = '0; fi1 = '0; fi2 = '0; fault_left = 0; sent = 0; got = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (got < 600) begin
      @(negedge clk);
      // output side: a new word is presented whenever Err is inactive
      if (err_n && v1_o.valid) begin
        checks++;
        if (exp_q.size() == 0 || v1_o.d[7:0] !== exp_q[0] || v2_o !== v1_o || v1_o.d[15:8] !== 8'h00) begin
          failures++; $display("out %h exp %h", v1_o.d, exp_q.size() != 0 ? exp_q[0] : 8'h00);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
        got++;
      end
      if (!err_n) stalls++;
      // input side: advance only if the previous word was taken (Err inactive)
      if (err_n && sent < 600) begin
        w = 8'($urandom);
        v_i.valid = 1'b1;
        v_i.d     = {8'h00, w};
        exp_q.push_back(aes_affine(delta_inv(w)));
        sent++;
      end else if (err_n) v_i.valid = 1'b0;
      // fault injection
      fi1 = '0; fi2 = '0;
      if (fault_left == 0 && sent > 10 && sent < 580 && $urandom_range(0, 19) == 0) begin
        fault_left = $urandom_range(1, 6); fault_events++;
      end
      if (fault_left > 0) begin
        if (fault_events % 2 == 1) fi1 = STAGE_W'(1) << $urandom_range(0, 7);
        else                  fi2 = STAGE_W'(1) << $urandom_range(0, 7);
        fault_left--; fault_cycles++;
      end
    end
    // every faulty cycle costs exactly one stalled cycle
    checks++;
    if (stalls != fault_cycles) begin failures++; $display("stalls %0d faults %0d", stalls, fault_cycles); end
    checks++;
    if (fault_events == 0) failures++;
    $display("stage: %0d faults, %0d faulty cycles, %0d stalls", fault_events, fault_cycles, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
