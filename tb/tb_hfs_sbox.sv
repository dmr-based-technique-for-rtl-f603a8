// tb_hfs_sbox: end-to-end test of the HFS-box at its default configuration.
//
// A valid/ready source streams every byte value eight times (random order, random bubbles).
// Transient faults are injected into the replicas of every register stage (input register
// and stages 1..5) with durations from 1 to 8 cycles, plus one long fault of 40 cycles, and
// false alarms are injected into the detection unit of every stage. A scoreboard checks that
// each accepted byte comes out exactly once, in order, as the AES S-box value, and that the
// latency is 6 cycles plus the number of stalled cycles in between. It also checks the
// fault-free rate (one byte per cycle over a 300-byte burst), that every stall cycle
// corresponds to a faulty cycle, and that each mechanism occurred: faults in each stage and
// each replica, detection-unit faults, multi-cycle and long faults, stalls and bubbles.
module tb_hfs_sbox;
  import hfs_pkg::*;
  import tb_ref_pkg::*;

  localparam int LATENCY = NREG;   // 6 register stages between input and output
  localparam int NBYTES  = 2048;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, err_n;
  logic [7:0] in_data, out_data;
  stage_t [NREG-1:0] fi1, fi2;
  logic   [NREG-1:0] fi_du;

  hfs_sbox dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .err_n,
                .fi1, .fi2, .fi_du);

  always #5 clk = ~clk;
  logic took = 1'b0;   // the byte on offer was taken at the last rising edge

  typedef struct { logic [7:0] x; longint cyc; longint stall; } entry_t;
  entry_t q [$];
  logic [7:0] sbox_tab [256];

  int checks = 0, failures = 0;
  longint cyc = 0, stall_cycles = 0, fault_cycles = 0;
  int got = 0, bubbles = 0, run = 0, max_run = 0, multi_faults = 0, long_faults = 0;
  int stage_faults [NREG][2];
  int du_faults [NREG];

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (!err_n) stall_cycles++;
    if (in_valid && in_ready) q.push_back('{x: in_data, cyc: cyc, stall: stall_cycles});
    took = in_valid && in_ready;
    checks++;
    if (in_ready !== err_n) begin failures++; $display("in_ready != Err"); end
    if (out_valid) begin
      entry_t e;
      run++;
      if (run > max_run) max_run = run;
      checks++;
      if (q.size() == 0) begin
        failures++; $display("unexpected output %h", out_data);
      end else begin
        e = q.pop_front();
        if (out_data !== sbox_tab[e.x]) begin
          failures++; $display("x=%h got %h exp %h", e.x, out_data, sbox_tab[e.x]);
        end
        checks++;
        if ((cyc - e.cyc) - (stall_cycles - e.stall) != longint'(LATENCY)) begin
          failures++;
          $display("latency x=%h: %0d cycles, %0d stalled", e.x, cyc - e.cyc, stall_cycles - e.stall);
        end
      end
      got++;
    end else run = 0;
  end

  // fault injection on one replica of one register stage for dur cycles
  task automatic inject(int st, int rep, int dur);
    stage_t m;
    m = '0;
    m[$urandom_range(0, STAGE_W-1)] = 1'b1;
    stage_faults[st][rep]++;
    if (dur > 1) multi_faults++;
    if (dur >= 40) long_faults++;
    for (int k = 0; k < dur; k++) begin
      fi1 = '0; fi2 = '0;
      if (rep == 0) fi1[st] = m; else fi2[st] = m;
      fault_cycles++;
      @(negedge clk);
    end
    fi1 = '0; fi2 = '0;
  endtask

  // false alarm of the detection unit of stage st for dur cycles
  task automatic inject_du(int st, int dur);
    du_faults[st]++;
    for (int k = 0; k < dur; k++) begin
      fi_du = '0;
      fi_du[st] = 1'b1;
      fault_cycles++;
      @(negedge clk);
    end
    fi_du = '0;
  endtask

  initial begin
    logic [7:0] order [NBYTES];
    for (int i = 0; i < 256; i++) sbox_tab[i] = sbox(8'(i));
    for (int i = 0; i < NBYTES; i++) order[i] = 8'(i);
    order.shuffle();
    fork
      // source: phase 1 is a fault-free burst with no bubbles (rate check),
      // phase 2 adds random bubbles
      begin
        int n;
        n = 0;
        in_valid = 0; in_data = '0;
        repeat (3) @(posedge clk);
        while (n < NBYTES) begin
          @(negedge clk);
          if (!in_valid || took) begin
            if (in_valid) n++;
            if (n < NBYTES) begin
              in_valid = (n < 300) || ($urandom_range(0, 5) != 0);
              if (!in_valid) bubbles++;
              in_data  = order[n];
            end else in_valid = 0;
          end
        end
      end
      // faults: start after the fault-free burst
      begin
        fi1 = '0; fi2 = '0; fi_du = '0;
        repeat (3) @(posedge clk);
        #1 rst_n = 1;
        repeat (400) @(negedge clk);
        for (int st = 0; st < NREG; st++)
          for (int rep = 0; rep < 2; rep++) begin
            inject(st, rep, 1);
            repeat ($urandom_range(3, 20)) @(negedge clk);
            inject(st, rep, $urandom_range(2, 8));
            repeat ($urandom_range(3, 20)) @(negedge clk);
          end
        for (int st = 0; st < NREG; st++) begin
          inject_du(st, $urandom_range(1, 3));
          repeat ($urandom_range(3, 20)) @(negedge clk);
        end
        inject(3, 0, 40);
        for (int i = 0; i < 60; i++) begin
          repeat ($urandom_range(2, 30)) @(negedge clk);
          inject($urandom_range(0, NREG-1), $urandom_range(0, 1), $urandom_range(1, 8));
        end
      end
    join
    // drain
    repeat (LATENCY + 50) @(negedge clk);
    checks++;
    if (got != NBYTES || q.size() != 0) begin failures++; $display("got %0d of %0d, %0d pending", got, NBYTES, q.size()); end
    checks++;
    if (stall_cycles != fault_cycles) begin
      failures++; $display("stall cycles %0d, faulty cycles %0d", stall_cycles, fault_cycles);
    end
    // fault-free rate: the first burst must come out back to back
    checks++;
    if (max_run < 290) begin failures++; $display("longest back-to-back run %0d", max_run); end
    for (int st = 0; st < NREG; st++)
      for (int rep = 0; rep < 2; rep++) begin
        checks++;
        if (stage_faults[st][rep] == 0) begin failures++; $display("no fault in stage %0d replica %0d", st, rep); end
      end
    for (int st = 0; st < NREG; st++) begin
      checks++;
      if (du_faults[st] == 0) begin failures++; $display("no detection-unit fault in stage %0d", st); end
    end
    checks++;
    if (stall_cycles == 0 || multi_faults == 0 || long_faults == 0 || bubbles == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("bytes %0d, stall cycles %0d, faulty cycles %0d, multi-cycle faults %0d, long faults %0d, bubbles %0d, longest run %0d",
             got, stall_cycles, fault_cycles, multi_faults, long_faults, bubbles, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
