// hfs_sbox: HFS-box, a high-throughput fault-resilient AES S-box.
//
// A composite-field AES S-box cut into NSTAGE = 5 pipeline stages, each duplicated and
// protected by fault correction in DMR (FC-DMR): every register stage holds two replicas,
// a comparator per stage flags any difference, and the control unit turns the flags into
// the global active-low Err. While Err is low every voter holds its last value, so all
// stages recompute from the last correct state; a transient fault in one replica (in logic
// or register) is flushed out when it disappears, whatever its duration, and the byte
// sequence is unchanged. The pipeline simply stalls for the fault's duration.
//
// Interface: in_valid/in_data/in_ready is a valid/ready input (a byte is taken at a rising
// edge with in_valid & in_ready); in_ready equals err_n. out_valid/out_data present one
// result per cycle with no back-pressure. Without faults the throughput is one byte per
// clock and the latency is NREG = 6 clock edges (input register plus five stage registers)
// from acceptance to out_valid. err_n is the control unit's Err. fi1/fi2 are fault
// injection masks per register stage (index 0 = input register), XORed into the register
// inputs of replica 1 / replica 2; fi_du flips the mismatch flag of a detection unit on its
// way to the control unit (a transient fault in the DU itself, seen as a false alarm). Tie
// all three to 0 outside of fault-injection tests.
//
// The stage split, the FC-DMR structure and the voter behaviour follow the paper; the input
// replay register, the handshake, the valid bit, the reset and the fault-injection hook are
// this design's own.
module hfs_sbox
  import hfs_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [7:0]          in_data,
  output logic                in_ready,
  output logic                out_valid,
  output logic [7:0]          out_data,
  output logic                err_n,
  input  stage_t [NREG-1:0]   fi1,
  input  stage_t [NREG-1:0]   fi2,
  input  logic   [NREG-1:0]   fi_du
);
  stage_t [NREG-1:0] v1, v2;
  logic   [NREG-1:0] err;
  s5_t               res;

  hfs_input_stage u_in (
    .clk, .rst_n, .in_valid, .in_data, .in_ready, .err_n,
    .fi1(fi1[0]), .fi2(fi2[0]), .err(err[0]), .v1_o(v1[0]), .v2_o(v2[0])
  );

  for (genvar i = 1; i <= NSTAGE; i++) begin : g_stage
    fcdmr_stage #(.STAGE(i)) u_stage (
      .clk, .rst_n,
      .v1_i(v1[i-1]), .v2_i(v2[i-1]), .err_n,
      .fi1(fi1[i]), .fi2(fi2[i]),
      .err(err[i]), .v1_o(v1[i]), .v2_o(v2[i])
    );
  end

  fcdmr_cu #(.N(NREG)) u_cu (.err(err ^ fi_du), .err_n);

  // Voter 1 of the last stage drives the S-box output. A held output (err_n low) was
  // already presented, so it is not marked valid again.
  always_comb begin
    res       = s5_t'(v1[NSTAGE].d);
    out_data  = res.y;
    out_valid = err_n & v1[NSTAGE].valid;
  end

  // With Err inactive all register stages agree, so both voters of the last stage agree.
  assert property (@(posedge clk) disable iff (!rst_n) err_n |-> v1[NSTAGE] == v2[NSTAGE])
    else $error("voters of the last stage disagree while Err is inactive");
endmodule
