// fcdmr_stage: one fault-correcting DMR (FC-DMR) pipeline stage of the HFS-box.
//
// Holds the original and the redundant copy of the stage logic (hfs_stage_logic #(STAGE)),
// the DMR register stage with its two voters (fcdmr_reg_stage) and the comparator of the
// detection unit (dmr_cmp). Copy 1 reads voter 1 of the previous stage, copy 2 reads voter 2,
// so the two replicas stay independent from stage to stage. err goes to the control unit,
// err_n comes back from it.
//
// fi1/fi2 are XOR masks applied to the register inputs of copy 1 / copy 2. They model a
// transient fault in the logic or register of one replica for as many cycles as the mask is
// non-zero; tie them to 0 in normal use. They are a test hook of this design, not part of the
// paper's circuit.
//
// Timing: one register stage, i.e. one cycle from v*_i to v*_o when err_n stays high.
module fcdmr_stage
  import hfs_pkg::*;
#(
  parameter int unsigned STAGE = 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  stage_t v1_i,
  input  stage_t v2_i,
  input  logic   err_n,
  input  stage_t fi1,
  input  stage_t fi2,
  output logic   err,
  output stage_t v1_o,
  output stage_t v2_o
);
  stage_t l1, l2, q1, q2;

  hfs_stage_logic #(.STAGE(STAGE)) u_logic_orig (.d_i(v1_i), .d_o(l1));
  hfs_stage_logic #(.STAGE(STAGE)) u_logic_red  (.d_i(v2_i), .d_o(l2));

  fcdmr_reg_stage #(.WIDTH(STAGE_W)) u_reg (
    .clk, .rst_n,
    .d1(l1 ^ fi1), .d2(l2 ^ fi2),
    .err_n,
    .q1, .q2, .v1(v1_o), .v2(v2_o)
  );

  dmr_cmp #(.WIDTH(STAGE_W)) u_du (.q1, .q2, .err);
endmodule
