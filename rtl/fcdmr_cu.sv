// fcdmr_cu: control unit (CU) of the FC-DMR pipeline.
//
// Combines the per-stage mismatch flags err[i] into the general signal Err, which is active
// low: err_n drops as soon as any stage's replicas differ and stays low while they do. All
// voters hold while err_n is low. Combinational (an N-input NOR).
module fcdmr_cu #(
  parameter int unsigned N = 6
) (
  input  logic [N-1:0] err,
  output logic         err_n
);
  always_comb err_n = ~|err;
endmodule
