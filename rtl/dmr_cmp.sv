// dmr_cmp: detection unit (DU) of one FC-DMR stage.
//
// Compares the two pipeline registers of the stage and raises err (active high) when any
// bit differs. Combinational; its output goes to the control unit.
module dmr_cmp #(
  parameter int unsigned WIDTH = 17
) (
  input  logic [WIDTH-1:0] q1,
  input  logic [WIDTH-1:0] q2,
  output logic             err
);
  always_comb err = |(q1 ^ q2);
endmodule
