// dmr_voter: the FC-DMR voter, one per replica in every register stage.
//
// Per bit it behaves like a Muller C-element gated by Err: when Err is inactive (err_n = 1)
// and both replicas agree the output takes their value; when they differ, or when the control
// unit signals a fault anywhere (err_n = 0), the output holds its previous value. The paper
// builds this from a flip-flop with D tied high, clocked by (delayed A & B & ERR) and reset by
// (~(A | B) & ERR), plus a delay element for asynchronous timing. Here the same function is
// written synchronously: the output is combinational from a, b and err_n, and a register
// keeps the last output for the hold case, so a new agreed value is visible in the same
// cycle and a held value persists for as long as needed. The delay element has no role in a
// synchronous design and is left out.
//
// Timing: c is combinational from a/b/err_n; hold updates on the rising clock edge.
// Reset (asynchronous, active low) clears the held value to 0.
module dmr_voter #(
  parameter int unsigned WIDTH = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             err_n,
  output logic [WIDTH-1:0] c
);
  logic [WIDTH-1:0] hold;

  always_comb c = err_n ? ((a & b) | (hold & (a | b))) : hold;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) hold <= '0;
    else        hold <= c;
endmodule
