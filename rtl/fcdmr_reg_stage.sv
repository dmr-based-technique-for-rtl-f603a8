// fcdmr_reg_stage: DMR register stage with its two cross-connected voters.
//
// Two pipeline registers capture the outputs of the original (d1) and the redundant (d2)
// logic on every rising edge. Voter 1 votes (register 2, register 1) and drives the original
// logic of the next stage; voter 2 votes (register 1, register 2) and drives the redundant
// logic. q1/q2 go to the stage's comparator. Registers load every cycle, also while Err is
// active: since all voters then hold, the logic recomputes the previous correct state and a
// register hit by a transient fault is overwritten with the correct value on the next edge.
// The registers reset asynchronously (active low) to 0.
module fcdmr_reg_stage #(
  parameter int unsigned WIDTH = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d1,
  input  logic [WIDTH-1:0] d2,
  input  logic             err_n,
  output logic [WIDTH-1:0] q1,
  output logic [WIDTH-1:0] q2,
  output logic [WIDTH-1:0] v1,
  output logic [WIDTH-1:0] v2
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      q1 <= '0;
      q2 <= '0;
    end else begin
      q1 <= d1;
      q2 <= d2;
    end

  dmr_voter #(.WIDTH(WIDTH)) u_voter1 (.clk, .rst_n, .a(q2), .b(q1), .err_n, .c(v1));
  dmr_voter #(.WIDTH(WIDTH)) u_voter2 (.clk, .rst_n, .a(q1), .b(q2), .err_n, .c(v2));
endmodule
