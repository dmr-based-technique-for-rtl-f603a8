// hfs_input_stage: the input register stage of the HFS-box (register stage 0).
//
// The input byte is captured into a DMR register pair with two voters, exactly like the
// other register stages, and compared by its own detection unit. While Err is active the
// whole pipeline holds and recomputes, so the input stage must re-load the byte it loaded
// last instead of taking a new one. A single replay register keeps the last accepted input
// for that purpose, and in_ready = err_n tells the source whether the byte offered in this
// cycle is taken (valid/ready handshake: a byte moves when in_valid and in_ready are both
// high at a rising edge; with in_valid low a bubble enters the pipeline). The replay
// register and the handshake are this design's choice; the paper only shows a register line
// at the S-box input.
//
// fi1/fi2: fault-injection XOR masks on the two register inputs (test hook, tie to 0).
module hfs_input_stage
  import hfs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_data,
  output logic       in_ready,
  input  logic       err_n,
  input  stage_t     fi1,
  input  stage_t     fi2,
  output logic       err,
  output stage_t     v1_o,
  output stage_t     v2_o
);
  stage_t in_word, replay, d, q1, q2;

  always_comb begin
    in_word.valid = in_valid;
    in_word.d     = s0_t'{pad: '0, x: in_data};
    d             = err_n ? in_word : replay;
    in_ready      = err_n;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     replay <= '0;
    else if (err_n) replay <= in_word;

  fcdmr_reg_stage #(.WIDTH(STAGE_W)) u_reg (
    .clk, .rst_n,
    .d1(d ^ fi1), .d2(d ^ fi2),
    .err_n,
    .q1, .q2, .v1(v1_o), .v2(v2_o)
  );

  dmr_cmp #(.WIDTH(STAGE_W)) u_du (.q1, .q2, .err);
endmodule
