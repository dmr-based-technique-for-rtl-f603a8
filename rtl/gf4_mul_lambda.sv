// gf4_mul_lambda: multiplication by the constant LAMBDA = {1100} in GF((2^2)^2)
// (the "x lambda" block of the S-box). Combinational XOR network; LAMBDA is this design's
// choice of the constant term of z^2 + z + lambda.
module gf4_mul_lambda (
  input  logic [3:0] a,
  output logic [3:0] q
);
  always_comb q = {a[2] ^ a[0], a[3] ^ a[2] ^ a[1] ^ a[0], a[3], a[2]};
endmodule
