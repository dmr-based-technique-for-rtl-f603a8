// gf4_sq: squaring in GF((2^2)^2) (the "X^2" block of the S-box).
//
// For a = {ah, al} with y^2 = y + PHI: a^2 = ah^2 y + (al^2 + ah^2 PHI). With PHI = {10}
// this reduces to four XOR equations. Combinational. The block and its place in the S-box
// follow the paper; the closed form is derived here for this design's choice of PHI.
module gf4_sq (
  input  logic [3:0] a,
  output logic [3:0] q
);
  always_comb q = {a[3], a[3] ^ a[2], a[2] ^ a[1], a[3] ^ a[1] ^ a[0]};
endmodule
