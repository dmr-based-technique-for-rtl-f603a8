// gf4_inv: multiplicative inverse in GF((2^2)^2) (the "X^-1" block of the S-box); 0 -> 0.
//
// Same decomposition one level down: for a = ah y + al,
//   d = PHI ah^2 + (ah + al) al   (in GF(2^2)),   d^-1 = d^2,
//   a^-1 = (ah d^-1) y + (ah + al) d^-1.
// Combinational. The paper names the block; its insides are this design's choice.
module gf4_inv
  import hfs_pkg::*;
(
  input  logic [3:0] a,
  output logic [3:0] q
);
  logic [1:0] ah, al, s, d, dinv;
  always_comb begin
    ah   = a[3:2];
    al   = a[1:0];
    s    = ah ^ al;
    d    = gf2_mul_phi(gf2_sq(ah)) ^ gf2_mul(s, al);
    dinv = gf2_sq(d);
    q    = {gf2_mul(ah, dinv), gf2_mul(s, dinv)};
  end
endmodule
