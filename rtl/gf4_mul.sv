// gf4_mul: general multiplier in GF((2^2)^2) (the "x" blocks of the S-box).
//
// Karatsuba form over GF(2^2): with a = ah y + al, b = bh y + bl and y^2 = y + PHI,
//   a*b = ah bh (y + PHI) + (ah bl + al bh) y + al bl
//   high = (ah+al)(bh+bl) + al bl,   low = al bl + PHI ah bh.
// Three GF(2^2) multipliers and one multiply by PHI. Combinational. The paper uses this
// multiplier three times per S-box copy but does not give its insides; the Karatsuba form
// is this design's choice.
module gf4_mul
  import hfs_pkg::*;
(
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [3:0] q
);
  logic [1:0] hh, ll, mm;
  always_comb begin
    hh = gf2_mul(a[3:2], b[3:2]);
    ll = gf2_mul(a[1:0], b[1:0]);
    mm = gf2_mul(a[3:2] ^ a[1:0], b[3:2] ^ b[1:0]);
    q  = {mm ^ ll, ll ^ gf2_mul_phi(hh)};
  end
endmodule
